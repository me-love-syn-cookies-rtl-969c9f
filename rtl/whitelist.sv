// whitelist: bitmap of authenticated clients with second-chance ageing.
//
// One 2-bit entry exists for every value of an IDX_W-bit index (the client's
// IPv4 source address by default, so 2^32 entries and 1 GiB of state). An entry
// is whitelisted while either bit is set. Entries are packed 32 to a 64-bit
// memory word; entry i lives in word i[IDX_W-1:5], bits 2*i[4:0]+1 : 2*i[4:0].
//
// Operations:
//   lookup  lk_valid/lk_idx at cycle t; lk_hit is valid at t+1 (lk_done). A hit
//           refreshes the entry to 2'b11 with a write at t+1 (second chance).
//   insert  ins_valid/ins_idx writes 2'b11 into the entry.
//   sweep   every SWEEP_INTERVAL cycles, or on sweep_req, a background pass
//           visits every word and clears one bit of each entry (11 -> 01,
//           01 -> 00). An entry not looked up during two passes is removed.
//
// The memory has one read and one write port with per-entry write enables.
// The packet datapath has priority on both; the sweeper reads a word when the
// read port is free and writes the aged word back when the write port is free.
// Entries the datapath writes while a sweeper write-back of the same word is
// pending are left out of that write-back, so a fresh insert or refresh is
// never aged away. After reset a clearing pass writes zero to every word
// (init_done rises when it ends, 2^(IDX_W-5) cycles later); lookups report a
// miss until then.
//
// The 2-bit second-chance entries, the sweep that clears one bit, and the
// bitmap indexed by source address follow the paper; the word packing, the
// port arbitration, the clearing pass and the sweep interval (the paper cites
// a 10 minute timeout) are this design's choices.
module whitelist #(
  parameter int unsigned     IDX_W          = 32,
  parameter longint unsigned SWEEP_INTERVAL = 64'd120_000_000_000  // 10 min at 200 MHz
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic             lk_valid,
  input  logic [IDX_W-1:0] lk_idx,
  output logic             lk_done,
  output logic             lk_hit,
  // insert
  input  logic             ins_valid,
  input  logic [IDX_W-1:0] ins_idx,
  // ageing
  input  logic             sweep_req,
  output logic             sweeping,
  output logic             init_done,
  output logic [31:0]      sweep_count
);
  localparam int unsigned WAW   = IDX_W - 5;        // word address width
  localparam int unsigned NWORD = 1 << WAW;

  logic [63:0] mem [NWORD];

  // ---------------- write port -----------------------------------------
  logic           we;
  logic [WAW-1:0] waddr;
  logic [31:0]    wen;      // per-entry enable
  logic [63:0]    wdata;

  always_ff @(posedge clk) begin
    if (we)
      for (int f = 0; f < 32; f++)
        if (wen[f]) mem[waddr][2*f +: 2] <= wdata[2*f +: 2];
  end

  // ---------------- read port ------------------------------------------
  logic           re;
  logic [WAW-1:0] raddr;
  logic [63:0]    rdata;

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  // ---------------- datapath side ---------------------------------------
  logic           lk_q;
  logic [IDX_W-1:0] lk_idx_q;
  logic [1:0]     lk_entry;

  assign lk_entry = rdata[2*lk_idx_q[4:0] +: 2];
  assign lk_done  = lk_q;
  assign lk_hit   = lk_q && init_done && (lk_entry != 2'b00);

  // datapath write this cycle: insert wins over a refresh of another word;
  // both merge when they hit the same word
  logic           dp_we;
  logic [WAW-1:0] dp_waddr;
  logic [31:0]    dp_wen;
  logic           touch;

  assign touch = lk_hit && (lk_entry != 2'b11);

  always_comb begin
    dp_we    = 1'b0;
    dp_waddr = '0;
    dp_wen   = '0;
    if (init_done) begin
      if (ins_valid) begin
        dp_we    = 1'b1;
        dp_waddr = ins_idx[IDX_W-1:5];
        dp_wen[ins_idx[4:0]] = 1'b1;
        if (touch && lk_idx_q[IDX_W-1:5] == ins_idx[IDX_W-1:5])
          dp_wen[lk_idx_q[4:0]] = 1'b1;
      end else if (touch) begin
        dp_we    = 1'b1;
        dp_waddr = lk_idx_q[IDX_W-1:5];
        dp_wen[lk_idx_q[4:0]] = 1'b1;
      end
    end
  end

  // ---------------- sweeper ----------------------------------------------
  logic [63:0]    timer;
  logic           sw_active;     // a pass is in progress
  logic           sw_clear;      // the pass is the post-reset clearing pass
  logic [WAW:0]   sw_rd_ptr;     // next word to read (bit WAW: all read)
  logic           sw_rd_q;       // a sweeper read was issued last cycle
  logic [WAW-1:0] sw_rd_addr_q;
  logic           sw_wb;         // write-back pending
  logic [WAW-1:0] sw_wb_addr;
  logic [63:0]    sw_wb_data;
  logic [31:0]    sw_wb_en;
  logic           sw_rd_go, sw_wb_go;
  logic [31:0]    sw_rd_mask_q;  // entries the datapath wrote in the read cycle

  function automatic logic [63:0] age_word(input logic [63:0] w);
    logic [63:0] r;
    for (int f = 0; f < 32; f++) r[2*f +: 2] = {1'b0, w[2*f+1]};
    return r;
  endfunction

  assign sweeping = sw_active;

  // the sweeper may read when the datapath does not and no write-back waits
  assign sw_rd_go = sw_active && !sw_clear && !sw_rd_ptr[WAW] && !lk_valid && !sw_wb && !sw_rd_q;
  // write-back (or clearing write) when the datapath does not write
  assign sw_wb_go = !dp_we && (sw_wb || (sw_clear && !sw_rd_ptr[WAW]));

  always_comb begin
    re    = lk_valid || sw_rd_go;
    raddr = lk_valid ? lk_idx[IDX_W-1:5] : sw_rd_ptr[WAW-1:0];
    if (dp_we) begin
      we    = 1'b1;
      waddr = dp_waddr;
      wen   = dp_wen;
      wdata = '1;
    end else if (sw_clear && sw_active) begin
      we    = !sw_rd_ptr[WAW];
      waddr = sw_rd_ptr[WAW-1:0];
      wen   = '1;
      wdata = '0;
    end else begin
      we    = sw_wb;
      waddr = sw_wb_addr;
      wen   = sw_wb_en;
      wdata = sw_wb_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_q         <= 1'b0;
      lk_idx_q     <= '0;
      timer        <= '0;
      sw_active    <= 1'b1;     // clearing pass right after reset
      sw_clear     <= 1'b1;
      sw_rd_ptr    <= '0;
      sw_rd_q      <= 1'b0;
      sw_rd_addr_q <= '0;
      sw_rd_mask_q <= '0;
      sw_wb        <= 1'b0;
      sw_wb_addr   <= '0;
      sw_wb_data   <= '0;
      sw_wb_en     <= '0;
      init_done    <= 1'b0;
      sweep_count  <= '0;
    end else begin
      lk_q     <= lk_valid;
      lk_idx_q <= lk_idx;

      // interval timer
      if (timer == SWEEP_INTERVAL - 1) timer <= '0;
      else                             timer <= timer + 64'd1;

      // start a pass
      if (!sw_active && init_done && (sweep_req || timer == SWEEP_INTERVAL - 1)) begin
        sw_active <= 1'b1;
        sw_rd_ptr <= '0;
      end

      if (sw_active && sw_clear) begin
        // clearing pass: one word per cycle the write port is free
        if (sw_wb_go) sw_rd_ptr <= sw_rd_ptr + 1'b1;
        if (sw_rd_ptr[WAW]) begin
          sw_active <= 1'b0;
          sw_clear  <= 1'b0;
          init_done <= 1'b1;
        end
      end else begin
        // ageing pass: read, then write back
        sw_rd_q <= sw_rd_go;
        if (sw_rd_go) begin
          sw_rd_addr_q <= sw_rd_ptr[WAW-1:0];
          sw_rd_mask_q <= (dp_we && dp_waddr == sw_rd_ptr[WAW-1:0]) ? dp_wen : '0;
          sw_rd_ptr    <= sw_rd_ptr + 1'b1;
        end
        if (sw_rd_q) begin
          sw_wb      <= 1'b1;
          sw_wb_addr <= sw_rd_addr_q;
          sw_wb_data <= age_word(rdata);
          // entries written by the datapath in this cycle are not aged
          sw_wb_en   <= ~(sw_rd_mask_q | ((dp_we && dp_waddr == sw_rd_addr_q) ? dp_wen : '0));
        end else if (sw_wb) begin
          if (sw_wb_go) sw_wb <= 1'b0;
          else if (dp_we && dp_waddr == sw_wb_addr) sw_wb_en <= sw_wb_en & ~dp_wen;
        end
        if (sw_active && sw_rd_ptr[WAW] && !sw_rd_q && !sw_wb) begin
          sw_active   <= 1'b0;
          sweep_count <= sweep_count + 32'd1;
        end
      end
    end
  end
endmodule
