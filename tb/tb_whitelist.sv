// tb_whitelist: checks the second-chance whitelist at a reduced size (4096
// entries) against a per-entry model: clearing after reset and its cycle
// count, insert and lookup, refresh on lookup, ageing by one bit per pass,
// removal after two passes without lookup, that inserts and lookups during a
// running pass are never aged away, and the interval timer (second instance).
module tb_whitelist;
  localparam int unsigned IDX_W = 12;
  localparam int unsigned N     = 1 << IDX_W;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             lk_valid, lk_done, lk_hit;
  logic [IDX_W-1:0] lk_idx, ins_idx;
  logic             ins_valid, sweep_req, sweeping, init_done;
  logic [31:0]      sweep_count;
  int checks = 0, failures = 0;
  logic [1:0] model [N];

  whitelist #(.IDX_W(IDX_W), .SWEEP_INTERVAL(64'hffff_ffff_ffff)) dut (.*);

  // second instance: ageing passes started by the interval timer alone
  logic        t_sweeping, t_init_done;
  logic [31:0] t_sweep_count;
  whitelist #(.IDX_W(8), .SWEEP_INTERVAL(64'd100)) dut_timer (
    .clk, .rst_n, .lk_valid(1'b0), .lk_idx('0), .lk_done(), .lk_hit(),
    .ins_valid(1'b0), .ins_idx('0), .sweep_req(1'b0),
    .sweeping(t_sweeping), .init_done(t_init_done), .sweep_count(t_sweep_count));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic lookup(input int i, output bit hit);
    @(negedge clk);
    lk_valid = 1'b1; lk_idx = IDX_W'(i);
    @(negedge clk);
    lk_valid = 1'b0;
    hit = lk_hit;
  endtask

  task automatic insert(input int i);
    @(negedge clk);
    ins_valid = 1'b1; ins_idx = IDX_W'(i);
    @(negedge clk);
    ins_valid = 1'b0;
  endtask

  task automatic sweep();
    @(negedge clk); sweep_req = 1'b1;
    @(negedge clk); sweep_req = 1'b0;
    while (sweeping) @(negedge clk);
  endtask

  task automatic lookup_check(input int i);
    bit hit;
    lookup(i, hit);
    check(hit == (model[i] != 0), $sformatf("lookup %0d hit=%0d model=%0d", i, hit, model[i]));
    if (model[i] != 0) model[i] = 2'b11;
  endtask

  initial begin
    int cyc, i0, sc;
    bit hit;
    int ins_list[$];
    rst_n = 1'b0; lk_valid = 1'b0; lk_idx = '0; ins_valid = 1'b0; ins_idx = '0; sweep_req = 1'b0;
    foreach (model[i]) model[i] = 2'b00;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    cyc = 0;
    while (!init_done) begin @(negedge clk); cyc++; end
    check(cyc == N / 32 + 1, $sformatf("clearing took %0d cycles", cyc));
    // everything clear
    for (int t = 0; t < 200; t++) lookup_check($urandom % N);
    // inserts, then lookups of a mix
    for (int t = 0; t < 300; t++) begin
      i0 = $urandom % N;
      insert(i0);
      model[i0] = 2'b11;
    end
    for (int t = 0; t < 400; t++) lookup_check($urandom % N);
    foreach (model[i]) if (model[i] != 0 && ($urandom % 4 == 0)) lookup_check(i);
    // one quiet pass: 11 -> 01
    sc = sweep_count;
    sweep();
    check(sweep_count == sc + 1, "sweep counted");
    foreach (model[i]) model[i] = {1'b0, model[i][1]};
    // refresh some entries, then a second pass removes the others
    foreach (model[i]) if (model[i] != 0 && ($urandom % 2 == 0)) lookup_check(i);
    sweep();
    foreach (model[i]) model[i] = {1'b0, model[i][1]};
    foreach (model[i]) lookup_check(i);
    // activity during a pass: inserted or looked-up entries must survive it
    foreach (model[i]) if ($urandom % 8 == 0) begin insert(i); model[i] = 2'b11; end
    @(negedge clk); sweep_req = 1'b1;
    @(negedge clk); sweep_req = 1'b0;
    while (sweeping) begin
      i0 = $urandom % N;
      if ($urandom % 2) begin
        insert(i0); ins_list.push_back(i0);
      end else begin
        lookup(i0, hit);
        if (hit) ins_list.push_back(i0);
      end
    end
    foreach (ins_list[k]) begin
      lookup(ins_list[k], hit);
      check(hit, $sformatf("entry %0d touched during the pass was aged away", ins_list[k]));
    end
    // the interval timer started passes on its own
    check(t_init_done && t_sweep_count >= 3, $sformatf("timer passes %0d", t_sweep_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
