// l2_forward: port forwarding table and MAC rewrite table.
//
// The proxy's pipeline is, at its core, a layer-2 forwarder. For each ingress
// port, the port table gives the egress port for forwarded traffic and whether
// the port faces the clients (untrusted side, where the proxy authenticates)
// or the protected servers. For each egress port, the MAC table gives the
// source and destination MAC addresses written into every packet leaving on
// that port. Reflected handshake replies (SYN/ACK, RST) leave on their
// ingress port and use that port's MAC entry.
//
// Both tables are registers written by the control plane through cfg_*
// (cfg_sel 0: port table entry {client_side, egress}; 1: MAC entry
// {src, dst}); there is one entry per value of the 2-bit port number.
// Lookups are combinational. After reset, port i forwards to
// port i^1, even ports face clients and all MACs are zero.
//
// The L2 forwarding and MAC rewrite by table lookup follow the paper; the
// table layout and the reset contents are this design's choices.
module l2_forward
  import syn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // control-plane writes
  input  logic              cfg_we,
  input  logic              cfg_sel,
  input  logic [PORT_W-1:0] cfg_addr,
  input  logic [95:0]       cfg_data,
  // lookups
  input  logic [PORT_W-1:0] in_port,
  output logic [PORT_W-1:0] fwd_port,
  output logic              client_side,
  input  logic [PORT_W-1:0] out_port,
  output logic [47:0]       src_mac,
  output logic [47:0]       dst_mac
);
  typedef struct packed {
    logic              client_side;
    logic [PORT_W-1:0] egress;
  } port_entry_t;

  localparam int unsigned N_PORTS = 1 << PORT_W;

  port_entry_t port_tab [N_PORTS];
  logic [95:0] mac_tab  [N_PORTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PORTS; i++) begin
        port_tab[i].egress      <= PORT_W'(i ^ 1);
        port_tab[i].client_side <= (i % 2 == 0);
        mac_tab[i]              <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_sel) mac_tab[cfg_addr]  <= cfg_data;
      else         port_tab[cfg_addr] <= cfg_data[PORT_W:0];
    end
  end

  always_comb begin
    fwd_port           = port_tab[in_port].egress;
    client_side        = port_tab[in_port].client_side;
    {src_mac, dst_mac} = mac_tab[out_port];
  end
endmodule
