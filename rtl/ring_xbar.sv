// ring_xbar: ring node of one cluster (the "Ring XBAR" of the ring
// interface).
//
// Each cluster drives two 64-bit ring buses, one towards the next cluster
// ("up", increasing cluster index) and one towards the previous cluster
// ("down"), and receives the two buses coming from its neighbours.  A packet
// carries a hop count: a packet arriving with hops > 1 is not for this
// cluster and is bypassed to the onward bus with hops - 1; a packet with
// hops = 1 is delivered to the local slide unit.  Bypass traffic has
// priority over packets injected by the local slide unit.
//
// Timing: both outgoing buses leave through a fully decoupled register
// slice, so every hop costs one cycle and no combinational path (data or
// ready) runs from one cluster to the next; this also keeps the closed ring
// free of combinational loops.  Delivery to the local unit is
// combinational from the incoming bus.
// Two outputs and two inputs of 64 bits per cluster and multi-hop bypass
// are the paper's; the packet format and the priority are this design's.
// rst_ni is an asynchronous active-low reset. The assertions also use it
// as their disable condition, so a lint tool may report the reset as used
// both asynchronously and synchronously; that use is only in checks.
module ring_xbar
  import araxl_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  // ring side
  input  ring_pkt_t in_prev_i,      // bus from the previous cluster (travels up)
  input  logic      in_prev_valid_i,
  output logic      in_prev_ready_o,
  input  ring_pkt_t in_next_i,      // bus from the next cluster (travels down)
  input  logic      in_next_valid_i,
  output logic      in_next_ready_o,
  output ring_pkt_t out_next_o,
  output logic      out_next_valid_o,
  input  logic      out_next_ready_i,
  output ring_pkt_t out_prev_o,
  output logic      out_prev_valid_o,
  input  logic      out_prev_ready_i,
  // local slide unit side
  input  ring_pkt_t tx_up_i,        // inject towards the next cluster
  input  logic      tx_up_valid_i,
  output logic      tx_up_ready_o,
  input  ring_pkt_t tx_dn_i,        // inject towards the previous cluster
  input  logic      tx_dn_valid_i,
  output logic      tx_dn_ready_o,
  output ring_pkt_t rx_up_o,        // delivered from the previous cluster
  output logic      rx_up_valid_o,
  input  logic      rx_up_ready_i,
  output ring_pkt_t rx_dn_o,        // delivered from the next cluster
  output logic      rx_dn_valid_o,
  input  logic      rx_dn_ready_i,
  // activity, for statistics
  output logic      bypass_o
);

  // one direction of the node
  ring_pkt_t up_d, dn_d;
  logic      up_v, up_r, dn_v, dn_r;

  // ---- upward: previous -> next ----
  wire up_bypass = in_prev_valid_i && (in_prev_i.hops > 8'd1);
  always_comb begin
    up_d      = up_bypass ? in_prev_i : tx_up_i;
    up_d.hops = up_bypass ? in_prev_i.hops - 8'd1 : tx_up_i.hops;
  end
  assign up_v            = up_bypass || tx_up_valid_i;
  assign tx_up_ready_o   = !up_bypass && up_r;
  assign rx_up_o         = in_prev_i;
  assign rx_up_valid_o   = in_prev_valid_i && !up_bypass;
  assign in_prev_ready_o = up_bypass ? up_r : rx_up_ready_i;

  // ---- downward: next -> previous ----
  wire dn_bypass = in_next_valid_i && (in_next_i.hops > 8'd1);
  always_comb begin
    dn_d      = dn_bypass ? in_next_i : tx_dn_i;
    dn_d.hops = dn_bypass ? in_next_i.hops - 8'd1 : tx_dn_i.hops;
  end
  assign dn_v            = dn_bypass || tx_dn_valid_i;
  assign tx_dn_ready_o   = !dn_bypass && dn_r;
  assign rx_dn_o         = in_next_i;
  assign rx_dn_valid_o   = in_next_valid_i && !dn_bypass;
  assign in_next_ready_o = dn_bypass ? dn_r : rx_dn_ready_i;

  assign bypass_o = (up_bypass && up_r) || (dn_bypass && dn_r);

  spill_reg #(.T(ring_pkt_t)) i_out_next (
    .clk_i, .rst_ni,
    .valid_i(up_v), .ready_o(up_r), .data_i(up_d),
    .valid_o(out_next_valid_o), .ready_i(out_next_ready_i), .data_o(out_next_o)
  );
  spill_reg #(.T(ring_pkt_t)) i_out_prev (
    .clk_i, .rst_ni,
    .valid_i(dn_v), .ready_o(dn_r), .data_i(dn_d),
    .valid_o(out_prev_valid_o), .ready_i(out_prev_ready_i), .data_o(out_prev_o)
  );

  // a packet is never injected with zero hops
  a_hops_up: assert property (@(posedge clk_i) disable iff (!rst_ni)
    tx_up_valid_i |-> tx_up_i.hops != 8'd0) else $error("ring_xbar: zero-hop packet");
  a_hops_dn: assert property (@(posedge clk_i) disable iff (!rst_ni)
    tx_dn_valid_i |-> tx_dn_i.hops != 8'd0) else $error("ring_xbar: zero-hop packet");

endmodule
