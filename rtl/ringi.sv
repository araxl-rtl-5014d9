// ringi: Ring Interface connecting the slide units of all clusters.
//
// NR_CLUSTERS ring nodes (ring_xbar) closed into a bidirectional ring:
// node c's upward output feeds node (c+1) mod C and its downward output
// feeds node (c-1) mod C.  Every link holds NUM_CUTS extra register cuts
// on top of the one register each node puts on its outputs.  The ring
// carries the slide-by-1 boundary elements between neighbouring clusters
// and the multi-hop packets of the inter-cluster reduction tree.
//
// Timing: one hop takes 1 + NUM_CUTS cycles; each link carries one 64-bit
// packet per cycle per direction.
// Flow control is plain valid/ready without bubble reservation: a ring
// filled with multi-hop packets that no receiver drains could block.  The
// slide units inject at most one packet per direction per step and always
// drain what they receive, so this cannot happen in this design.
// The ring topology, the two 64-bit directions and the cuts per link follow
// the paper; the packet format and the flow control are this design's.
// rst_ni is an asynchronous active-low reset. The submodules' assertions use it
// as their disable condition, so a lint tool may report the reset as used
// both asynchronously and synchronously; that use is only in checks.
module ringi
  import araxl_pkg::*;
#(
  parameter int unsigned NR_CLUSTERS = araxl_pkg::NrClusters,
  parameter int unsigned NUM_CUTS    = araxl_pkg::NumRingCuts
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  ring_pkt_t [NR_CLUSTERS-1:0]  tx_up_i,
  input  logic      [NR_CLUSTERS-1:0]  tx_up_valid_i,
  output logic      [NR_CLUSTERS-1:0]  tx_up_ready_o,
  input  ring_pkt_t [NR_CLUSTERS-1:0]  tx_dn_i,
  input  logic      [NR_CLUSTERS-1:0]  tx_dn_valid_i,
  output logic      [NR_CLUSTERS-1:0]  tx_dn_ready_o,
  output ring_pkt_t [NR_CLUSTERS-1:0]  rx_up_o,
  output logic      [NR_CLUSTERS-1:0]  rx_up_valid_o,
  input  logic      [NR_CLUSTERS-1:0]  rx_up_ready_i,
  output ring_pkt_t [NR_CLUSTERS-1:0]  rx_dn_o,
  output logic      [NR_CLUSTERS-1:0]  rx_dn_valid_o,
  input  logic      [NR_CLUSTERS-1:0]  rx_dn_ready_i,
  output logic      [NR_CLUSTERS-1:0]  bypass_o
);

  localparam int unsigned C = NR_CLUSTERS;

  // node outputs and the inputs they reach after the cuts
  ring_pkt_t [C-1:0] on_d, op_d, ip_d, in_d;
  logic      [C-1:0] on_v, on_r, op_v, op_r, ip_v, ip_r, in_v, in_r;

  for (genvar c = 0; c < C; c++) begin : g_node
    localparam int unsigned Nx = (c + 1) % C;
    localparam int unsigned Pv = (c + C - 1) % C;

    ring_xbar i_xbar (
      .clk_i, .rst_ni,
      .in_prev_i(ip_d[c]), .in_prev_valid_i(ip_v[c]), .in_prev_ready_o(ip_r[c]),
      .in_next_i(in_d[c]), .in_next_valid_i(in_v[c]), .in_next_ready_o(in_r[c]),
      .out_next_o(on_d[c]), .out_next_valid_o(on_v[c]), .out_next_ready_i(on_r[c]),
      .out_prev_o(op_d[c]), .out_prev_valid_o(op_v[c]), .out_prev_ready_i(op_r[c]),
      .tx_up_i(tx_up_i[c]), .tx_up_valid_i(tx_up_valid_i[c]), .tx_up_ready_o(tx_up_ready_o[c]),
      .tx_dn_i(tx_dn_i[c]), .tx_dn_valid_i(tx_dn_valid_i[c]), .tx_dn_ready_o(tx_dn_ready_o[c]),
      .rx_up_o(rx_up_o[c]), .rx_up_valid_o(rx_up_valid_o[c]), .rx_up_ready_i(rx_up_ready_i[c]),
      .rx_dn_o(rx_dn_o[c]), .rx_dn_valid_o(rx_dn_valid_o[c]), .rx_dn_ready_i(rx_dn_ready_i[c]),
      .bypass_o(bypass_o[c])
    );

    // link c -> c+1 (upward)
    cut_chain #(.T(ring_pkt_t), .NUM_CUTS(NUM_CUTS)) i_up_link (
      .clk_i, .rst_ni,
      .valid_i(on_v[c]),  .ready_o(on_r[c]),  .data_i(on_d[c]),
      .valid_o(ip_v[Nx]), .ready_i(ip_r[Nx]), .data_o(ip_d[Nx])
    );
    // link c -> c-1 (downward)
    cut_chain #(.T(ring_pkt_t), .NUM_CUTS(NUM_CUTS)) i_dn_link (
      .clk_i, .rst_ni,
      .valid_i(op_v[c]),  .ready_o(op_r[c]),  .data_i(op_d[c]),
      .valid_o(in_v[Pv]), .ready_i(in_r[Pv]), .data_o(in_d[Pv])
    );
  end

endmodule
