// araxl: top level of the AraXL vector interconnect.
//
// AraXL builds a very wide RISC-V vector machine out of C identical
// clusters of L lanes (main configuration: 16 clusters x 4 lanes = 64
// lanes, VLEN = 64 Kibit).  The clusters are complete small vector units
// (dispatcher, sequencer, lanes with register-file slices and FPUs, local
// mask/slide/load-store units); they are outside this module, which holds
// the three scalable interfaces that make them act as one accelerator:
//   REQI  - reqi: broadcasts every vector instruction from the scalar core
//           to all clusters (and to the GLSU decoder); cluster 0 answers;
//   GLSU  - glsu: the one AXI memory port, with pipelined align and shuffle
//           stages that deliver to cluster (i / L) mod C the bytes of its
//           elements; per cluster, vlsu_lane_shuffle then spreads them over
//           the lanes (element i -> lane i mod L);
//   RINGI - ringi + one sldu_ring per cluster: a bidirectional 64-bit ring
//           for slide-by-1 and the inter-cluster reduction tree;
// plus the invalidation filter that turns the GLSU's write bursts into
// cache-line invalidations for the scalar core's data cache.
//
// Ports: the scalar-core request/response pair; the broadcast and cluster
// 0 answer of each cluster; per cluster and lane the 64-bit load/store
// words with byte enables; per cluster the slide-unit command, source and
// result groups, reduction partials; the AXI master towards the memory
// crossbar; the invalidation output towards the data cache.  The NUM_*_CUTS
// parameters add register cuts to the three interfaces (0 = baseline).
// rst_ni is an asynchronous active-low reset. The submodules' assertions use it
// as their disable condition, so a lint tool may report the reset as used
// both asynchronously and synchronously; that use is only in checks.
// Each cluster gets two lane shuffles, one per direction, and only one
// half of each is connected; the other half's ports are left open on purpose.
module araxl
  import araxl_pkg::*;
#(
  parameter int unsigned NR_LANES      = araxl_pkg::NrLanes,
  parameter int unsigned NR_CLUSTERS   = araxl_pkg::NrClusters,
  parameter int unsigned VLEN_BITS     = araxl_pkg::VLEN,
  parameter int unsigned NUM_REQ_CUTS  = araxl_pkg::NumReqCuts,
  parameter int unsigned NUM_GLSU_CUTS = araxl_pkg::NumGlsuCuts,
  parameter int unsigned NUM_RING_CUTS = araxl_pkg::NumRingCuts,
  localparam int unsigned L        = NR_LANES,
  localparam int unsigned C        = NR_CLUSTERS,
  localparam int unsigned BusBytes = 4 * L * C
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // ---------------- scalar core ----------------
  input  acc_req_t                    core_req_i,
  input  logic                        core_req_valid_i,
  output logic                        core_req_ready_o,
  output acc_resp_t                   core_resp_o,
  output logic                        core_resp_valid_o,
  input  logic                        core_resp_ready_i,
  output addr_t                       inval_addr_o,
  output logic                        inval_valid_o,
  input  logic                        inval_ready_i,
  // ---------------- clusters: instruction broadcast ----------------
  output acc_req_t                    cl_req_o,
  output logic [C-1:0]                cl_req_valid_o,
  input  logic [C-1:0]                cl_req_ready_i,
  input  acc_resp_t                   cl0_resp_i,
  input  logic                        cl0_resp_valid_i,
  output logic                        cl0_resp_ready_o,
  // ---------------- clusters: memory data, per lane ----------------
  output logic [C-1:0][L-1:0][63:0]   ld_lane_o,
  output logic [C-1:0][L-1:0][7:0]    ld_be_o,
  output logic                        ld_last_o,
  output logic                        ld_valid_o,
  input  logic [C-1:0]                ld_ready_i,
  input  logic [C-1:0][L-1:0][63:0]   st_lane_i,
  input  logic [C-1:0]                st_valid_i,
  output logic                        st_ready_o,
  output logic                        st_req_o,
  output logic                        st_done_o,
  output logic                        axi_err_o,
  // ---------------- clusters: slide units ----------------
  input  ring_op_e                    sl_op_i,
  input  red_op_e                     sl_red_op_i,
  input  vlen_t                       sl_vl_i,
  input  xlen_t                       sl_scalar_i,
  input  logic [C-1:0]                sl_cmd_valid_i,
  output logic [C-1:0]                sl_cmd_ready_o,
  output logic [C-1:0]                sl_done_o,
  input  xlen_t [C-1:0][L-1:0]        sl_grp_i,
  input  logic [C-1:0]                sl_grp_valid_i,
  output logic [C-1:0]                sl_grp_ready_o,
  output xlen_t [C-1:0][L-1:0]        sl_grp_o,
  output logic [C-1:0][L-1:0]         sl_grp_mask_o,
  output logic [C-1:0]                sl_grp_valid_o,
  input  logic [C-1:0]                sl_grp_ready_i,
  input  xlen_t [C-1:0]               sl_red_i,
  input  logic [C-1:0]                sl_red_valid_i,
  output logic [C-1:0]                sl_red_ready_o,
  output xlen_t                       sl_red_o,
  output logic                        sl_red_valid_o,
  input  logic                        sl_red_ready_i,
  // ---------------- AXI master to the memory crossbar ----------------
  output addr_t                       ar_addr_o,
  output logic [7:0]                  ar_len_o,
  output logic [3:0]                  ar_size_o,
  output logic                        ar_valid_o,
  input  logic                        ar_ready_i,
  input  logic [BusBytes*8-1:0]       r_data_i,
  input  logic [1:0]                  r_resp_i,
  input  logic                        r_last_i,
  input  logic                        r_valid_i,
  output logic                        r_ready_o,
  output addr_t                       aw_addr_o,
  output logic [7:0]                  aw_len_o,
  output logic [3:0]                  aw_size_o,
  output logic                        aw_valid_o,
  input  logic                        aw_ready_i,
  output logic [BusBytes*8-1:0]       w_data_o,
  output logic [BusBytes-1:0]         w_strb_o,
  output logic                        w_last_o,
  output logic                        w_valid_o,
  input  logic                        w_ready_i,
  input  logic [1:0]                  b_resp_i,
  input  logic                        b_valid_i,
  output logic                        b_ready_o,
  // ---------------- activity (statistics) ----------------
  output logic [C-1:0]                ring_bypass_o,
  output logic                        inval_filtered_o
);

  // ---------------------------------------------------------------------
  // REQI: clusters 0..C-1 plus the GLSU decoder (target C)
  // ---------------------------------------------------------------------
  acc_req_t     bc_req;
  logic [C:0]   bc_valid, bc_ready;

  reqi #(.NR_TARGETS(C + 1), .NUM_CUTS(NUM_REQ_CUTS)) i_reqi (
    .clk_i, .rst_ni,
    .core_req_i, .core_req_valid_i, .core_req_ready_o,
    .core_resp_o, .core_resp_valid_o, .core_resp_ready_i,
    .cl_req_o(bc_req), .cl_req_valid_o(bc_valid), .cl_req_ready_i(bc_ready),
    .cl0_resp_i, .cl0_resp_valid_i, .cl0_resp_ready_o
  );

  assign cl_req_o       = bc_req;
  assign cl_req_valid_o = bc_valid[C-1:0];
  assign bc_ready[C-1:0] = cl_req_ready_i;

  // ---------------------------------------------------------------------
  // GLSU
  // ---------------------------------------------------------------------
  logic [C-1:0][4*L*8-1:0] ld_slot, st_slot;
  logic [C-1:0][4*L-1:0]   ld_mask;
  vew_e                    ld_ew, st_ew;
  logic                    st_par;
  logic                    aw_valid_g, aw_ready_g, if_aw_ready;

  glsu #(
    .NR_LANES(L), .NR_CLUSTERS(C), .VLEN_BITS(VLEN_BITS), .NUM_CUTS(NUM_GLSU_CUTS)
  ) i_glsu (
    .clk_i, .rst_ni,
    .insn_i(bc_req), .insn_valid_i(bc_valid[C]), .insn_ready_o(bc_ready[C]),
    .ld_data_o(ld_slot), .ld_mask_o(ld_mask), .ld_last_o, .ld_ew_o(ld_ew),
    .ld_valid_o, .ld_ready_i,
    .st_data_i(st_slot), .st_valid_i, .st_ready_o, .st_req_o,
    .st_ew_o(st_ew), .st_parity_o(st_par), .st_done_o, .axi_err_o,
    .ar_addr_o, .ar_len_o, .ar_size_o, .ar_valid_o, .ar_ready_i,
    .r_data_i, .r_resp_i, .r_last_i, .r_valid_i, .r_ready_o,
    .aw_addr_o, .aw_len_o, .aw_size_o, .aw_valid_o(aw_valid_g), .aw_ready_i(aw_ready_g),
    .w_data_o, .w_strb_o, .w_last_o, .w_valid_o, .w_ready_i,
    .b_resp_i, .b_valid_i, .b_ready_o
  );

  // write bursts go out only when the invalidation filter can take them
  assign aw_valid_o = aw_valid_g && if_aw_ready;
  assign aw_ready_g = aw_ready_i && if_aw_ready;

  inval_filter i_inval (
    .clk_i, .rst_ni,
    .aw_addr_i(aw_addr_o), .aw_len_i(aw_len_o), .aw_size_i(aw_size_o),
    .aw_valid_i(aw_valid_g && aw_ready_i), .aw_ready_o(if_aw_ready),
    .inval_addr_o, .inval_valid_o, .inval_ready_i,
    .filtered_o(inval_filtered_o)
  );

  // parity of the load beat seen by the clusters (two beats fill a lane word)
  logic ld_par_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ld_par_q <= 1'b0;
    else if (ld_valid_o && (&ld_ready_i)) ld_par_q <= ld_last_o ? 1'b0 : ~ld_par_q;
  end

  for (genvar c = 0; c < C; c++) begin : g_lane_shuffle
    vlsu_lane_shuffle #(.NR_LANES(L)) i_lsh_ld (
      .ew_i(ld_ew), .parity_i(ld_par_q),
      .ld_slot_i(ld_slot[c]), .ld_mask_i(ld_mask[c]),
      .ld_lane_o(ld_lane_o[c]), .ld_be_o(ld_be_o[c]),
      .st_lane_i('0), .st_slot_o()
    );
    vlsu_lane_shuffle #(.NR_LANES(L)) i_lsh_st (
      .ew_i(st_ew), .parity_i(st_par),
      .ld_slot_i('0), .ld_mask_i('0), .ld_lane_o(), .ld_be_o(),
      .st_lane_i(st_lane_i[c]), .st_slot_o(st_slot[c])
    );
  end

  // ---------------------------------------------------------------------
  // RINGI and the slide-unit ring extensions
  // ---------------------------------------------------------------------
  ring_pkt_t [C-1:0] tx_up, tx_dn, rx_up, rx_dn;
  logic      [C-1:0] tx_up_v, tx_up_r, tx_dn_v, tx_dn_r, rx_up_v, rx_up_r, rx_dn_v, rx_dn_r;
  xlen_t     [C-1:0] red_out;
  logic      [C-1:0] red_out_v;

  ringi #(.NR_CLUSTERS(C), .NUM_CUTS(NUM_RING_CUTS)) i_ringi (
    .clk_i, .rst_ni,
    .tx_up_i(tx_up), .tx_up_valid_i(tx_up_v), .tx_up_ready_o(tx_up_r),
    .tx_dn_i(tx_dn), .tx_dn_valid_i(tx_dn_v), .tx_dn_ready_o(tx_dn_r),
    .rx_up_o(rx_up), .rx_up_valid_o(rx_up_v), .rx_up_ready_i(rx_up_r),
    .rx_dn_o(rx_dn), .rx_dn_valid_o(rx_dn_v), .rx_dn_ready_i(rx_dn_r),
    .bypass_o(ring_bypass_o)
  );

  for (genvar c = 0; c < C; c++) begin : g_sldu
    sldu_ring #(.NR_LANES(L), .NR_CLUSTERS(C)) i_sldu_ring (
      .clk_i, .rst_ni,
      .cluster_id_i(8'(c)),
      .op_i(sl_op_i), .red_op_i(sl_red_op_i), .vl_i(sl_vl_i), .scalar_i(sl_scalar_i),
      .cmd_valid_i(sl_cmd_valid_i[c]), .cmd_ready_o(sl_cmd_ready_o[c]), .done_o(sl_done_o[c]),
      .grp_i(sl_grp_i[c]), .grp_valid_i(sl_grp_valid_i[c]), .grp_ready_o(sl_grp_ready_o[c]),
      .grp_o(sl_grp_o[c]), .grp_mask_o(sl_grp_mask_o[c]),
      .grp_valid_o(sl_grp_valid_o[c]), .grp_ready_i(sl_grp_ready_i[c]),
      .red_i(sl_red_i[c]), .red_valid_i(sl_red_valid_i[c]), .red_ready_o(sl_red_ready_o[c]),
      .red_o(red_out[c]), .red_valid_o(red_out_v[c]), .red_ready_i(c == 0 ? sl_red_ready_i : 1'b1),
      .tx_up_o(tx_up[c]), .tx_up_valid_o(tx_up_v[c]), .tx_up_ready_i(tx_up_r[c]),
      .tx_dn_o(tx_dn[c]), .tx_dn_valid_o(tx_dn_v[c]), .tx_dn_ready_i(tx_dn_r[c]),
      .rx_up_i(rx_up[c]), .rx_up_valid_i(rx_up_v[c]), .rx_up_ready_o(rx_up_r[c]),
      .rx_dn_i(rx_dn[c]), .rx_dn_valid_i(rx_dn_v[c]), .rx_dn_ready_o(rx_dn_r[c])
    );
  end

  // the reduction result lives in cluster 0
  assign sl_red_o       = red_out[0];
  assign sl_red_valid_o = red_out_v[0];

endmodule
