// glsu: Global Load-Store Unit, the single memory port shared by all
// vector clusters.
//
// The GLSU replaces the all-to-all byte network of a monolithic vector
// load-store unit with a pipelined interconnect.  It snoops the broadcast
// instruction stream (glsu_decode), turns each unit-stride vector load or
// store into AXI bursts of full bus words (glsu_addrgen, which also fills
// the load/store tables), and moves the data through two pipelines:
//   load : AXI R -> tag -> Align (rotate right, merge) -> Shuffle -> cuts
//          -> clusters
//   store: clusters -> cuts -> tag -> Shuffle (inverse) -> Align (rotate
//          left, strobes) -> AXI W
// After the GLSU each cluster sees its own elements as a plain, aligned
// byte stream of 4*L bytes per beat (its slot of the 32*L*C-bit cluster
// bus), so the cluster-local load-store unit only has to spread bytes over
// its lanes.
//
// Cluster interface: all clusters move in lock-step.  A load beat is
// offered to every cluster with one valid and completes when all are
// ready; ld_mask_o marks the bytes that belong to the access.  A store beat
// completes when every cluster offers data while st_req_o is high; cluster
// c supplies the next 4*L bytes of its own elements in order (for 64-bit
// elements the stream is padded to an even number of beats); st_ew_o and
// st_parity_o tell the clusters how to pack their lanes.  st_done_o pulses when the last
// write response of a store has arrived.
//
// Timing: one bus word per cycle in each direction.  NUM_CUTS register
// cuts sit on the cluster-side data links in each direction; AXI uses a
// single ID, so bursts complete in order.  Loads and stores are processed
// in program order by the address generator; ordering between an
// outstanding store and a later load is left to the issuing clusters.
// rst_ni is an asynchronous active-low reset. The assertions also use it
// as their disable condition, so a lint tool may report the reset as used
// both asynchronously and synchronously; that use is only in checks.
// The decoder's vl and vtype copies are not needed here; those outputs are
// left open.
module glsu
  import araxl_pkg::*;
#(
  parameter int unsigned NR_LANES    = araxl_pkg::NrLanes,
  parameter int unsigned NR_CLUSTERS = araxl_pkg::NrClusters,
  parameter int unsigned VLEN_BITS   = araxl_pkg::VLEN,
  parameter int unsigned NUM_CUTS    = araxl_pkg::NumGlsuCuts,
  localparam int unsigned SlotBytes  = 4 * NR_LANES,
  localparam int unsigned BusBytes   = SlotBytes * NR_CLUSTERS
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // instruction snoop from the request interface
  input  acc_req_t                     insn_i,
  input  logic                         insn_valid_i,
  output logic                         insn_ready_o,
  // load data to the clusters
  output logic [NR_CLUSTERS-1:0][SlotBytes*8-1:0] ld_data_o,
  output logic [NR_CLUSTERS-1:0][SlotBytes-1:0]   ld_mask_o,
  output logic                         ld_last_o,
  output vew_e                         ld_ew_o,
  output logic                         ld_valid_o,
  input  logic [NR_CLUSTERS-1:0]       ld_ready_i,
  // store data from the clusters
  input  logic [NR_CLUSTERS-1:0][SlotBytes*8-1:0] st_data_i,
  input  logic [NR_CLUSTERS-1:0]       st_valid_i,
  output logic                         st_ready_o,
  output logic                         st_req_o,      // a store is waiting for data
  output vew_e                         st_ew_o,       // its element width
  output logic                         st_parity_o,   // parity of the next store beat
  output logic                         st_done_o,
  output logic                         axi_err_o,
  // AXI4 master (single ID, INCR bursts of full bus words)
  output addr_t                        ar_addr_o,
  output logic [7:0]                   ar_len_o,
  output logic [3:0]                   ar_size_o,
  output logic                         ar_valid_o,
  input  logic                         ar_ready_i,
  input  logic [BusBytes*8-1:0]        r_data_i,
  input  logic [1:0]                   r_resp_i,
  input  logic                         r_last_i,      // not needed: beats are counted
  input  logic                         r_valid_i,
  output logic                         r_ready_o,
  output addr_t                        aw_addr_o,
  output logic [7:0]                   aw_len_o,
  output logic [3:0]                   aw_size_o,
  output logic                         aw_valid_o,
  input  logic                         aw_ready_i,
  output logic [BusBytes*8-1:0]        w_data_o,
  output logic [BusBytes-1:0]          w_strb_o,
  output logic                         w_last_o,
  output logic                         w_valid_o,
  input  logic                         w_ready_i,
  input  logic [1:0]                   b_resp_i,
  input  logic                         b_valid_i,
  output logic                         b_ready_o
);

  localparam int unsigned OffW = $clog2(BusBytes);
  typedef logic [BusBytes*8-1:0] word_t;
  typedef logic [BusBytes-1:0]   mask_t;

  // ---------------------------------------------------------------------
  // Decode and address generation
  // ---------------------------------------------------------------------
  glsu_req_t req;
  logic      req_valid, req_ready;

  glsu_decode #(.VLEN_BITS(VLEN_BITS)) i_decode (
    .clk_i, .rst_ni,
    .insn_i, .insn_valid_i, .insn_ready_o,
    .req_o(req), .req_valid_o(req_valid), .req_ready_i(req_ready),
    .vl_o(), .vtype_o()
  );

  addr_t      ax_addr;
  logic [7:0] ax_len;
  logic [3:0] ax_size;
  logic       ax_store, ax_last, ax_valid, ax_ready;
  beat_meta_t tbl;
  logic       tbl_store, tbl_valid, tbl_ready;

  glsu_addrgen #(.AXI_BYTES(BusBytes)) i_addrgen (
    .clk_i, .rst_ni,
    .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .ax_addr_o(ax_addr), .ax_len_o(ax_len), .ax_size_o(ax_size),
    .ax_store_o(ax_store), .ax_last_o(ax_last),
    .ax_valid_o(ax_valid), .ax_ready_i(ax_ready),
    .tbl_o(tbl), .tbl_store_o(tbl_store), .tbl_valid_o(tbl_valid), .tbl_ready_i(tbl_ready)
  );

  // load and store tables
  beat_meta_t ld_tbl, st_tbl;
  logic       ld_tbl_v, ld_tbl_r, st_tbl_v, st_tbl_r, ld_tbl_in_r, st_tbl_in_r;

  fifo_v #(.T(beat_meta_t), .DEPTH(4)) i_ld_tbl (
    .clk_i, .rst_ni,
    .valid_i(tbl_valid && !tbl_store), .ready_o(ld_tbl_in_r), .data_i(tbl),
    .valid_o(ld_tbl_v), .ready_i(ld_tbl_r), .data_o(ld_tbl)
  );
  fifo_v #(.T(beat_meta_t), .DEPTH(4)) i_st_tbl (
    .clk_i, .rst_ni,
    .valid_i(tbl_valid && tbl_store), .ready_o(st_tbl_in_r), .data_i(tbl),
    .valid_o(st_tbl_v), .ready_i(st_tbl_r), .data_o(st_tbl)
  );
  assign tbl_ready = tbl_store ? st_tbl_in_r : ld_tbl_in_r;

  // write-burst bookkeeping: burst length for WLAST, last-burst flag for B
  typedef struct packed { logic [7:0] len; logic last; } wb_t;
  wb_t  wb_head, bb_head;
  logic wb_v, wb_r, wb_in_r, bb_v, bb_r, bb_in_r;

  assign ar_addr_o  = ax_addr;
  assign ar_len_o   = ax_len;
  assign ar_size_o  = ax_size;
  assign ar_valid_o = ax_valid && !ax_store;
  assign aw_addr_o  = ax_addr;
  assign aw_len_o   = ax_len;
  assign aw_size_o  = ax_size;
  assign aw_valid_o = ax_valid && ax_store && wb_in_r && bb_in_r;
  assign ax_ready   = ax_store ? (aw_ready_i && wb_in_r && bb_in_r) : ar_ready_i;

  wire aw_hs = aw_valid_o && aw_ready_i;

  fifo_v #(.T(wb_t), .DEPTH(4)) i_wburst (
    .clk_i, .rst_ni,
    .valid_i(aw_hs), .ready_o(wb_in_r), .data_i('{len: ax_len, last: ax_last}),
    .valid_o(wb_v), .ready_i(wb_r), .data_o(wb_head)
  );
  fifo_v #(.T(wb_t), .DEPTH(8)) i_bburst (
    .clk_i, .rst_ni,
    .valid_i(aw_hs), .ready_o(bb_in_r), .data_i('{len: ax_len, last: ax_last}),
    .valid_o(bb_v), .ready_i(bb_r), .data_o(bb_head)
  );

  // ---------------------------------------------------------------------
  // Load path
  // ---------------------------------------------------------------------
  // tag R beats with the table entry of their access
  logic [31:0] rcnt_q;
  beat_meta_t  r_meta;
  always_comb begin
    logic [31:0] nin;
    nin          = (ld_tbl.nbytes + 32'(ld_tbl.off[OffW-1:0]) + BusBytes - 1) >> OffW;
    r_meta       = ld_tbl;
    r_meta.first = (rcnt_q == 0);
    r_meta.last  = (rcnt_q == nin - 1);
  end

  word_t      la_d;
  mask_t      la_m;
  beat_meta_t la_x;
  logic       la_v, la_r, ra_r;

  assign r_ready_o = ld_tbl_v && ra_r;
  assign ld_tbl_r  = r_valid_i && r_ready_o && r_meta.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rcnt_q <= '0;
    else if (r_valid_i && r_ready_o) rcnt_q <= r_meta.last ? '0 : rcnt_q + 1;
  end

  glsu_align #(.AXI_BYTES(BusBytes), .STORE(1'b0)) i_ld_align (
    .clk_i, .rst_ni,
    .data_i(r_data_i), .meta_i(r_meta), .valid_i(r_valid_i && ld_tbl_v), .ready_o(ra_r),
    .data_o(la_d), .mask_o(la_m), .meta_o(la_x), .valid_o(la_v), .ready_i(la_r)
  );

  word_t      ls_d;
  mask_t      ls_m;
  beat_meta_t ls_x;
  logic       ls_v, ls_r;

  glsu_shuffle #(.NR_LANES(NR_LANES), .NR_CLUSTERS(NR_CLUSTERS), .STORE(1'b0)) i_ld_shuffle (
    .clk_i, .rst_ni,
    .data_i(la_d), .mask_i(la_m), .meta_i(la_x), .valid_i(la_v), .ready_o(la_r),
    .data_o(ls_d), .mask_o(ls_m), .meta_o(ls_x), .valid_o(ls_v), .ready_i(ls_r)
  );

  typedef struct packed { word_t d; mask_t m; logic last; vew_e ew; } ld_beat_t;
  ld_beat_t lc;
  logic     lc_v;
  wire      lc_r = &ld_ready_i;

  cut_chain #(.T(ld_beat_t), .NUM_CUTS(NUM_CUTS)) i_ld_cuts (
    .clk_i, .rst_ni,
    .valid_i(ls_v), .ready_o(ls_r), .data_i('{d: ls_d, m: ls_m, last: ls_x.last, ew: ls_x.ew}),
    .valid_o(lc_v), .ready_i(lc_r), .data_o(lc)
  );

  for (genvar c = 0; c < NR_CLUSTERS; c++) begin : g_ld_out
    assign ld_data_o[c] = lc.d[c*SlotBytes*8 +: SlotBytes*8];
    assign ld_mask_o[c] = lc.m[c*SlotBytes +: SlotBytes];
  end
  assign ld_last_o  = lc.last;
  assign ld_ew_o    = lc.ew;
  assign ld_valid_o = lc_v;

  // ---------------------------------------------------------------------
  // Store path
  // ---------------------------------------------------------------------
  // cluster beats are tagged with the store table entry on the cluster
  // side, so the clusters can be told the element width and beat parity
  word_t sc_in;
  for (genvar c = 0; c < NR_CLUSTERS; c++) begin : g_st_in
    assign sc_in[c*SlotBytes*8 +: SlotBytes*8] = st_data_i[c];
  end
  wire st_all_v = &st_valid_i;

  logic [31:0] scnt_q;
  beat_meta_t  s_meta;
  always_comb begin
    logic [31:0] nmem, ncl;
    nmem         = (st_tbl.nbytes + BusBytes - 1) >> OffW;
    ncl          = (st_tbl.ew == EW64) ? ((nmem + 1) & ~32'd1) : nmem;
    s_meta       = st_tbl;
    s_meta.first = (scnt_q == 0);
    s_meta.last  = (scnt_q == ncl - 1);
    s_meta.drop1 = (st_tbl.ew == EW64) && scnt_q[0] && (scnt_q >= nmem);
  end

  typedef struct packed { word_t d; beat_meta_t x; } st_beat_t;
  st_beat_t sc;
  logic     sc_v, sc_r, sci_r;

  assign st_req_o    = st_tbl_v;
  assign st_ew_o     = st_tbl.ew;
  assign st_parity_o = scnt_q[0];
  assign st_ready_o  = st_tbl_v && sci_r;
  assign st_tbl_r    = st_all_v && st_ready_o && s_meta.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) scnt_q <= '0;
    else if (st_all_v && st_ready_o) scnt_q <= s_meta.last ? '0 : scnt_q + 1;
  end

  cut_chain #(.T(st_beat_t), .NUM_CUTS(NUM_CUTS)) i_st_cuts (
    .clk_i, .rst_ni,
    .valid_i(st_all_v && st_tbl_v), .ready_o(sci_r), .data_i('{d: sc_in, x: s_meta}),
    .valid_o(sc_v), .ready_i(sc_r), .data_o(sc)
  );

  word_t      ss_d;
  mask_t      ss_m;
  beat_meta_t ss_x;
  logic       ss_v, ss_r;

  glsu_shuffle #(.NR_LANES(NR_LANES), .NR_CLUSTERS(NR_CLUSTERS), .STORE(1'b1)) i_st_shuffle (
    .clk_i, .rst_ni,
    .data_i(sc.d), .mask_i('1), .meta_i(sc.x), .valid_i(sc_v), .ready_o(sc_r),
    .data_o(ss_d), .mask_o(ss_m), .meta_o(ss_x), .valid_o(ss_v), .ready_i(ss_r)
  );

  mask_t      wa_m;
  beat_meta_t wa_x;
  logic       wa_v;

  glsu_align #(.AXI_BYTES(BusBytes), .STORE(1'b1)) i_st_align (
    .clk_i, .rst_ni,
    .data_i(ss_d), .meta_i(ss_x), .valid_i(ss_v), .ready_o(ss_r),
    .data_o(w_data_o), .mask_o(wa_m), .meta_o(wa_x), .valid_o(wa_v), .ready_i(w_ready_i && wb_v)
  );

  // W channel: bursts as issued on AW
  logic [7:0] wcnt_q;
  assign w_strb_o  = wa_m;
  assign w_valid_o = wa_v && wb_v;
  assign w_last_o  = (wcnt_q == wb_head.len);
  assign wb_r      = w_valid_o && w_ready_i && w_last_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) wcnt_q <= '0;
    else if (w_valid_o && w_ready_i) wcnt_q <= w_last_o ? '0 : wcnt_q + 1;
  end

  // B channel: done after the last burst of a store
  assign b_ready_o = bb_v;
  assign bb_r      = b_valid_i && bb_v;

  logic done_q, err_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      done_q <= 1'b0;
      err_q  <= 1'b0;
    end else begin
      done_q <= b_valid_i && b_ready_o && bb_head.last;
      if ((b_valid_i && b_ready_o && b_resp_i[1]) || (r_valid_i && r_ready_o && r_resp_i[1]))
        err_q <= 1'b1;
    end
  end
  assign st_done_o = done_q;
  assign axi_err_o = err_q;

  // a load beat offered to the clusters stays put until all have taken it
  a_ld_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ld_valid_o && !lc_r |=> ld_valid_o && $stable(ld_data_o)) else $error("GLSU: load beat changed");

endmodule
