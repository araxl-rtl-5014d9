// reqi: Request Interface between the scalar core and the vector clusters.
//
// The scalar core hands over one vector instruction (with its scalar
// operands) at a time.  After NUM_CUTS register cuts the request is
// broadcast to NR_TARGETS listeners: the C clusters, which decode and
// execute every instruction in lock-step, and any other unit that snoops
// the instruction stream (the GLSU decoder).  The broadcast is a fork that
// remembers which listeners have already taken the request and completes
// once all have.  Only cluster 0 answers: its response (scalar result and
// exception flag) travels back through NUM_CUTS further cuts.
//
// Timing: with NUM_CUTS = 0 a request reaches the clusters in the cycle it
// is issued and cluster 0's answer reaches the core in the cycle it is
// produced.  Every cut adds one cycle each way, so one cut delays the
// acknowledgement by two cycles, as the latency study of the paper states.
// Broadcast, single responder (cluster 0) and the cuts follow the paper;
// the fork with per-listener "taken" flags is this design's choice.
// rst_ni is an asynchronous active-low reset. The assertions also use it
// as their disable condition, so a lint tool may report the reset as used
// both asynchronously and synchronously; that use is only in checks.
module reqi
  import araxl_pkg::*;
#(
  parameter int unsigned NR_TARGETS = araxl_pkg::NrClusters + 1,
  parameter int unsigned NUM_CUTS   = araxl_pkg::NumReqCuts
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // scalar core side
  input  acc_req_t              core_req_i,
  input  logic                  core_req_valid_i,
  output logic                  core_req_ready_o,
  output acc_resp_t             core_resp_o,
  output logic                  core_resp_valid_o,
  input  logic                  core_resp_ready_i,
  // cluster side (broadcast)
  output acc_req_t              cl_req_o,
  output logic [NR_TARGETS-1:0] cl_req_valid_o,
  input  logic [NR_TARGETS-1:0] cl_req_ready_i,
  // answer of cluster 0
  input  acc_resp_t             cl0_resp_i,
  input  logic                  cl0_resp_valid_i,
  output logic                  cl0_resp_ready_o
);

  // ---------------------------------------------------------------------
  // Request path: cuts, then lock-step broadcast fork
  // ---------------------------------------------------------------------
  acc_req_t bc_req;
  logic     bc_valid, bc_ready;

  cut_chain #(.T(acc_req_t), .NUM_CUTS(NUM_CUTS)) i_req_cuts (
    .clk_i, .rst_ni,
    .valid_i(core_req_valid_i), .ready_o(core_req_ready_o), .data_i(core_req_i),
    .valid_o(bc_valid),         .ready_i(bc_ready),         .data_o(bc_req)
  );

  logic [NR_TARGETS-1:0] taken_q;
  logic [NR_TARGETS-1:0] done;

  assign cl_req_o       = bc_req;
  assign cl_req_valid_o = {NR_TARGETS{bc_valid}} & ~taken_q;
  assign done           = taken_q | (cl_req_valid_o & cl_req_ready_i);
  assign bc_ready       = &(taken_q | cl_req_ready_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                  taken_q <= '0;
    else if (bc_valid && bc_ready) taken_q <= '0;
    else if (bc_valid)            taken_q <= done;
  end

  // ---------------------------------------------------------------------
  // Response path: cluster 0 only
  // ---------------------------------------------------------------------
  cut_chain #(.T(acc_resp_t), .NUM_CUTS(NUM_CUTS)) i_resp_cuts (
    .clk_i, .rst_ni,
    .valid_i(cl0_resp_valid_i),  .ready_o(cl0_resp_ready_o), .data_i(cl0_resp_i),
    .valid_o(core_resp_valid_o), .ready_i(core_resp_ready_i), .data_o(core_resp_o)
  );

  // A request offered by the core must stay stable until accepted
  property p_req_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      core_req_valid_i && !core_req_ready_o |=> core_req_valid_i && $stable(core_req_i);
  endproperty
  a_req_stable: assert property (p_req_stable) else $error("REQI: request changed while stalled");

endmodule
