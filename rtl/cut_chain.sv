// cut_chain: a parametric number of register cuts on a valid/ready link.
//
// NUM_CUTS fully decoupled register slices (spill_reg) in series.  Each cut
// adds exactly one cycle of latency and keeps full throughput; NUM_CUTS = 0
// is a plain wire.  The request, memory and ring interfaces use it to break
// long top-level wires, trading latency for timing as the architecture
// intends.
module cut_chain #(
  parameter type         T        = logic [63:0],
  parameter int unsigned NUM_CUTS = 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);

  logic v [NUM_CUTS+1];
  logic r [NUM_CUTS+1];
  T     d [NUM_CUTS+1];

  assign v[0]    = valid_i;
  assign d[0]    = data_i;
  assign ready_o = r[0];

  for (genvar i = 0; i < NUM_CUTS; i++) begin : g_cut
    spill_reg #(.T(T)) i_slice (
      .clk_i, .rst_ni,
      .valid_i(v[i]),   .ready_o(r[i]),   .data_i(d[i]),
      .valid_o(v[i+1]), .ready_i(r[i+1]), .data_o(d[i+1])
    );
  end

  assign valid_o           = v[NUM_CUTS];
  assign data_o            = d[NUM_CUTS];
  assign r[NUM_CUTS]       = ready_i;

endmodule
