// spill_reg: one fully decoupled register slice for a valid/ready stream.
//
// A two-entry FIFO whose ready and valid outputs both come straight from
// flip-flops, so it cuts the forward (data/valid) and the backward (ready)
// combinational paths at once.  A word written in cycle t is visible at the
// output in cycle t+1; the slice sustains one word per cycle.  It is the
// building block of the parametric register cuts on the top-level links.
module spill_reg #(
  parameter type T = logic [63:0]
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

  T            mem_q [2];
  logic        wr_q, rd_q;
  logic [1:0]  cnt_q;

  wire push = valid_i && ready_o;
  wire pop  = valid_o && ready_i;

  assign ready_o = (cnt_q != 2'd2);
  assign valid_o = (cnt_q != 2'd0);
  assign data_o  = mem_q[rd_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_q   <= 1'b0;
      rd_q   <= 1'b0;
      cnt_q  <= 2'd0;
      mem_q[0] <= '0;
      mem_q[1] <= '0;
    end else begin
      if (push) begin
        mem_q[wr_q] <= data_i;
        wr_q        <= ~wr_q;
      end
      if (pop) rd_q <= ~rd_q;
      cnt_q <= cnt_q + 2'(push) - 2'(pop);
    end
  end

endmodule
