// fifo_v: small synchronous FIFO with a valid/ready interface.
//
// DEPTH entries of type T, written when valid_i && ready_o and read when
// valid_o && ready_i.  The head is visible combinationally on data_o; a
// word written in cycle t can be read from cycle t+1.  Used for the GLSU's
// align/shuffle tables and AXI bookkeeping.
module fifo_v #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
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

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem_q [DEPTH];
  logic [AW-1:0]   wr_q, rd_q;
  logic [AW:0]     cnt_q;

  wire push = valid_i && ready_o;
  wire pop  = valid_o && ready_i;

  assign ready_o = (cnt_q != (AW+1)'(DEPTH));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem_q[rd_q];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_q  <= '0;
      rd_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (push) begin
        mem_q[wr_q] <= data_i;
        wr_q        <= inc(wr_q);
      end
      if (pop) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

endmodule
