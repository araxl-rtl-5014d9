// inval_filter: keeps the scalar core's data cache coherent with vector
// stores.
//
// Vector stores bypass the scalar core's write-through data cache, so every
// cache line they write must be invalidated there.  For every write burst
// the GLSU issues (address, AXI length and size) the filter walks the
// cache lines the burst covers and emits one line address per cycle.  It
// drops a line that lies inside the previous burst's address range: that
// line was invalidated a moment ago.  GLSU bursts cover whole bus words, so
// two stores to neighbouring data share the bus word at their boundary,
// and the second store's walk skips all lines of it.
//
// Timing: a burst is accepted when the filter is idle; it then needs one
// cycle per line (the d-cache may stall emitted lines with inval_ready_i;
// dropped lines take one cycle each).  aw_size_i is 4 bits wide because the
// GLSU's 256-byte beats do not fit AXI's 3-bit size field.
// LINE_BYTES = 16 matches the scalar core's 128-bit cache line (assumed).
// The block, its input (the write address) and output (the line to
// invalidate) are those of the system figure; the line walk and the
// previous-burst filter are this design's.
module inval_filter
  import araxl_pkg::*;
#(
  parameter int unsigned LINE_BYTES = 16
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  addr_t      aw_addr_i,
  input  logic [7:0] aw_len_i,
  input  logic [3:0] aw_size_i,
  input  logic       aw_valid_i,
  output logic       aw_ready_o,
  output addr_t      inval_addr_o,
  output logic       inval_valid_o,
  input  logic       inval_ready_i,
  output logic       filtered_o      // a repeated line was dropped this cycle
);

  localparam int unsigned LW = $clog2(LINE_BYTES);

  logic  busy_q, prev_v_q, seen_q;
  addr_t cur_q, start_q, end_q, prev_lo_q, prev_hi_q;

  assign aw_ready_o = !busy_q;

  wire   addr_t line     = {cur_q[AxiAddrWidth-1:LW], {LW{1'b0}}};
  wire          repeat_l = prev_v_q && (line >= prev_lo_q) && (line < prev_hi_q);

  assign inval_addr_o  = line;
  assign inval_valid_o = busy_q && !repeat_l;
  assign filtered_o    = busy_q && repeat_l;

  wire step = busy_q && (repeat_l || inval_ready_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q    <= 1'b0;
      seen_q    <= 1'b0;
      prev_v_q  <= 1'b0;
      cur_q     <= '0;
      start_q   <= '0;
      end_q     <= '0;
      prev_lo_q <= '0;
      prev_hi_q <= '0;
    end else begin
      if (aw_valid_i && aw_ready_o) begin
        // the finished burst becomes the filter range
        prev_v_q  <= seen_q;
        prev_lo_q <= start_q;
        prev_hi_q <= end_q;
        seen_q    <= 1'b1;
        busy_q    <= 1'b1;
        cur_q     <= aw_addr_i;
        start_q   <= {aw_addr_i[AxiAddrWidth-1:LW], {LW{1'b0}}};
        // first byte after the burst
        end_q     <= aw_addr_i + (addr_t'(aw_len_i) + 1) * (addr_t'(1) << aw_size_i);
      end else if (step) begin
        cur_q <= line + addr_t'(LINE_BYTES);
        if (line + addr_t'(LINE_BYTES) >= end_q) busy_q <= 1'b0;
      end
    end
  end

endmodule
