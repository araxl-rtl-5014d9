// glsu_addrgen: address generation and request splitting of the GLSU.
//
// Takes one unit-stride vector request {store, addr, vl, ew} and splits it
// into AXI INCR bursts of full bus words (AXI_BYTES bytes each): the first
// burst starts at the address rounded down to the bus word, each burst
// holds at most 256 beats and never crosses a 4 KiB page.  One AR (loads) or
// AW (stores) is issued per cycle.  For every request it also writes one
// entry into the load or store table, {offset inside the bus word, bytes,
// element width}, which steers the align and shuffle pipelines, and for
// every burst carries a flag marking the request's last one, which the
// GLSU uses for WLAST bookkeeping and to know when all write responses of a
// store have arrived.
//
// Bandwidth conversion: the memory bus is as wide as the cluster side
// (32*L*C bits), so no width conversion is needed in this configuration.
// Splitting rules (256 beats, 4 KiB) follow AXI; the table layout is this
// design's choice.  A 2048-bit bus is wider than AXI4 allows (1024 bits,
// AxSIZE = 7), so the size field is widened to 4 bits and carries
// log2(AXI_BYTES) = 8 at the default size.
module glsu_addrgen
  import araxl_pkg::*;
#(
  parameter int unsigned AXI_BYTES = 4 * araxl_pkg::NrLanes * araxl_pkg::NrClusters
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  glsu_req_t  req_i,
  input  logic       req_valid_i,
  output logic       req_ready_o,
  // AXI address channel (shared encoding for AR and AW)
  output addr_t      ax_addr_o,
  output logic [7:0] ax_len_o,
  output logic [3:0] ax_size_o,     // log2(bytes per beat), 4 bits: see header
  output logic       ax_store_o,
  output logic       ax_last_o,     // last burst of the request
  output logic       ax_valid_o,
  input  logic       ax_ready_i,
  // table entry for the data pipelines (one per request)
  output beat_meta_t tbl_o,
  output logic       tbl_store_o,
  output logic       tbl_valid_o,
  input  logic       tbl_ready_i
);

  localparam int unsigned OffW   = $clog2(AXI_BYTES);
  localparam int unsigned PageBeats = (4096 / AXI_BYTES) > 0 ? (4096 / AXI_BYTES) : 1;

  typedef enum logic [1:0] {IDLE, TABLE, SPLIT} state_e;
  state_e state_q;

  glsu_req_t   req_q;
  addr_t       cur_q;        // address of the next burst (bus-word aligned)
  logic [31:0] beats_q;      // beats still to request

  // derived values of the accepted request
  logic [31:0] nbytes, total_beats;
  logic [OffW-1:0] off;
  always_comb begin
    nbytes      = req_i.vl << req_i.ew;
    off         = req_i.addr[OffW-1:0];
    total_beats = (nbytes + 32'(off) + AXI_BYTES - 1) >> OffW;
  end

  // beats of the current burst
  logic [31:0] page_left, this_beats;
  always_comb begin
    page_left  = 32'(PageBeats) - ((32'(cur_q[11:0]) >> OffW) % 32'(PageBeats));
    this_beats = beats_q;
    if (this_beats > page_left) this_beats = page_left;
    if (this_beats > 32'd256)   this_beats = 32'd256;
  end

  assign req_ready_o = (state_q == IDLE);

  assign tbl_valid_o   = (state_q == TABLE);
  assign tbl_store_o   = req_q.store;
  always_comb begin
    tbl_o        = '0;
    tbl_o.ew     = req_q.ew;
    tbl_o.off    = 16'(req_q.addr[OffW-1:0]);
    tbl_o.nbytes = req_q.vl << req_q.ew;
  end

  assign ax_valid_o = (state_q == SPLIT);
  assign ax_addr_o  = cur_q;
  assign ax_len_o   = 8'(this_beats - 1);
  assign ax_size_o  = 4'(OffW);
  assign ax_store_o = req_q.store;
  assign ax_last_o  = (beats_q == this_beats);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= IDLE;
      req_q     <= '0;
      cur_q     <= '0;
      beats_q   <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (req_valid_i) begin
          req_q     <= req_i;
          cur_q     <= {req_i.addr[AxiAddrWidth-1:OffW], {OffW{1'b0}}};
          beats_q   <= total_beats;
          state_q   <= TABLE;
        end
        TABLE: if (tbl_ready_i) state_q <= SPLIT;
        SPLIT: if (ax_ready_i) begin
          cur_q   <= cur_q + (addr_t'(this_beats) << OffW);
          beats_q <= beats_q - this_beats;
          if (beats_q == this_beats) state_q <= IDLE;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

endmodule
