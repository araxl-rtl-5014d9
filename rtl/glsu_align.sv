// glsu_align: Align stage of the global load-store unit.
//
// Moves a vector access that starts at an arbitrary byte address onto the
// memory bus word grid and back.  The stage is a pipeline of log2(B)
// registered levels (B = bus bytes); level l rotates the beat by 2^l bytes
// when bit l of the address offset is set, so the total rotation equals the
// offset.  A final merge register combines neighbouring rotated beats:
//   * load  (STORE = 0): rotate right; output beat k takes the bytes below
//     B-off from input beat k and the rest from input beat k+1, giving a
//     stream whose byte 0 is byte 0 of the vector; mask_o marks the bytes
//     below the access length;
//   * store (STORE = 1): rotate left; output beat j takes the bytes at and
//     above off from input beat j and the rest from beat j-1; mask_o is the
//     AXI write strobe.
// Every beat carries its own control word (offset, length, first/last), so
// the pipeline needs no shared table and accesses can follow back to back.
//
// Timing: one beat per cycle; latency log2(B) + 1 cycles, plus one beat of
// buffering in the merge register.  A load with Nin input beats gives
// ceil(N/B) output beats; a store the reverse.  The multi-level registered
// power-of-2 structure is the paper's; the merge register is this design's
// way of joining the two halves of a misaligned word.
module glsu_align
  import araxl_pkg::*;
#(
  parameter int unsigned AXI_BYTES = 4 * araxl_pkg::NrLanes * araxl_pkg::NrClusters,
  parameter bit          STORE     = 1'b0
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [AXI_BYTES*8-1:0] data_i,
  input  beat_meta_t             meta_i,
  input  logic                   valid_i,
  output logic                   ready_o,
  output logic [AXI_BYTES*8-1:0] data_o,
  output logic [AXI_BYTES-1:0]   mask_o,
  output beat_meta_t             meta_o,
  output logic                   valid_o,
  input  logic                   ready_i
);

  localparam int unsigned B   = AXI_BYTES;
  localparam int unsigned NL  = $clog2(B);
  localparam int unsigned OffW = NL;
  typedef logic [B*8-1:0] word_t;

  function automatic word_t rot(word_t w, int unsigned k);
    logic [2*B*8-1:0] ww;
    ww = {w, w};
    if (STORE) return ww[2*B*8-1-8*k -: B*8];  // left by k bytes
    else       return word_t'(ww >> (8*k));     // right by k bytes
  endfunction

  // ---------------------------------------------------------------------
  // Rotation levels
  // ---------------------------------------------------------------------
  word_t      d_s [NL+1];
  beat_meta_t m_s [NL+1];
  logic       v_s [NL+1];
  logic       r_s [NL+1];

  assign d_s[0] = data_i;
  assign m_s[0] = meta_i;
  assign v_s[0] = valid_i;
  assign ready_o = r_s[0];

  for (genvar l = 0; l < NL; l++) begin : g_lvl
    word_t      d_q;
    beat_meta_t m_q;
    logic       v_q;
    assign r_s[l] = !v_q || r_s[l+1];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        d_q <= '0;
        m_q <= '0;
        v_q <= 1'b0;
      end else if (r_s[l]) begin
        v_q <= v_s[l];
        if (v_s[l]) begin
          d_q <= m_s[l].off[l] ? rot(d_s[l], 1 << l) : d_s[l];
          m_q <= m_s[l];
        end
      end
    end
    assign d_s[l+1] = d_q;
    assign m_s[l+1] = m_q;
    assign v_s[l+1] = v_q;
  end

  // ---------------------------------------------------------------------
  // Merge register
  // ---------------------------------------------------------------------
  word_t      h_q;
  beat_meta_t hm_q;
  logic       hv_q, flush_q;
  logic [31:0] cnt_q;

  word_t      o_d_q;
  logic [B-1:0] o_m_q;
  beat_meta_t o_meta_q;
  logic       o_v_q;

  wire can_out = !o_v_q || ready_i;
  wire x_v     = v_s[NL];
  word_t      x_d;
  beat_meta_t x_m;
  assign x_d = d_s[NL];
  assign x_m = m_s[NL];

  assign r_s[NL] = can_out && !flush_q;
  wire take = x_v && r_s[NL];

  // beats before/after alignment of an access
  function automatic logic flush_needed(beat_meta_t m);
    logic [31:0] nin, nout;
    nin  = (m.nbytes + 32'(m.off[OffW-1:0]) + B - 1) >> OffW;
    nout = (m.nbytes + B - 1) >> OffW;
    return STORE ? (nin != nout) : (nin == nout);
  endfunction

  function automatic word_t merge(word_t old_w, word_t new_w, logic [OffW-1:0] off);
    word_t r;
    for (int p = 0; p < B; p++) begin
      logic sel_new;
      sel_new = STORE ? (p >= int'(off)) : (p >= int'(B) - int'(off));
      r[8*p +: 8] = sel_new ? new_w[8*p +: 8] : old_w[8*p +: 8];
    end
    return r;
  endfunction

  function automatic logic [B-1:0] byte_mask(beat_meta_t m, logic [31:0] idx);
    logic [B-1:0] r;
    logic [31:0]  pos;
    for (int p = 0; p < B; p++) begin
      pos = (idx << OffW) + 32'(p);
      if (STORE) r[p] = (pos >= 32'(m.off[OffW-1:0])) && (pos < m.nbytes + 32'(m.off[OffW-1:0]));
      else       r[p] = (pos < m.nbytes);
    end
    return r;
  endfunction

  // what the merge register emits this cycle
  logic       emit, emit_last;
  word_t      emit_d;
  beat_meta_t emit_m;
  always_comb begin
    emit      = 1'b0;
    emit_last = 1'b0;
    emit_d    = '0;
    emit_m    = hm_q;
    if (flush_q && can_out) begin
      emit      = 1'b1;
      emit_last = 1'b1;
      emit_d    = merge(h_q, '0, hm_q.off[OffW-1:0]);
    end else if (take) begin
      emit_m = x_m;
      if (STORE) begin
        emit      = 1'b1;
        emit_last = x_m.last && !flush_needed(x_m);
        emit_d    = merge(x_m.first ? '0 : h_q, x_d, x_m.off[OffW-1:0]);
      end else if (hv_q && !x_m.first) begin
        emit      = 1'b1;
        emit_last = x_m.last && !flush_needed(x_m);
        emit_d    = merge(h_q, x_d, x_m.off[OffW-1:0]);
      end
    end
  end

  // output beat index inside the access; it returns to 0 after the last
  // beat, so the first beat of the next access is always numbered 0
  wire [31:0] emit_idx = cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      h_q      <= '0;
      hm_q     <= '0;
      hv_q     <= 1'b0;
      flush_q  <= 1'b0;
      cnt_q    <= '0;
      o_d_q    <= '0;
      o_m_q    <= '0;
      o_meta_q <= '0;
      o_v_q    <= 1'b0;
    end else begin
      if (can_out) o_v_q <= 1'b0;
      if (emit) begin
        o_v_q          <= 1'b1;
        o_d_q          <= emit_d;
        o_m_q          <= byte_mask(emit_m, emit_idx);
        o_meta_q       <= emit_m;
        o_meta_q.first <= (emit_idx == 32'd0);
        o_meta_q.last  <= emit_last;
        cnt_q          <= emit_last ? 32'd0 : emit_idx + 32'd1;
      end
      if (flush_q && can_out) begin
        flush_q <= 1'b0;
        hv_q    <= 1'b0;
      end else if (take) begin
        h_q  <= x_d;
        hm_q <= x_m;
        if (x_m.last) begin
          flush_q <= flush_needed(x_m);
          hv_q    <= flush_needed(x_m);
        end else begin
          hv_q    <= 1'b1;
        end
      end
    end
  end

  assign data_o  = o_d_q;
  assign mask_o  = o_m_q;
  assign meta_o  = o_meta_q;
  assign valid_o = o_v_q;

endmodule
