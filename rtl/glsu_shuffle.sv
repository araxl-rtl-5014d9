// glsu_shuffle: Shuffle stage of the global load-store unit.
//
// AraXL maps vector element i to cluster (i / L) mod C and, inside the
// cluster, to lane i mod L.  In an aligned memory beat of B = 4*L*C bytes
// the bytes of one cluster therefore form chunks of L*EW bytes spread over
// the beat.  This stage gathers, for loads, the chunks of every cluster
// into that cluster's 4*L-byte slot of the cluster bus (slot c = bytes
// [4Lc, 4L(c+1))), and for stores (STORE = 1) does the inverse.
//
// How: cut the beat into 4C units of L bytes.  For EW <= 4 bytes a unit
// index is {r, c, u} (round, cluster, unit inside the chunk, u being
// log2(EW) bits); the slot order is {c, r, u}.  That is a rotation of the
// {r, c} field by 2 - log2(EW) bit positions, done one position per
// registered level: level 0 is active for EW = 1, 2 bytes, level 1 for EW =
// 1 byte only, and EW = 4 bytes needs no shuffle at all.  For EW = 8 bytes a
// chunk (8L bytes) is twice a slot, so a pair stage joins two beats: cluster
// c receives the first half of its chunk in the first output beat and the
// second half in the next one.  A byte mask travels with the data.
//
// Timing: one beat per cycle for every EW; latency 2 cycles for the
// levels, plus one beat for the pair stage (its input side holds the first
// beat of a pair).  Loads: a pair whose second memory beat does not exist
// still yields two cluster beats.  Stores: the second memory beat of a pair
// is dropped when its meta flag drop1 says it lies past the access.
// The leveled, registered, EW-controlled structure is the paper's; the
// rotation formulation and the pair stage are this design's.
module glsu_shuffle
  import araxl_pkg::*;
#(
  parameter int unsigned NR_LANES    = araxl_pkg::NrLanes,
  parameter int unsigned NR_CLUSTERS = araxl_pkg::NrClusters,
  parameter bit          STORE       = 1'b0,
  localparam int unsigned BYTES      = 4 * NR_LANES * NR_CLUSTERS
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [BYTES*8-1:0]   data_i,
  input  logic [BYTES-1:0]     mask_i,
  input  beat_meta_t           meta_i,
  input  logic                 valid_i,
  output logic                 ready_o,
  output logic [BYTES*8-1:0]   data_o,
  output logic [BYTES-1:0]     mask_o,
  output beat_meta_t           meta_o,
  output logic                 valid_o,
  input  logic                 ready_i
);

  localparam int unsigned L     = NR_LANES;
  localparam int unsigned NU    = 4 * NR_CLUSTERS;   // units per beat
  localparam int unsigned JW    = $clog2(NU);        // unit index bits

  typedef logic [BYTES*8-1:0] word_t;
  typedef logic [BYTES-1:0]   mask_t;

  // ---------------------------------------------------------------------
  // Permutations
  // ---------------------------------------------------------------------
  // source unit of output unit jo for a one-position rotation of the field
  // above bit w
  function automatic int unsigned lvl_src(int unsigned jo, int unsigned w, bit inv);
    int unsigned fw, f, lo, fs;
    fw = JW - w;
    f  = jo >> w;
    lo = jo & ((1 << w) - 1);
    if (!inv) fs = (f >> 1) | ((f & 1) << (fw - 1));                 // rotate right
    else      fs = ((f << 1) & ((1 << fw) - 1)) | (f >> (fw - 1));    // rotate left
    return (fs << w) | lo;
  endfunction

  function automatic word_t lvl_data(word_t d, int unsigned w, bit inv);
    word_t r;
    for (int unsigned j = 0; j < NU; j++)
      r[j*L*8 +: L*8] = d[lvl_src(j, w, inv)*L*8 +: L*8];
    return r;
  endfunction

  function automatic mask_t lvl_mask(mask_t m, int unsigned w, bit inv);
    mask_t r;
    for (int unsigned j = 0; j < NU; j++)
      r[j*L +: L] = m[lvl_src(j, w, inv)*L +: L];
    return r;
  endfunction

  // pair stage: two beats in, two beats out.  Forward (load): output beat t,
  // unit 4c+k <- super unit 8c+4t+k, where super = {beat1, beat0}.
  // Inverse (store): super unit 8c+4t+k <- input beat t unit 4c+k.
  function automatic int unsigned pair_src(int unsigned t, int unsigned j, bit inv);
    // returns a unit index into {in1, in0} (0 .. 2*NU-1)
    int unsigned c, k, sj;
    if (!inv) begin
      c = j / 4; k = j % 4;
      return 8*c + 4*t + k;
    end else begin
      sj = t*NU + j;               // super index of this output unit
      c  = sj / 8;
      return ((sj / 4) % 2) * NU + 4*c + (sj % 4);
    end
  endfunction

  function automatic word_t pair_data(word_t in0, word_t in1, int unsigned t, bit inv);
    logic [2*BYTES*8-1:0] s;
    word_t r;
    s = {in1, in0};
    for (int unsigned j = 0; j < NU; j++)
      r[j*L*8 +: L*8] = s[pair_src(t, j, inv)*L*8 +: L*8];
    return r;
  endfunction

  function automatic mask_t pair_mask(mask_t in0, mask_t in1, int unsigned t, bit inv);
    logic [2*BYTES-1:0] s;
    mask_t r;
    s = {in1, in0};
    for (int unsigned j = 0; j < NU; j++)
      r[j*L +: L] = s[pair_src(t, j, inv)*L +: L];
    return r;
  endfunction

  // ---------------------------------------------------------------------
  // Stage chain: load = lvl0, lvl1, pair; store = pair, lvl1, lvl0
  // ---------------------------------------------------------------------
  word_t      sd [4];
  mask_t      sm [4];
  beat_meta_t sx [4];
  logic       sv [4];
  logic       sr [4];

  assign sd[0] = data_i;
  assign sm[0] = mask_i;
  assign sx[0] = meta_i;
  assign sv[0] = valid_i;
  assign ready_o = sr[0];

  localparam int unsigned PairPos = STORE ? 0 : 2;

  for (genvar s = 0; s < 3; s++) begin : g_stage
    if (s == PairPos) begin : g_pair
      // pair stage (active for EW = 8 bytes, pass-through otherwise)
      word_t      h_d, p_d, o_d;
      mask_t      h_m, p_m, o_m;
      beat_meta_t h_x, p_x, o_x;
      logic       h_v, p_v, o_v;

      wire ol  = !o_v || sr[s+1];
      wire is8 = (sx[s].ew == EW64);
      // the incoming beat only needs to be parked as the first of a pair
      wire park = is8 && !h_v && !(!STORE && sx[s].last);
      assign sr[s] = park || (ol && !p_v);

      word_t      in0_d, in1_d;
      mask_t      in0_m, in1_m;
      beat_meta_t in0_x, in1_x;
      always_comb begin
        in0_d = h_v ? h_d : sd[s];
        in0_m = h_v ? h_m : sm[s];
        in0_x = h_v ? h_x : sx[s];
        in1_d = h_v ? sd[s] : '0;
        in1_m = h_v ? sm[s] : '0;
        in1_x = h_v ? sx[s] : sx[s];
      end

      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          h_d <= '0; h_m <= '0; h_x <= '0; h_v <= 1'b0;
          p_d <= '0; p_m <= '0; p_x <= '0; p_v <= 1'b0;
          o_d <= '0; o_m <= '0; o_x <= '0; o_v <= 1'b0;
        end else begin
          if (ol) begin
            o_v <= 1'b0;
            if (p_v) begin
              o_d <= p_d; o_m <= p_m; o_x <= p_x; o_v <= 1'b1;
              p_v <= 1'b0;
            end else if (sv[s] && sr[s] && !park) begin
              o_v <= 1'b1;
              if (!is8) begin
                o_d <= sd[s]; o_m <= sm[s]; o_x <= sx[s];
              end else begin
                o_d <= pair_data(in0_d, in1_d, 0, STORE);
                o_m <= pair_mask(in0_m, in1_m, 0, STORE);
                o_x <= in0_x;
                p_d <= pair_data(in0_d, in1_d, 1, STORE);
                p_m <= pair_mask(in0_m, in1_m, 1, STORE);
                p_x <= in1_x;
                p_x.first <= 1'b0;
                if (STORE) begin
                  o_x.last <= in1_x.last && in1_x.drop1;
                  p_v      <= !in1_x.drop1;
                end else begin
                  o_x.last <= 1'b0;
                  p_v      <= 1'b1;
                end
                h_v <= 1'b0;
              end
            end
          end
          if (sv[s] && park) begin
            h_d <= sd[s]; h_m <= sm[s]; h_x <= sx[s]; h_v <= 1'b1;
          end
        end
      end

      assign sd[s+1] = o_d;
      assign sm[s+1] = o_m;
      assign sx[s+1] = o_x;
      assign sv[s+1] = o_v;
    end else begin : g_lvl
      // rotation level; level index 0 or 1
      localparam int unsigned Lvl = STORE ? (2 - s) : s;
      word_t      d_q;
      mask_t      m_q;
      beat_meta_t x_q;
      logic       v_q;
      assign sr[s] = !v_q || sr[s+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          d_q <= '0; m_q <= '0; x_q <= '0; v_q <= 1'b0;
        end else if (sr[s]) begin
          v_q <= sv[s];
          if (sv[s]) begin
            x_q <= sx[s];
            // level 0 acts for EW = 1, 2 bytes (field above bit ew); level 1 for EW = 1
            if (sx[s].ew == EW8 || (Lvl == 0 && sx[s].ew == EW16)) begin
              if (sx[s].ew == EW8) begin
                d_q <= lvl_data(sd[s], 0, STORE);
                m_q <= lvl_mask(sm[s], 0, STORE);
              end else begin
                d_q <= lvl_data(sd[s], 1, STORE);
                m_q <= lvl_mask(sm[s], 1, STORE);
              end
            end else begin
              d_q <= sd[s];
              m_q <= sm[s];
            end
          end
        end
      end
      assign sd[s+1] = d_q;
      assign sm[s+1] = m_q;
      assign sx[s+1] = x_q;
      assign sv[s+1] = v_q;
    end
  end

  assign data_o  = sd[3];
  assign mask_o  = sm[3];
  assign meta_o  = sx[3];
  assign valid_o = sv[3];
  assign sr[3]   = ready_i;

endmodule
