// vlsu_lane_shuffle: byte shuffle of a cluster-local load-store unit.
//
// After the global load-store unit a cluster sees its own elements as an
// aligned byte stream, 4*L bytes per beat.  Local element j (counted from
// the start of the access) belongs to lane j mod L, as in the 4-lane base
// design, so this unit only spreads bytes over lanes; no aligning is left to
// do.  Two beats (8*L bytes) fill one 64-bit word in every lane: beat
// parity p selects which half of the two-beat window a beat covers.  For a
// byte at offset s of the slot: stream byte q = p*4L + s, element
// j = q / EW, lane = j mod L, byte inside the lane word = ((j / L) * EW) mod
// 8 + q mod EW.
//
// Loads: slot bytes + mask -> per-lane 64-bit word with byte enables.
// Stores: per-lane 64-bit words -> slot bytes (the inverse mapping).
// Purely combinational.  The element-to-lane rule follows the paper; the
// plain byte order inside a lane word is this design's simplification of
// the base design's register layout.
module vlsu_lane_shuffle
  import araxl_pkg::*;
#(
  parameter int unsigned NR_LANES = araxl_pkg::NrLanes,
  localparam int unsigned SlotBytes = 4 * NR_LANES
) (
  input  vew_e                          ew_i,
  input  logic                          parity_i,
  // load direction
  input  logic [SlotBytes*8-1:0]        ld_slot_i,
  input  logic [SlotBytes-1:0]          ld_mask_i,
  output logic [NR_LANES-1:0][63:0]     ld_lane_o,
  output logic [NR_LANES-1:0][7:0]      ld_be_o,
  // store direction
  input  logic [NR_LANES-1:0][63:0]     st_lane_i,
  output logic [SlotBytes*8-1:0]        st_slot_o
);

  localparam int unsigned L = NR_LANES;

  // lane and lane-byte of slot byte s
  function automatic void map(input vew_e ew, input logic p, input int unsigned s,
                              output int unsigned lane, output int unsigned lb);
    int unsigned q, e, j;
    e    = 1 << ew;
    q    = (p ? 4 * L : 0) + s;
    j    = q / e;
    lane = j % L;
    lb   = (((j / L) * e) % 8) + (q % e);
  endfunction

  always_comb begin
    int unsigned lane, lb;
    lane      = 0;
    lb        = 0;
    ld_lane_o = '0;
    ld_be_o   = '0;
    st_slot_o = '0;
    for (int unsigned s = 0; s < SlotBytes; s++) begin
      for (int unsigned w = 0; w < 4; w++) begin
        for (int unsigned pp = 0; pp < 2; pp++) begin
          if (ew_i == vew_e'(w) && parity_i == pp[0]) begin
            map(vew_e'(w), pp[0], s, lane, lb);
            ld_lane_o[lane][8*lb +: 8] = ld_slot_i[8*s +: 8];
            ld_be_o[lane][lb]          = ld_mask_i[s];
            st_slot_o[8*s +: 8]        = st_lane_i[lane][8*lb +: 8];
          end
        end
      end
    end
  end

endmodule
