// glsu_decode: instruction decoder of the global load-store unit.
//
// Snoops the instruction stream broadcast by the request interface and keeps
// its own copy of the vl and vtype state (the "Decode: vl, vtype" box of the
// GLSU).  vsetvli / vsetivli / vsetvl update vl = min(AVL, VLMAX) with
// VLMAX = VLEN / SEW * LMUL; unit-stride vector loads (vle<eew>.v) and
// stores (vse<eew>.v) become one GLSU request {store, base address = rs1,
// vl, eew}.  Requests with vl = 0 are dropped.  Every other instruction is
// accepted and ignored.
//
// Timing: an instruction is accepted in the cycle it is offered unless a
// previous memory request still waits in the one-entry output register.
// Strided and indexed accesses are outside the GLSU pipeline built here.
// Taking the base address from the broadcast rs1 rather than from cluster
// 0's VLSU is this design's choice (both hold the same value).
module glsu_decode
  import araxl_pkg::*;
#(
  parameter int unsigned VLEN_BITS = araxl_pkg::VLEN
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  acc_req_t  insn_i,
  input  logic      insn_valid_i,
  output logic      insn_ready_o,
  output glsu_req_t req_o,
  output logic      req_valid_o,
  input  logic      req_ready_i,
  output vlen_t     vl_o,
  output logic [7:0] vtype_o
);

  localparam logic [6:0] OpV       = 7'b1010111;
  localparam logic [6:0] OpLoadFp  = 7'b0000111;
  localparam logic [6:0] OpStoreFp = 7'b0100111;

  vlen_t      vl_q;
  logic [7:0] vtype_q;
  glsu_req_t  req_q;
  logic       req_v_q;

  assign vl_o        = vl_q;
  assign vtype_o     = vtype_q;
  assign req_o       = req_q;
  assign req_valid_o = req_v_q;

  // VLMAX for a vtype (vill and reserved encodings give 0)
  function automatic vlen_t vlmax(logic [7:0] vt);
    vlen_t base;
    base = vlen_t'(VLEN_BITS >> 3) >> vt[4:3];   // VLEN / SEW
    unique case (vt[2:0])
      3'd0: return base;
      3'd1: return base << 1;
      3'd2: return base << 2;
      3'd3: return base << 3;
      3'd5: return base >> 3;
      3'd6: return base >> 2;
      3'd7: return base >> 1;
      default: return '0;
    endcase
  endfunction

  function automatic logic eew_of(logic [2:0] width, output vew_e ew);
    unique case (width)
      3'b000: begin ew = EW8;  return 1'b1; end
      3'b101: begin ew = EW16; return 1'b1; end
      3'b110: begin ew = EW32; return 1'b1; end
      3'b111: begin ew = EW64; return 1'b1; end
      default: begin ew = EW8; return 1'b0; end
    endcase
  endfunction

  logic [31:0] insn;
  assign insn = insn_i.insn;

  // decode of the offered instruction
  logic       is_vset, is_mem, is_store, width_ok;
  logic [7:0] new_vtype;
  xlen_t      avl;
  vew_e       eew;

  always_comb begin
    is_vset   = 1'b0;
    new_vtype = vtype_q;
    avl       = '0;
    width_ok  = eew_of(insn[14:12], eew);
    if (insn[6:0] == OpV && insn[14:12] == 3'b111) begin
      is_vset = 1'b1;
      if (insn[31] == 1'b0) begin                 // vsetvli
        new_vtype = insn[27:20];
        if (insn[19:15] != 5'd0)      avl = insn_i.rs1;
        else if (insn[11:7] != 5'd0)  avl = '1;    // rs1 = x0, rd != x0: AVL = max
        else                          avl = xlen_t'(vl_q);
      end else if (insn[30] == 1'b1) begin        // vsetivli
        new_vtype = insn[27:20];
        avl       = xlen_t'(insn[19:15]);
      end else begin                              // vsetvl
        new_vtype = insn_i.rs2[7:0];
        if (insn[19:15] != 5'd0)      avl = insn_i.rs1;
        else if (insn[11:7] != 5'd0)  avl = '1;
        else                          avl = xlen_t'(vl_q);
      end
    end
    // unit stride: mop = 00, lumop/sumop = 00000, nf = 0, mew = 0
    is_store = (insn[6:0] == OpStoreFp);
    is_mem   = (insn[6:0] == OpLoadFp || is_store) && width_ok &&
               insn[27:26] == 2'b00 && insn[24:20] == 5'd0 &&
               insn[31:28] == 4'd0;
  end

  wire   busy = req_v_q && !req_ready_i;
  assign insn_ready_o = !(is_mem && busy);

  vlen_t new_vl;
  always_comb begin
    vlen_t m;
    m = vlmax(new_vtype);
    new_vl = (avl > xlen_t'(m)) ? m : vlen_t'(avl);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q    <= '0;
      vtype_q <= 8'h80;   // vill after reset
      req_q   <= '0;
      req_v_q <= 1'b0;
    end else begin
      if (req_v_q && req_ready_i) req_v_q <= 1'b0;
      if (insn_valid_i && insn_ready_o) begin
        if (is_vset) begin
          vl_q    <= new_vl;
          vtype_q <= new_vtype;
        end
        if (is_mem && vl_q != '0) begin
          req_q   <= '{store: is_store, addr: addr_t'(insn_i.rs1), vl: vl_q, ew: eew};
          req_v_q <= 1'b1;
        end
      end
    end
  end

endmodule
