// tb_glsu_decode: checks the GLSU instruction decoder.  It sends vsetvli,
// vsetivli and vsetvl with different SEW/LMUL/AVL and compares vl with
// min(AVL, VLMAX) for VLEN = 65536; it sends unit-stride loads and stores
// of every element width and checks the memory request {store, addr, vl,
// ew}; it holds the request port stalled to check that a second memory
// instruction waits while other instructions still pass; vl = 0 and
// non-unit-stride accesses must not create requests.
module tb_glsu_decode;
  import araxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  acc_req_t  insn;
  logic      iv, ir, rv, rr;
  glsu_req_t req;
  vlen_t     vl;
  logic [7:0] vtype;

  glsu_decode dut (
    .clk_i(clk), .rst_ni(rst_n), .insn_i(insn), .insn_valid_i(iv), .insn_ready_o(ir),
    .req_o(req), .req_valid_o(rv), .req_ready_i(rr), .vl_o(vl), .vtype_o(vtype)
  );

  function automatic logic [31:0] vsetvli(logic [4:0] rd, logic [4:0] rs1, logic [2:0] sew, logic [2:0] lmul);
    return {1'b0, 3'b000, 2'b00, sew, lmul, rs1, 3'b111, rd, 7'b1010111};
  endfunction
  function automatic logic [31:0] vsetivli(logic [4:0] uimm, logic [2:0] sew, logic [2:0] lmul);
    return {2'b11, 2'b00, 2'b00, sew, lmul, uimm, 3'b111, 5'd1, 7'b1010111};
  endfunction
  function automatic logic [31:0] vsetvl(logic [4:0] rs1);
    return {7'b1000000, 5'd2, rs1, 3'b111, 5'd1, 7'b1010111};
  endfunction
  function automatic logic [31:0] vmem(bit store, logic [2:0] width, logic [1:0] mop);
    return {3'b000, 1'b0, mop, 1'b1, 5'b00000, 5'd10, width, 5'd8, store ? 7'b0100111 : 7'b0000111};
  endfunction

  task automatic send(logic [31:0] i, logic [63:0] rs1, logic [63:0] rs2);
    insn.insn = i; insn.rs1 = rs1; insn.rs2 = rs2; iv = 1;
    @(posedge clk); while (!ir) @(posedge clk); #1;
    iv = 0;
  endtask

  // one memory request must be offered; take it
  task automatic expect_req(bit store, logic [63:0] addr, int evl, vew_e ew, string m);
    int t;
    t = 0;
    while (!rv && t < 10) begin @(posedge clk); #1; t++; end
    check(rv, {m, ": request offered"});
    check(req.store == store && req.addr == addr && req.vl == vlen_t'(evl) && req.ew == ew,
          $sformatf("%s: request %0d %h vl=%0d ew=%0d, expected vl %0d", m, req.store, req.addr, req.vl, req.ew, evl));
    rr = 1; @(posedge clk); #1; rr = 0;
  endtask

  localparam int VL64 = 65536 / 64;

  initial begin
    iv = 0; rr = 0; insn = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(vtype[7] == 1'b1, "vill set after reset");
    // vsetvli: SEW = 64, LMUL = 1
    send(vsetvli(5'd1, 5'd2, 3'd3, 3'd0), 64'd5000, 0);
    check(vl == vlen_t'(VL64), $sformatf("e64 m1 vl %0d", vl));
    send(vsetvli(5'd1, 5'd2, 3'd3, 3'd0), 64'd100, 0);
    check(vl == 100, $sformatf("e64 m1 avl 100: vl %0d", vl));
    // LMUL = 8
    send(vsetvli(5'd1, 5'd2, 3'd3, 3'd3), 64'd1_000_000, 0);
    check(vl == vlen_t'(8 * VL64), $sformatf("e64 m8 vl %0d", vl));
    // SEW = 8, LMUL = 1/8
    send(vsetvli(5'd1, 5'd2, 3'd0, 3'd5), 64'd1_000_000, 0);
    check(vl == vlen_t'(65536 / 8 / 8), $sformatf("e8 mf8 vl %0d", vl));
    // rs1 = x0, rd != x0: AVL = max
    send(vsetvli(5'd1, 5'd0, 3'd2, 3'd1), 64'd3, 0);
    check(vl == vlen_t'(2 * 65536 / 32), $sformatf("e32 m2 max vl %0d", vl));
    check(vtype == 8'h11, $sformatf("vtype %h", vtype));
    // vsetivli
    send(vsetivli(5'd17, 3'd1, 3'd0), 0, 0);
    check(vl == 17, $sformatf("vsetivli vl %0d", vl));
    // vsetvl with vtype from rs2 (SEW = 16, LMUL = 4)
    send(vsetvl(5'd3), 64'd70000, 64'h0A);
    check(vl == vlen_t'(4 * 65536 / 16), $sformatf("vsetvl vl %0d", vl));

    // unit-stride loads and stores of each width
    send(vsetvli(5'd1, 5'd2, 3'd3, 3'd0), 64'd333, 0);
    send(vmem(0, 3'b000, 2'b00), 64'h1000_0001, 0); expect_req(0, 64'h1000_0001, 333, EW8,  "vle8");
    send(vmem(0, 3'b101, 2'b00), 64'h2002, 0);      expect_req(0, 64'h2002, 333, EW16, "vle16");
    send(vmem(1, 3'b110, 2'b00), 64'h3004, 0);      expect_req(1, 64'h3004, 333, EW32, "vse32");
    send(vmem(1, 3'b111, 2'b00), 64'h4008, 0);      expect_req(1, 64'h4008, 333, EW64, "vse64");

    // a held request: the next memory instruction must wait, a vsetvli must not
    send(vmem(0, 3'b111, 2'b00), 64'h5000, 0);
    insn.insn = vmem(0, 3'b110, 2'b00); insn.rs1 = 64'h6000; iv = 1;
    #1 check(!ir, "second memory instruction waits while the request is held");
    insn.insn = vsetvli(5'd1, 5'd2, 3'd3, 3'd0); insn.rs1 = 64'd44;
    #1 check(ir, "vsetvli passes while the request is held");
    @(posedge clk); #1; iv = 0;
    expect_req(0, 64'h5000, 333, EW64, "held vle64 keeps its vl");
    send(vmem(0, 3'b110, 2'b00), 64'h6000, 0); expect_req(0, 64'h6000, 44, EW32, "vle32 after new vl");

    // strided access and vl = 0 create no request
    send(vmem(0, 3'b110, 2'b10), 64'h7000, 0);
    send(vsetivli(5'd0, 3'd2, 3'd0), 0, 0);
    check(vl == 0, "vl = 0");
    send(vmem(0, 3'b110, 2'b00), 64'h8000, 0);
    repeat (3) @(posedge clk); #1;
    check(!rv, "no request for strided access or vl = 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
