// tb_reqi: checks the request interface.  Two instances, without and with
// one register cut, see the same instruction stream.  Every listener must
// receive every instruction exactly once and in order, whatever its ready
// pattern; only cluster 0 answers; with one cut the answer reaches the core
// exactly two cycles later than without.
module tb_reqi;
  import araxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int T = 4;

  // ---------------- instance under random listener stalls ----------------
  acc_req_t  req, bc;
  logic      rv, rr, sv, sr;
  acc_resp_t resp, c0resp;
  logic [T-1:0] bv, br;
  logic      c0v, c0r;

  reqi #(.NR_TARGETS(T), .NUM_CUTS(1)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(req), .core_req_valid_i(rv), .core_req_ready_o(rr),
    .core_resp_o(resp), .core_resp_valid_o(sv), .core_resp_ready_i(sr),
    .cl_req_o(bc), .cl_req_valid_o(bv), .cl_req_ready_i(br),
    .cl0_resp_i(c0resp), .cl0_resp_valid_i(c0v), .cl0_resp_ready_o(c0r)
  );

  // listeners log what they take
  logic [31:0] got [T][$];
  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < T; t++) if (bv[t] && br[t]) got[t].push_back(bc.insn);
  end
  // cluster 0 answers each instruction with insn + 1 one cycle later
  logic [31:0] pend [$];
  always @(posedge clk) if (rst_n) begin
    if (bv[0] && br[0]) pend.push_back(bc.insn);
    if (c0v && c0r) void'(pend.pop_front());
  end
  always_comb begin
    c0v    = pend.size() > 0;
    c0resp = '0;
    if (pend.size() > 0) c0resp.result = xlen_t'(pend[0]) + 1;
  end
  logic [63:0] answers [$];
  always @(posedge clk) if (rst_n && sv && sr) answers.push_back(resp.result);

  // ---------------- latency pair: 0 and 1 cut, always ready ----------------
  logic      lv0, lr0, lv1, lr1, ls0, ls1;
  acc_resp_t lresp0, lresp1;
  acc_req_t  lbc0, lbc1;
  logic [1:0] lbv0, lbv1;
  logic      l0v, l1v, l0r, l1r;
  reqi #(.NR_TARGETS(2), .NUM_CUTS(0)) dut0 (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(req), .core_req_valid_i(lv0), .core_req_ready_o(lr0),
    .core_resp_o(lresp0), .core_resp_valid_o(ls0), .core_resp_ready_i(1'b1),
    .cl_req_o(lbc0), .cl_req_valid_o(lbv0), .cl_req_ready_i(2'b11),
    .cl0_resp_i('0), .cl0_resp_valid_i(l0v), .cl0_resp_ready_o(l0r)
  );
  reqi #(.NR_TARGETS(2), .NUM_CUTS(1)) dut1 (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(req), .core_req_valid_i(lv1), .core_req_ready_o(lr1),
    .core_resp_o(lresp1), .core_resp_valid_o(ls1), .core_resp_ready_i(1'b1),
    .cl_req_o(lbc1), .cl_req_valid_o(lbv1), .cl_req_ready_i(2'b11),
    .cl0_resp_i('0), .cl0_resp_valid_i(l1v), .cl0_resp_ready_o(l1r)
  );
  // cluster 0 of each answers one cycle after it sees the instruction
  always_ff @(posedge clk) begin
    l0v <= rst_n && lbv0[0];
    l1v <= rst_n && lbv1[0];
  end

  int n_issue = 40;
  initial begin
    int t0, t1, cyc;
    rv = 0; sr = 1; br = '1; req = '0; lv0 = 0; lv1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // latency: issue one instruction to both latency instances
    // both are idle and always ready: a one-cycle request is taken at once
    check(lr0 && lr1, "latency instances ready when idle");
    lv0 = 1; lv1 = 1; req.insn = 32'h1234;
    cyc = 0; t0 = -1; t1 = -1;
    while ((t0 < 0 || t1 < 0) && cyc < 50) begin
      @(posedge clk); #1;
      lv0 = 0; lv1 = 0;
      cyc++;
      if (ls0 && t0 < 0) t0 = cyc;
      if (ls1 && t1 < 0) t1 = cyc;
    end
    lv0 = 0; lv1 = 0;
    check(t1 - t0 == 2, $sformatf("one cut delays the answer by %0d cycles, expected 2", t1 - t0));
    // stream under random stalls
    fork
      begin
        for (int i = 0; i < n_issue; i++) begin
          rv = 1; req.insn = 32'(i * 7 + 3); req.rs1 = 64'(i);
          @(posedge clk);
          while (!rr) @(posedge clk);
          #1;
        end
        rv = 0;
      end
      begin
        repeat (600) begin
          br = 4'($urandom);
          sr = ($urandom_range(0, 3) != 0);
          @(posedge clk); #1;
        end
        br = '1; sr = 1;
      end
    join
    repeat (20) @(posedge clk);
    for (int t = 0; t < T; t++) begin
      check(got[t].size() == n_issue, $sformatf("listener %0d took %0d instructions", t, got[t].size()));
      for (int i = 0; i < n_issue && i < got[t].size(); i++)
        check(got[t][i] == 32'(i * 7 + 3), $sformatf("listener %0d instruction %0d", t, i));
    end
    check(answers.size() == n_issue, $sformatf("%0d answers", answers.size()));
    for (int i = 0; i < answers.size(); i++)
      check(answers[i] == 64'(i * 7 + 4), $sformatf("answer %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
