// tb_inval_filter: checks the cache-line invalidation walk.  Each write
// burst must produce the addresses of all 16-byte lines it touches, in
// order, one per cycle when the cache is ready, except lines inside the
// previous burst's range, which must be dropped and flagged.  The cache side
// stalls randomly in the second half.
module tb_inval_filter;
  import araxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t aa, ia;
  logic [7:0] al;
  logic [3:0] asz;
  logic av, ar, iv, ir, filt;

  inval_filter dut (
    .clk_i(clk), .rst_ni(rst_n), .aw_addr_i(aa), .aw_len_i(al), .aw_size_i(asz),
    .aw_valid_i(av), .aw_ready_o(ar), .inval_addr_o(ia), .inval_valid_o(iv),
    .inval_ready_i(ir), .filtered_o(filt)
  );

  addr_t exp_q [$];
  bit    stall = 0;
  int    nfilt = 0, nfilt_exp = 0, busy_cycles = 0, lines = 0;

  always @(negedge clk) ir = stall ? 1'($urandom) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (filt) nfilt++;
    if (iv && ir) begin
      lines++;
      if (exp_q.size() == 0) check(0, "unexpected invalidation");
      else check(ia == exp_q.pop_front(), $sformatf("invalidated line %h", ia));
    end
    if (!ar) busy_cycles++;
  end

  addr_t prev_lo, prev_hi;
  bit    have_prev = 0;
  task automatic burst(addr_t a, int len, int size);
    addr_t first, last_b;
    first = a & ~addr_t'(15);
    last_b = a + addr_t'((len + 1) << size) - 1;
    for (addr_t l = first; l <= last_b; l += 16) begin
      if (have_prev && l >= prev_lo && l < prev_hi) nfilt_exp++;
      else exp_q.push_back(l);
    end
    prev_lo = first; prev_hi = last_b + 1; have_prev = 1;
    aa = a; al = 8'(len); asz = 4'(size); av = 1;
    @(posedge clk); while (!ar) @(posedge clk); #1;
    av = 0;
  endtask

  initial begin
    av = 0; aa = '0; al = '0; asz = '0; ir = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // rate: 4 beats of 64 bytes = 16 lines, one per cycle
    burst(64'h1000, 3, 6);
    while (!ar) begin @(posedge clk); #1; end
    check(busy_cycles == 16, $sformatf("16 lines took %0d cycles", busy_cycles));
    // bursts that overlap the previous one
    burst(64'h2000, 0, 3);   // bytes 0x2000..0x2007
    burst(64'h2008, 1, 3);   // 0x2008..0x2017: line 0x2000 was just done
    burst(64'h2018, 0, 3);   // line 0x2010 was just done
    burst(64'h2000, 3, 6);   // 0x2000..0x20ff: only line 0x2010 repeats
    stall = 1;
    for (int i = 0; i < 100; i++) begin
      addr_t a;
      a = 64'h4000 + addr_t'($urandom_range(0, 255) * 8);
      burst(a, $urandom_range(0, 7), $urandom_range(0, 5));
    end
    repeat (200) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d lines never invalidated", exp_q.size()));
    check(nfilt == nfilt_exp && nfilt_exp > 1, $sformatf("%0d lines filtered, expected %0d", nfilt, nfilt_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
