// tb_glsu_align: checks the GLSU align stage in both directions.  Load:
// the bus words an access touches go in (first word = address rounded
// down); the output must be the access bytes starting at byte 0, with the
// mask set exactly on the first N bytes, in ceil(N/B) beats.  Store: the
// aligned access goes in; the output words and strobes must place byte k at
// bus address off + k, in ceil((off+N)/B) beats.  Random offsets, lengths
// and backpressure; accesses follow back to back.  A single beat must come
// out after log2(B) + 1 cycles.
module tb_glsu_align;
  import araxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int B = 32;
  typedef logic [B*8-1:0] word_t;

  word_t      li, lo, si, so;
  logic [B-1:0] lm, sm;
  beat_meta_t lx, lxo, sx, sxo;
  logic lv, lr, lvo, lro, sv, sr, svo, sro;

  glsu_align #(.AXI_BYTES(B), .STORE(1'b0)) dut_ld (
    .clk_i(clk), .rst_ni(rst_n),
    .data_i(li), .meta_i(lx), .valid_i(lv), .ready_o(lr),
    .data_o(lo), .mask_o(lm), .meta_o(lxo), .valid_o(lvo), .ready_i(lro)
  );
  glsu_align #(.AXI_BYTES(B), .STORE(1'b1)) dut_st (
    .clk_i(clk), .rst_ni(rst_n),
    .data_i(si), .meta_i(sx), .valid_i(sv), .ready_o(sr),
    .data_o(so), .mask_o(sm), .meta_o(sxo), .valid_o(svo), .ready_i(sro)
  );

  // expected output, pushed by the drivers
  logic [7:0] exp_ld [$];    // byte values of the access in order
  logic [8:0] exp_st [$];    // {strobe, byte} per output byte position
  int         ld_beats_exp, st_beats_exp, ld_beats, st_beats;
  bit         stall = 1;

  always @(negedge clk) begin
    lro = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
    sro = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    if (lvo && lro) begin
      ld_beats++;
      for (int p = 0; p < B; p++) if (lm[p]) begin
        if (exp_ld.size() == 0) check(0, "load: unexpected byte");
        else begin
          check(lo[8*p +: 8] == exp_ld[0], $sformatf("load byte value at beat position %0d", p));
          void'(exp_ld.pop_front());
        end
      end
    end
    if (svo && sro) begin
      st_beats++;
      for (int p = 0; p < B; p++) begin
        logic [8:0] e;
        e = (exp_st.size() > 0) ? exp_st.pop_front() : 9'h000;
        check(sm[p] == e[8], $sformatf("store strobe at %0d", p));
        if (e[8]) check(so[8*p +: 8] == e[7:0], $sformatf("store byte at %0d", p));
      end
    end
  end

  task automatic access(int off, int n);
    int nin, nout;
    logic [7:0] bytes [];
    nin  = (off + n + B - 1) / B;
    nout = (n + B - 1) / B;
    bytes = new[n];
    foreach (bytes[i]) bytes[i] = 8'($urandom);
    foreach (bytes[i]) exp_ld.push_back(bytes[i]);
    for (int p = 0; p < nin * B; p++)
      exp_st.push_back((p >= off && p < off + n) ? {1'b1, bytes[p - off]} : 9'h000);
    ld_beats_exp += nout;
    st_beats_exp += nin;
    fork
      for (int b = 0; b < nin; b++) begin
        lv = 1;
        for (int p = 0; p < B; p++) begin
          int k;
          k = b * B + p - off;
          li[8*p +: 8] = (k >= 0 && k < n) ? bytes[k] : 8'($urandom);
        end
        lx = '0; lx.off = 16'(off); lx.nbytes = n; lx.first = (b == 0); lx.last = (b == nin - 1);
        @(posedge clk); while (!lr) @(posedge clk); #1;
        lv = 0;
      end
      for (int b = 0; b < nout; b++) begin
        sv = 1;
        for (int p = 0; p < B; p++) si[8*p +: 8] = (b * B + p < n) ? bytes[b * B + p] : 8'($urandom);
        sx = '0; sx.off = 16'(off); sx.nbytes = n; sx.first = (b == 0); sx.last = (b == nout - 1);
        @(posedge clk); while (!sr) @(posedge clk); #1;
        sv = 0;
      end
    join
  endtask

  initial begin
    lv = 0; sv = 0; li = '0; si = '0; lx = '0; sx = '0;
    ld_beats = 0; st_beats = 0; ld_beats_exp = 0; st_beats_exp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // latency of one aligned beat
    stall = 0;
    begin
      int cyc;
      lv = 1; li = '1; lx = '0; lx.nbytes = B; lx.first = 1; lx.last = 1;
      exp_ld.delete(); for (int p = 0; p < B; p++) exp_ld.push_back(8'hFF);
      ld_beats_exp += 1;
      @(posedge clk); #1; lv = 0; cyc = 1;
      while (!lvo && cyc < 40) begin @(posedge clk); #1; cyc++; end
      check(cyc == $clog2(B) + 2, $sformatf("load latency %0d cycles, expected %0d", cyc, $clog2(B) + 2));
      repeat (3) @(posedge clk); #1;
    end
    stall = 1;
    access(0, B); access(5, 1); access(31, 2); access(7, 3 * B); access(0, 1);
    access(1, B - 1); access(16, B + 16);
    for (int i = 0; i < 60; i++) access($urandom_range(0, B - 1), $urandom_range(1, 4 * B));
    repeat (60) @(posedge clk);
    check(exp_ld.size() == 0, $sformatf("load: %0d bytes never came", exp_ld.size()));
    check(exp_st.size() == 0, $sformatf("store: %0d byte positions never came", exp_st.size()));
    check(ld_beats == ld_beats_exp, $sformatf("load beats %0d, expected %0d", ld_beats, ld_beats_exp));
    check(st_beats == st_beats_exp, $sformatf("store beats %0d, expected %0d", st_beats, st_beats_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
