// tb_glsu_shuffle: checks the GLSU shuffle stage in both directions
// against the element-to-cluster rule, element i -> cluster (i / L) mod C.
// Load: aligned memory beats of an access go in; the bytes each cluster
// receives (where the mask is set) must be exactly the bytes of its
// elements in order.  Store: every cluster supplies its byte stream, 4*L
// bytes per beat; the memory beats that come out must rebuild the access.
// All element widths and lengths that end inside a beat are tried, under
// random backpressure, and a steady 64-bit stream must sustain one beat
// per cycle.
module tb_glsu_shuffle;
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

  localparam int L = 4, C = 4, S = 4 * L, B = S * C;
  typedef logic [B*8-1:0] word_t;
  typedef logic [B-1:0]   mask_t;

  // ---------------- load instance ----------------
  word_t ld_d, ld_q; mask_t ld_m, ld_mq; beat_meta_t ld_x, ld_xq;
  logic ld_v, ld_r, ld_vq, ld_rq;
  glsu_shuffle #(.NR_LANES(L), .NR_CLUSTERS(C), .STORE(1'b0)) dut_ld (
    .clk_i(clk), .rst_ni(rst_n),
    .data_i(ld_d), .mask_i(ld_m), .meta_i(ld_x), .valid_i(ld_v), .ready_o(ld_r),
    .data_o(ld_q), .mask_o(ld_mq), .meta_o(ld_xq), .valid_o(ld_vq), .ready_i(ld_rq)
  );
  // ---------------- store instance ----------------
  word_t st_d, st_q; beat_meta_t st_x, st_xq; mask_t st_mq;
  logic st_v, st_r, st_vq, st_rq;
  glsu_shuffle #(.NR_LANES(L), .NR_CLUSTERS(C), .STORE(1'b1)) dut_st (
    .clk_i(clk), .rst_ni(rst_n),
    .data_i(st_d), .mask_i('1), .meta_i(st_x), .valid_i(st_v), .ready_o(st_r),
    .data_o(st_q), .mask_o(st_mq), .meta_o(st_xq), .valid_o(st_vq), .ready_i(st_rq)
  );

  logic [7:0] mem [];            // the access, byte 0 = element 0
  logic [7:0] exp_cl [C][$];     // expected per-cluster streams
  logic [7:0] got_cl [C][$];
  logic [7:0] got_mem [$];
  int         nbeats_out, last_seen;
  bit         stall_rand;

  always @(posedge clk) if (rst_n) begin
    if (ld_vq && ld_rq) begin
      for (int c = 0; c < C; c++)
        for (int s = 0; s < S; s++)
          if (ld_mq[c*S + s]) got_cl[c].push_back(ld_q[8*(c*S+s) +: 8]);
      if (ld_xq.last) last_seen++;
    end
    if (st_vq && st_rq) begin
      for (int p = 0; p < B; p++) got_mem.push_back(st_q[8*p +: 8]);
      nbeats_out++;
      if (st_xq.last) last_seen++;
    end
  end
  always @(negedge clk) begin
    ld_rq = stall_rand ? ($urandom_range(0, 2) != 0) : 1'b1;
    st_rq = stall_rand ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic run(vew_e ew, int nbytes);
    int e, nb, ncl;
    e  = 1 << ew;
    nb = (nbytes + B - 1) / B;
    mem = new[nb * B];
    for (int i = 0; i < nb * B; i++) mem[i] = (i < nbytes) ? 8'($urandom) : 8'h00;
    for (int c = 0; c < C; c++) begin exp_cl[c].delete(); got_cl[c].delete(); end
    got_mem.delete(); nbeats_out = 0; last_seen = 0;
    for (int i = 0; i < nbytes / e; i++)
      for (int k = 0; k < e; k++) exp_cl[(i / L) % C].push_back(mem[i*e + k]);
    // load: feed aligned beats
    for (int b = 0; b < nb; b++) begin
      ld_v = 1;
      for (int p = 0; p < B; p++) begin
        ld_d[8*p +: 8] = mem[b*B + p];
        ld_m[p]        = (b*B + p < nbytes);
      end
      ld_x = '0; ld_x.ew = ew; ld_x.nbytes = nbytes; ld_x.first = (b == 0); ld_x.last = (b == nb - 1);
      @(posedge clk);
      while (!ld_r) @(posedge clk);
      #1;
    end
    ld_v = 0;
    // store: each cluster sends its stream 4L bytes per beat
    ncl = (ew == EW64) ? ((nb + 1) / 2) * 2 : nb;
    for (int t = 0; t < ncl; t++) begin
      st_v = 1;
      for (int c = 0; c < C; c++)
        for (int s = 0; s < S; s++)
          st_d[8*(c*S+s) +: 8] = (t*S + s < exp_cl[c].size()) ? exp_cl[c][t*S + s] : 8'hEE;
      st_x = '0; st_x.ew = ew; st_x.nbytes = nbytes; st_x.first = (t == 0); st_x.last = (t == ncl - 1);
      st_x.drop1 = (ew == EW64) && (t % 2 == 1) && (t >= nb);
      @(posedge clk);
      while (!st_r) @(posedge clk);
      #1;
    end
    st_v = 0;
    repeat (30) @(posedge clk);
    #1;
    for (int c = 0; c < C; c++) begin
      check(got_cl[c].size() == exp_cl[c].size(),
            $sformatf("ew=%0d n=%0d cluster %0d got %0d bytes, expected %0d", e, nbytes, c, got_cl[c].size(), exp_cl[c].size()));
      for (int k = 0; k < exp_cl[c].size() && k < got_cl[c].size(); k++)
        if (got_cl[c][k] != exp_cl[c][k]) begin
          check(0, $sformatf("ew=%0d n=%0d cluster %0d byte %0d", e, nbytes, c, k));
          break;
        end
    end
    check(nbeats_out == nb, $sformatf("ew=%0d n=%0d store gave %0d memory beats, expected %0d", e, nbytes, nbeats_out, nb));
    begin
      bit ok = 1;
      for (int i = 0; i < nbytes && i < got_mem.size(); i++) if (got_mem[i] != mem[i]) ok = 0;
      check(ok, $sformatf("ew=%0d n=%0d store bytes", e, nbytes));
    end
    check(last_seen == 2, $sformatf("ew=%0d n=%0d last flags %0d", e, nbytes, last_seen));
  endtask

  initial begin
    ld_v = 0; st_v = 0; ld_d = '0; ld_m = '0; ld_x = '0; st_d = '0; st_x = '0; stall_rand = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int w = 0; w < 4; w++) begin
      int e;
      e = 1 << w;
      run(vew_e'(w), e * L * C);            // one element per lane
      run(vew_e'(w), B);                     // one beat
      run(vew_e'(w), 3 * B);                 // odd number of beats
      run(vew_e'(w), 4 * B);
      run(vew_e'(w), e * (5 * L * C + 3));   // ends inside a beat
      run(vew_e'(w), e);                     // one element
    end
    // throughput: 16 beats of 64-bit elements, no stalls
    stall_rand = 0;
    begin
      int t0, t1, n;
      n = 0;
      fork
        run(EW64, 16 * B);
        begin
          @(posedge ld_vq); t0 = $time;
          while (n < 16) begin @(posedge clk); if (ld_vq && ld_rq) n++; end
          t1 = $time;
        end
      join
      check((t1 - t0) / 10 <= 17, $sformatf("16 beats left in %0d cycles", (t1 - t0) / 10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
