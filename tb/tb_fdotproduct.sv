// tb_fdotproduct: the dot-product workload at full size (16 clusters of 4
// lanes, N = 8192 64-bit elements, one LMUL = 8 register group) through the
// AraXL interconnect, without parameter overrides.
//
// The same behavioural models as the end-to-end test surround the top: a
// scalar core, 16 clusters, the L2 memory and the data-cache port.  The test
// sets vl = 8192 at 64-bit elements, loads x and y (64 KiB each, 256 bus
// beats each) through the GLSU, lets every cluster model multiply and sum the
// elements its four lanes received, and reduces the 16 cluster partials over
// the ring with the log2(16) = 4 step tree.  The cluster models stand in for
// the lanes and FPUs, which are outside this design, so the arithmetic is
// integer multiply-add modulo 2^64 instead of floating point.
//
// Checks: every element reaches its lane (as in the end-to-end test), the
// reduced result equals the dot product computed directly from memory, each
// 256-beat load without back-pressure moves one bus word per cycle (at most
// 256 + 64 cycles from the load instruction to the last lane beat), and the
// ring reduction ends within 40 cycles.  The workload size follows the
// paper's N = 16 * LMUL * lanes rule; the integer arithmetic is this test's.
module tb_fdotproduct;
  import araxl_pkg::*;
  localparam int L = NrLanes;
  localparam int C = NrClusters;
  localparam int S = 4 * L;
  localparam int B = S * C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DUT ----------------
  acc_req_t  creq, clreq;
  acc_resp_t cresp, c0resp;
  logic      creqv, creqr, crespv, crespr, c0v, c0r;
  logic [C-1:0] clv, clr;
  addr_t     iaddr;
  logic      ival, irdy, ifilt;
  logic [C-1:0][L-1:0][63:0] ldl, stl;
  logic [C-1:0][L-1:0][7:0]  ldbe;
  logic      ldlast, ldv, str, streq, stdone, err;
  logic [C-1:0] ldr, stv;
  ring_op_e  slop;
  red_op_e   slrop;
  vlen_t     slvl;
  xlen_t     slsc;
  logic [C-1:0] slcv, slcr, sldone, slgv, slgr, slov, slor, slrv, slrr, byp;
  xlen_t [C-1:0][L-1:0] slgi, slgo;
  logic  [C-1:0][L-1:0] slgm;
  xlen_t [C-1:0] slri;
  xlen_t slro;
  logic  slrov;
  addr_t ara, awa;
  logic [7:0] arl, awl;
  logic [3:0] ars, aws;
  logic arv, arr, rv, rr, rl, awv, awr, wv, wr, wl, bv, br;
  logic [B*8-1:0] rd, wd;
  logic [B-1:0] ws;
  logic [1:0] rresp, bresp;

  araxl dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(creq), .core_req_valid_i(creqv), .core_req_ready_o(creqr),
    .core_resp_o(cresp), .core_resp_valid_o(crespv), .core_resp_ready_i(crespr),
    .inval_addr_o(iaddr), .inval_valid_o(ival), .inval_ready_i(irdy),
    .cl_req_o(clreq), .cl_req_valid_o(clv), .cl_req_ready_i(clr),
    .cl0_resp_i(c0resp), .cl0_resp_valid_i(c0v), .cl0_resp_ready_o(c0r),
    .ld_lane_o(ldl), .ld_be_o(ldbe), .ld_last_o(ldlast), .ld_valid_o(ldv), .ld_ready_i(ldr),
    .st_lane_i(stl), .st_valid_i(stv), .st_ready_o(str), .st_req_o(streq), .st_done_o(stdone),
    .axi_err_o(err),
    .sl_op_i(slop), .sl_red_op_i(slrop), .sl_vl_i(slvl), .sl_scalar_i(slsc),
    .sl_cmd_valid_i(slcv), .sl_cmd_ready_o(slcr), .sl_done_o(sldone),
    .sl_grp_i(slgi), .sl_grp_valid_i(slgv), .sl_grp_ready_o(slgr),
    .sl_grp_o(slgo), .sl_grp_mask_o(slgm), .sl_grp_valid_o(slov), .sl_grp_ready_i(slor),
    .sl_red_i(slri), .sl_red_valid_i(slrv), .sl_red_ready_o(slrr),
    .sl_red_o(slro), .sl_red_valid_o(slrov), .sl_red_ready_i(1'b1),
    .ar_addr_o(ara), .ar_len_o(arl), .ar_size_o(ars), .ar_valid_o(arv), .ar_ready_i(arr),
    .r_data_i(rd), .r_resp_i(rresp), .r_last_i(rl), .r_valid_i(rv), .r_ready_o(rr),
    .aw_addr_o(awa), .aw_len_o(awl), .aw_size_o(aws), .aw_valid_o(awv), .aw_ready_i(awr),
    .w_data_o(wd), .w_strb_o(ws), .w_last_o(wl), .w_valid_o(wv), .w_ready_i(wr),
    .b_resp_i(bresp), .b_valid_i(bv), .b_ready_o(br),
    .ring_bypass_o(byp), .inval_filtered_o(ifilt)
  );

  // ---------------- mechanism counters ----------------
  int n_bcast = 0, n_resp = 0, n_ar = 0, n_multi_burst = 0, n_misaligned = 0, n_ew [4];
  int n_ld_beats = 0, n_st_beats = 0, n_stdone = 0, n_inval = 0, n_filt = 0, n_bypass = 0;
  int n_slide_up = 0, n_slide_dn = 0, n_reduce = 0, n_stall = 0, n_lane_bytes = 0;
  bit stall = 0;

  // ---------------- L2 memory model ----------------
  logic [7:0] mem [addr_t];
  function automatic logic [7:0] rdb(addr_t a);
    return mem.exists(a) ? mem[a] : 8'(a ^ (a >> 8) ^ 8'h5A);
  endfunction
  addr_t ar_q [$], aw_q [$];
  int    arlen_q [$], awlen_q [$];
  int    rbeat = 0, wbeat = 0, bpend = 0;
  addr_t inval_exp [$];
  addr_t prev_lo, prev_hi;
  bit    have_prev = 0;

  always @(posedge clk) if (rst_n) begin
    if (arv && arr) begin ar_q.push_back(ara); arlen_q.push_back(int'(arl)); n_ar++; end
    if (awv && awr) begin
      addr_t first, last_b;
      aw_q.push_back(awa); awlen_q.push_back(int'(awl));
      // lines of the burst, except those inside the previous burst
      first = awa & ~addr_t'(15);
      last_b = awa + addr_t'((int'(awl) + 1) * B) - 1;
      for (addr_t l = first; l <= last_b; l += 16)
        if (!(have_prev && l >= prev_lo && l < prev_hi)) inval_exp.push_back(l);
      prev_lo = first; prev_hi = last_b + 1; have_prev = 1;
      check(aws == 4'($clog2(B)), "AW size is the full bus word");
    end
    if (rv && rr) begin
      if (rbeat == arlen_q[0]) begin rbeat = 0; void'(ar_q.pop_front()); void'(arlen_q.pop_front()); end
      else rbeat++;
    end
    if (wv && wr) begin
      for (int p = 0; p < B; p++) if (ws[p]) mem[aw_q[0] + addr_t'(wbeat * B + p)] = wd[8*p +: 8];
      check(wl == (wbeat == awlen_q[0]), "WLAST");
      if (wbeat == awlen_q[0]) begin wbeat = 0; void'(aw_q.pop_front()); void'(awlen_q.pop_front()); bpend++; end
      else wbeat++;
    end
    if (bv && br) bpend--;
    if (stdone) n_stdone++;
    if (ival && irdy) n_inval++;
    if (ifilt) n_filt++;
    if (byp != '0) n_bypass++;
    if ((ldv && !(&ldr)) || (arv && !arr) || (wv && !wr) || (clv != '0 && clr != '1)) n_stall++;
  end
  always @(negedge clk) begin
    arr = stall ? 1'($urandom) : 1'b1;
    awr = stall ? 1'($urandom) : 1'b1;
    wr  = stall ? 1'($urandom) : 1'b1;
    irdy = stall ? 1'($urandom) : 1'b1;
    rv  = (ar_q.size() > 0) && (stall ? 1'($urandom) : 1'b1);
    rl  = (ar_q.size() > 0) && (rbeat == arlen_q[0]);
    for (int p = 0; p < B; p++) rd[8*p +: 8] = (ar_q.size() > 0) ? rdb(ar_q[0] + addr_t'(rbeat * B + p)) : 8'h0;
    bv  = (bpend > 0);
    rresp = 2'b00; bresp = 2'b00;
  end

  // ---------------- scalar core and cluster instruction models ----------------
  logic [31:0] sent_q [$];
  logic [31:0] got_q [C][$];
  logic [31:0] ans_q [$];
  int resp_exp = 0;
  always @(negedge clk) begin
    for (int c = 0; c < C; c++) clr[c] = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
    crespr = stall ? 1'($urandom) : 1'b1;
    c0v = (ans_q.size() > 0);
    c0resp.result = (ans_q.size() > 0) ? xlen_t'(ans_q[0]) : '0;
    c0resp.error = 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < C; c++) if (clv[c] && clr[c]) begin
      got_q[c].push_back(clreq.insn);
      n_bcast++;
      if (c == 0) ans_q.push_back(clreq.insn ^ 32'hA5A5_0000);
    end
    if (c0v && c0r) void'(ans_q.pop_front());
    if (crespv && crespr) begin
      n_resp++;
      if (sent_q.size() == 0) check(0, "answer without an instruction");
      else check(cresp.result == xlen_t'(sent_q.pop_front() ^ 32'hA5A5_0000), "cluster 0 answer reaches the core in order");
    end
  end

  task automatic send(logic [31:0] i, logic [63:0] rs1);
    sent_q.push_back(i);
    creq.insn = i; creq.rs1 = rs1; creq.rs2 = '0; creqv = 1;
    @(posedge clk); while (!creqr) @(posedge clk); #1;
    creqv = 0;
  endtask

  // ---------------- cluster memory models ----------------
  logic [7:0] lane_got [C][L][$];
  logic [7:0] st_src [C][$];     // cluster's own elements as a byte stream
  int st_ew = 0, st_beat = 0, nld_last = 0;

  always @(negedge clk) begin
    for (int c = 0; c < C; c++) ldr[c] = stall ? ($urandom_range(0, 5) != 0) : 1'b1;
    stv = (streq && (stall ? ($urandom_range(0, 3) != 0) : 1'b1)) ? '1 : '0;
    // lane words of the current two-beat window
    for (int c = 0; c < C; c++) begin
      int e, w0;
      e = 1 << st_ew;
      w0 = (st_beat / 2) * 8 * L;
      stl[c] = '0;
      for (int q = 0; q < 8 * L; q++) begin
        int j, ln, lb;
        j = q / e; ln = j % L; lb = ((j / L) * e) % 8 + q % e;
        stl[c][ln][8*lb +: 8] = (w0 + q < st_src[c].size()) ? st_src[c][w0 + q] : 8'hEE;
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (ldv && (&ldr)) begin
      n_ld_beats++;
      for (int c = 0; c < C; c++) for (int l = 0; l < L; l++) for (int b = 0; b < 8; b++)
        if (ldbe[c][l][b]) lane_got[c][l].push_back(ldl[c][l][8*b +: 8]);
      if (ldlast) nld_last++;
    end
    if ((&stv) && str) begin n_st_beats++; st_beat++; end
  end

  function automatic logic [31:0] vsetvli(int sew);
    return {1'b0, 3'b000, 2'b00, 3'(sew), 3'd3, 5'd2, 3'b111, 5'd1, 7'b1010111};
  endfunction
  function automatic logic [2:0] width(int ew);
    case (ew) 0: return 3'b000; 1: return 3'b101; 2: return 3'b110; default: return 3'b111; endcase
  endfunction

  task automatic do_load(addr_t a, int vl, int ew);
    int e, t, nl0, ar0;
    e = 1 << ew;
    for (int c = 0; c < C; c++) for (int l = 0; l < L; l++) lane_got[c][l].delete();
    nl0 = nld_last; ar0 = n_ar;
    send(vsetvli(ew), 64'(vl));
    send({3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(ew), 5'd8, 7'b0000111}, a);
    t = 0;
    while (nld_last == nl0 && t < 20000) begin @(posedge clk); t++; end
    check(nld_last == nl0 + 1, $sformatf("load %h vl %0d ew %0d finished", a, vl, e));
    if (n_ar - ar0 > 1) n_multi_burst++;
    if (a % B != 0) n_misaligned++;
    n_ew[ew]++;
    // element i -> cluster (i / L) mod C, lane i mod L, in order
    for (int c = 0; c < C; c++) for (int l = 0; l < L; l++) begin
      int n;
      n = 0;
      for (int i = c * L + l; i < vl; i += L * C)
        for (int b = 0; b < e; b++) begin
          if (n < lane_got[c][l].size())
            check(lane_got[c][l][n] == rdb(a + addr_t'(i * e + b)), $sformatf("load ew %0d element %0d byte %0d in cluster %0d lane %0d", e, i, b, c, l));
          n++;
        end
      check(lane_got[c][l].size() == n, $sformatf("load ew %0d vl %0d: cluster %0d lane %0d got %0d bytes, expected %0d", e, vl, c, l, lane_got[c][l].size(), n));
      n_lane_bytes += n;
    end
  endtask

  task automatic do_store(addr_t a, int vl, int ew);
    int e, t, nd0;
    logic [7:0] v [];
    e = 1 << ew;
    v = new[vl * e];
    for (int i = 0; i < vl * e; i++) v[i] = 8'($urandom);
    for (int c = 0; c < C; c++) begin
      st_src[c].delete();
      for (int i = c * L; i < vl; i += L * C)
        for (int k = i; k < i + L && k < vl; k++)
          for (int b = 0; b < e; b++) st_src[c].push_back(v[k * e + b]);
    end
    st_ew = ew; st_beat = 0;
    nd0 = n_stdone;
    send(vsetvli(ew), 64'(vl));
    send({3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(ew), 5'd8, 7'b0100111}, a);
    t = 0;
    while (n_stdone == nd0 && t < 20000) begin @(posedge clk); t++; end
    repeat (3) @(posedge clk);
    check(n_stdone == nd0 + 1, $sformatf("store %h vl %0d ew %0d done", a, vl, e));
    for (int i = 0; i < vl * e; i++)
      check(rdb(a + addr_t'(i)) == v[i], $sformatf("store ew %0d byte %0d", e, i));
    for (int i = 0; i < 8; i++) begin
      check(!mem.exists(a + addr_t'(vl * e + i)), "no write after the vector");
      check(!mem.exists(a - addr_t'(i + 1)) || mem[a - addr_t'(i + 1)] != 8'hEE, "no write before the vector");
    end
  endtask

  // invalidations: the lines of every write burst, in order, except lines
  // inside the previous burst
  always @(posedge clk) if (rst_n && ival && irdy) begin
    if (inval_exp.size() == 0) check(0, "unexpected invalidation");
    else check(iaddr == inval_exp.pop_front(), $sformatf("invalidated line %h", iaddr));
  end

  // ---------------- slide units ----------------
  xlen_t src [4096];
  int    nres, grp_out [C], grp_in [C];
  bit    running = 0;
  always @(negedge clk) begin
    for (int c = 0; c < C; c++) begin
      int i0;
      slor[c] = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
      i0 = grp_in[c] * L * C + c * L;
      slgv[c] = running && (i0 < int'(slvl));
      for (int l = 0; l < L; l++) slgi[c][l] = (i0 + l < 4096) ? src[i0 + l] : '0;
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < C; c++) begin
      if (running && slgv[c] && slgr[c]) grp_in[c]++;
      if (slov[c] && slor[c]) begin
        for (int l = 0; l < L; l++) begin
          int i;
          xlen_t e;
          i = grp_out[c] * L * C + c * L + l;
          if (i < int'(slvl)) begin
            if (slop == RING_SLIDE1DOWN) e = (i == int'(slvl) - 1) ? slsc : src[i + 1];
            else                         e = (i == 0) ? slsc : src[i - 1];
            check(slgo[c][l] == e, $sformatf("slide %0d element %0d", slop, i));
            nres++;
          end
        end
        grp_out[c]++;
      end
    end
  end

  task automatic sl_command();
    while (slcr != '1) @(posedge clk);
    #1; slcv = '1;
    @(posedge clk); #1; slcv = '0;
  endtask

  task automatic slide(ring_op_e o, int n);
    slop = o; slvl = vlen_t'(n); slsc = {$urandom, $urandom};
    for (int i = 0; i < 4096; i++) src[i] = {$urandom, $urandom};
    nres = 0;
    for (int c = 0; c < C; c++) begin grp_out[c] = 0; grp_in[c] = 0; end
    running = 1;
    sl_command();
    while (slcr != '1 || slov != '0) @(posedge clk);
    running = 0;
    check(nres == n, $sformatf("slide %0d vl %0d: %0d results", o, n, nres));
    if (nres == n && o == RING_SLIDE1UP) n_slide_up++;
    if (nres == n && o == RING_SLIDE1DOWN) n_slide_dn++;
  endtask

  task automatic reduce(red_op_e o);
    xlen_t e;
    int t;
    slop = RING_REDUCE; slrop = o;
    for (int c = 0; c < C; c++) slri[c] = {$urandom, $urandom};
    e = slri[0];
    for (int c = 1; c < C; c++)
      case (o)
        RED_SUM: e = e + slri[c];
        RED_XOR: e = e ^ slri[c];
        default: e = (e > slri[c]) ? e : slri[c];
      endcase
    slrv = '1;
    sl_command();
    slrv = '0;
    t = 0;
    while (!slrov && t < 500) begin @(posedge clk); #1; t++; end
    check(slrov && slro == e, $sformatf("reduction %0d: %h, expected %h", o, slro, e));
    if (slrov && slro == e) n_reduce++;
    while (slcr != '1) @(posedge clk);
  endtask

  // ---------------- dot product ----------------
  localparam int N = 8192;
  xlen_t part [C];

  // per-cluster partial sums from the bytes the lanes received for x and y
  task automatic lane_words(output xlen_t w [C][L][$]);
    for (int c = 0; c < C; c++) for (int l = 0; l < L; l++) begin
      w[c][l].delete();
      for (int k = 0; k + 8 <= lane_got[c][l].size(); k += 8) begin
        xlen_t v;
        for (int b = 0; b < 8; b++) v[8*b +: 8] = lane_got[c][l][k + b];
        w[c][l].push_back(v);
      end
    end
  endtask

  function automatic xlen_t mem64(addr_t a);
    xlen_t v;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = rdb(a + addr_t'(b));
    return v;
  endfunction

  initial begin
    xlen_t xw [C][L][$];
    xlen_t yw [C][L][$];
    xlen_t golden;
    longint t0, t1;
    int t;
    addr_t xa, ya;
    creq = '0; creqv = 0; crespr = 1; c0v = 0; c0resp = '0; clr = '1; irdy = 1;
    ldr = '1; stv = '0; stl = '0; arr = 0; awr = 0; wr = 0; rv = 0; rl = 0; bv = 0; rd = '0;
    rresp = '0; bresp = '0; slop = RING_SLIDE1UP; slrop = RED_SUM; slvl = '0; slsc = '0;
    slcv = '0; slgv = '0; slgi = '0; slor = '1; slri = '0; slrv = '0;
    for (int i = 0; i < 4; i++) n_ew[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    stall = 0;
    xa = 64'h8000_0000;
    ya = 64'h8040_0000;
    golden = '0;
    for (int i = 0; i < N; i++) golden += mem64(xa + addr_t'(8 * i)) * mem64(ya + addr_t'(8 * i));
    t0 = $time; do_load(xa, N, 3); t1 = $time;
    check((t1 - t0) / 10 <= 256 + 64, $sformatf("x load took %0d cycles", (t1 - t0) / 10));
    lane_words(xw);
    @(posedge clk); #1;   // leave the clock edge before the next request
    t0 = $time; do_load(ya, N, 3); t1 = $time;
    check((t1 - t0) / 10 <= 256 + 64, $sformatf("y load took %0d cycles", (t1 - t0) / 10));
    $display("load cycles for 256 beats: %0d", (t1 - t0) / 10);
    lane_words(yw);
    for (int c = 0; c < C; c++) begin
      part[c] = '0;
      for (int l = 0; l < L; l++) begin
        check(xw[c][l].size() == N / (L * C) && yw[c][l].size() == N / (L * C), "elements per lane");
        for (int k = 0; k < xw[c][l].size() && k < yw[c][l].size(); k++) part[c] += xw[c][l][k] * yw[c][l][k];
      end
    end
    // inter-cluster reduction over the ring
    slop = RING_REDUCE; slrop = RED_SUM;
    for (int c = 0; c < C; c++) slri[c] = part[c];
    slrv = '1;
    sl_command();
    slrv = '0;
    t = 0;
    while (!slrov && t < 500) begin @(posedge clk); #1; t++; end
    check(t <= 40, $sformatf("reduction took %0d cycles", t));
    check(slrov && slro == golden, $sformatf("dot product %h, expected %h", slro, golden));
    if (slrov && slro == golden) n_reduce++;
    while (slcr != '1) @(posedge clk);
    repeat (50) @(posedge clk);
    check(n_bcast > 0 && n_resp > 0, "instructions broadcast and answered");
    check(n_ld_beats >= 512, "512 load beats");
    check(n_reduce == 1, "ring reduction");
    check(n_bypass > 0, "ring bypass of intermediate clusters");
    $display("dot product %h, reduction %0d cycles, bypass cycles %0d", slro, t, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
