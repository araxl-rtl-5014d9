// tb_araxl: end-to-end test of the AraXL interconnect at its default,
// full size (64 lanes: 16 clusters of 4 lanes, 2048-bit memory bus, 64-bit
// ring), without parameter overrides.
//
// Around the top sit behavioural models: a scalar core that sends vector
// instructions and collects the answers, 16 clusters that take the
// broadcast instructions (cluster 0 answers each one), consume and produce
// per-lane load/store words, and drive their slide units; an L2 memory
// behind the AXI port; and the data-cache invalidation port.  Every stream
// is stalled at random.
//
// Checks: every instruction reaches every cluster once and in order, and the
// core gets cluster 0's answer; vector loads deliver element i to cluster
// (i / L) mod C, lane i mod L, at the lane-word byte the lane layout gives,
// for all element widths, misaligned addresses and accesses split into
// several bursts; vector stores leave exactly the vector in memory; slides
// up and down and reductions across all clusters give the right values;
// every 16-byte line of a write burst is invalidated, except the lines the
// previous burst already covered.  Each mechanism is counted, and one that never happened counts
// as a failure.
module tb_araxl;
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

  // ---------------- test sequence ----------------
  initial begin
    creq = '0; creqv = 0; crespr = 1; c0v = 0; c0resp = '0; clr = '1; irdy = 1;
    ldr = '1; stv = '0; stl = '0; arr = 0; awr = 0; wr = 0; rv = 0; rl = 0; bv = 0; rd = '0;
    rresp = '0; bresp = '0; slop = RING_SLIDE1UP; slrop = RED_SUM; slvl = '0; slsc = '0;
    slcv = '0; slgv = '0; slgi = '0; slor = '1; slri = '0; slrv = '0;
    for (int i = 0; i < 4; i++) n_ew[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    stall = 1;
    for (int ew = 0; ew < 4; ew++) begin
      do_load(64'h8000_0000 + addr_t'(ew * 64'h1_0000), (6000 >> ew) + 3, ew);   // several bursts
      do_store(64'h8010_0003 + addr_t'(ew * 64'h1_0000), (1000 >> ew) + 1, ew);  // misaligned
      do_load(64'h8010_0003 + addr_t'(ew * 64'h1_0000), (1000 >> ew) + 1, ew);  // read back
    end
    // two stores sharing a bus word: the second store's lines of it are filtered
    do_store(64'h8020_0000, 3, 3);   // bytes 0x00..0x17
    do_store(64'h8020_0018, 2, 2);   // bytes 0x18..0x1f, same line as 0x10
    slide(RING_SLIDE1DOWN, 1000);
    slide(RING_SLIDE1UP, 1000);
    slide(RING_SLIDE1UP, 77);
    reduce(RED_SUM);
    reduce(RED_XOR);
    reduce(RED_MAXU);
    stall = 0;
    repeat (400) @(posedge clk);
    // every instruction reached every cluster, in order
    for (int c = 0; c < C; c++) check(got_q[c].size() == got_q[0].size(), "same instructions in every cluster");
    for (int i = 0; i < got_q[0].size(); i++)
      for (int c = 1; c < C; c++) check(got_q[c][i] == got_q[0][i], "broadcast order");
    check(sent_q.size() == 0, $sformatf("%0d instructions without an answer", sent_q.size()));
    check(inval_exp.size() == 0, $sformatf("%0d lines never invalidated", inval_exp.size()));
    check(!err, "no AXI error");
    // every mechanism must have happened
    check(n_bcast > 0, "broadcast to the clusters");
    check(n_resp > 0, "cluster 0 answers to the core");
    check(n_multi_burst > 0, "access split into several bursts");
    check(n_misaligned > 0, "misaligned access through the align stage");
    for (int i = 0; i < 4; i++) check(n_ew[i] > 0, $sformatf("shuffle for %0d-byte elements", 1 << i));
    check(n_ld_beats > 0 && n_lane_bytes > 0, "load beats to the lanes");
    check(n_st_beats > 0 && n_stdone > 0, "store beats and write responses");
    check(n_inval > 0, "cache-line invalidations");
    check(n_filt > 0, "repeated line filtered");
    check(n_slide_up > 0, "slide1up over the ring");
    check(n_slide_dn > 0, "slide1down over the ring");
    check(n_reduce > 0, "reduction tree over the ring");
    check(n_bypass > 0, "ring bypass of intermediate clusters");
    check(n_stall > 0, "back-pressure");
    $display("mechanisms: bcast %0d resp %0d multi-burst %0d misaligned %0d ew %0d/%0d/%0d/%0d ld %0d st %0d inval %0d filtered %0d slides %0d/%0d reductions %0d bypass %0d stalls %0d",
             n_bcast, n_resp, n_multi_burst, n_misaligned, n_ew[0], n_ew[1], n_ew[2], n_ew[3], n_ld_beats,
             n_st_beats, n_inval, n_filt, n_slide_up, n_slide_dn, n_reduce, n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
