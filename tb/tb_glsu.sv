// tb_glsu: checks the global load-store unit against an AXI memory model
// and 16 cluster models, at default parameters (L = 4, C = 16, 2048-bit
// bus) and, in a second copy, with four register cuts on the cluster links.
// The instructions (vsetvli, vle, vse) enter through the snoop port.
// Loads: every cluster must receive exactly its own elements, element i
// going to cluster (i / L) mod C, as an in-order byte stream marked by the
// byte mask, for all element widths, misaligned addresses and lengths that
// cross 4 KiB pages.  Stores: every cluster supplies its own elements as a
// byte stream; afterwards memory must hold the vector and the bytes just
// outside it must be unchanged, and st_done must pulse once per store.
// Rates and latencies: a long unstalled load must deliver one beat per
// cycle; four cuts on the cluster links must add 8 cycles to a load-store
// round trip (first R beat to first cluster load beat, plus first cluster
// store beat to first W beat).  Memory
// and clusters stall randomly in the other tests.
module tb_glsu;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  ld_lat [2], st_lat [2], ld_cyc [2];
  bit  done [2];

  for (genvar g = 0; g < 2; g++) begin : g_u
    acc_req_t insn;
    logic     iv, ir;
    logic [C-1:0][S*8-1:0] ldd, std;
    logic [C-1:0][S-1:0]   ldm;
    logic     ldl, ldv, str, streq, stpar, stdone, err;
    vew_e     ldew, stew;
    logic [C-1:0] ldr, stv;
    addr_t    ara, awa;
    logic [7:0] arl, awl;
    logic [3:0] ars, aws;
    logic     arv, arr, rv, rr, rl, awv, awr, wv, wr, wl, bv, br;
    logic [B*8-1:0] rd, wd;
    logic [B-1:0]   ws;
    logic [1:0] rresp, bresp;

    if (g == 0) begin : g_d
      glsu dut (
        .clk_i(clk), .rst_ni(rst_n), .insn_i(insn), .insn_valid_i(iv), .insn_ready_o(ir),
        .ld_data_o(ldd), .ld_mask_o(ldm), .ld_last_o(ldl), .ld_ew_o(ldew), .ld_valid_o(ldv), .ld_ready_i(ldr),
        .st_data_i(std), .st_valid_i(stv), .st_ready_o(str), .st_req_o(streq), .st_ew_o(stew),
        .st_parity_o(stpar), .st_done_o(stdone), .axi_err_o(err),
        .ar_addr_o(ara), .ar_len_o(arl), .ar_size_o(ars), .ar_valid_o(arv), .ar_ready_i(arr),
        .r_data_i(rd), .r_resp_i(rresp), .r_last_i(rl), .r_valid_i(rv), .r_ready_o(rr),
        .aw_addr_o(awa), .aw_len_o(awl), .aw_size_o(aws), .aw_valid_o(awv), .aw_ready_i(awr),
        .w_data_o(wd), .w_strb_o(ws), .w_last_o(wl), .w_valid_o(wv), .w_ready_i(wr),
        .b_resp_i(bresp), .b_valid_i(bv), .b_ready_o(br)
      );
    end else begin : g_d
      glsu #(.NUM_CUTS(4)) dut (
        .clk_i(clk), .rst_ni(rst_n), .insn_i(insn), .insn_valid_i(iv), .insn_ready_o(ir),
        .ld_data_o(ldd), .ld_mask_o(ldm), .ld_last_o(ldl), .ld_ew_o(ldew), .ld_valid_o(ldv), .ld_ready_i(ldr),
        .st_data_i(std), .st_valid_i(stv), .st_ready_o(str), .st_req_o(streq), .st_ew_o(stew),
        .st_parity_o(stpar), .st_done_o(stdone), .axi_err_o(err),
        .ar_addr_o(ara), .ar_len_o(arl), .ar_size_o(ars), .ar_valid_o(arv), .ar_ready_i(arr),
        .r_data_i(rd), .r_resp_i(rresp), .r_last_i(rl), .r_valid_i(rv), .r_ready_o(rr),
        .aw_addr_o(awa), .aw_len_o(awl), .aw_size_o(aws), .aw_valid_o(awv), .aw_ready_i(awr),
        .w_data_o(wd), .w_strb_o(ws), .w_last_o(wl), .w_valid_o(wv), .w_ready_i(wr),
        .b_resp_i(bresp), .b_valid_i(bv), .b_ready_o(br)
      );
    end

    // ---------------- AXI memory model ----------------
    logic [7:0] mem [addr_t];
    function automatic logic [7:0] rdb(addr_t a);
      return mem.exists(a) ? mem[a] : 8'(a ^ (a >> 8) ^ 8'h5A);
    endfunction
    addr_t ar_q [$], aw_q [$];
    int    arlen_q [$], awlen_q [$];
    int    rbeat = 0, wbeat = 0, bpend = 0, nstdone = 0, cyc = 0;
    bit    mstall = 0, cstall = 0;
    int    first_r = -1, first_ld = -1, first_st = -1, first_w = -1, last_ld = -1;

    always @(posedge clk) if (rst_n) begin
      cyc++;
      if (arv && arr) begin ar_q.push_back(ara); arlen_q.push_back(int'(arl)); end
      if (awv && awr) begin aw_q.push_back(awa); awlen_q.push_back(int'(awl)); end
      if (rv && rr) begin
        if (first_r < 0) first_r = cyc;
        if (rbeat == arlen_q[0]) begin rbeat = 0; void'(ar_q.pop_front()); void'(arlen_q.pop_front()); end
        else rbeat++;
      end
      if (wv && wr) begin
        if (first_w < 0) first_w = cyc;
        if (aw_q.size() == 0) check(0, "W before AW");
        else begin
          for (int p = 0; p < B; p++) if (ws[p]) mem[aw_q[0] + addr_t'(wbeat * B + p)] = wd[8*p +: 8];
          check(wl == (wbeat == awlen_q[0]), "WLAST on the burst's last beat");
          if (wbeat == awlen_q[0]) begin wbeat = 0; void'(aw_q.pop_front()); void'(awlen_q.pop_front()); bpend++; end
          else wbeat++;
        end
      end
      if (bv && br) bpend--;
      if (stdone) nstdone++;
    end
    always @(negedge clk) begin
      arr = mstall ? 1'($urandom) : 1'b1;
      awr = mstall ? 1'($urandom) : 1'b1;
      wr  = mstall ? 1'($urandom) : 1'b1;
      rv  = (ar_q.size() > 0) && (mstall ? 1'($urandom) : 1'b1);
      rl  = (ar_q.size() > 0) && (rbeat == arlen_q[0]);
      for (int p = 0; p < B; p++) rd[8*p +: 8] = (ar_q.size() > 0) ? rdb(ar_q[0] + addr_t'(rbeat * B + p)) : 8'h0;
      bv  = (bpend > 0);
      rresp = 2'b00; bresp = 2'b00;
    end

    // ---------------- cluster models ----------------
    logic [7:0] ld_got [C][$];
    logic [7:0] st_src [C][$];
    int nld_last = 0;
    always @(negedge clk) begin
      for (int c = 0; c < C; c++) ldr[c] = cstall ? ($urandom_range(0, 3) != 0) : 1'b1;
      stv = (streq && (cstall ? ($urandom_range(0, 3) != 0) : 1'b1)) ? '1 : '0;
      for (int c = 0; c < C; c++)
        for (int b = 0; b < S; b++) std[c][8*b +: 8] = (b < st_src[c].size()) ? st_src[c][b] : 8'hEE;
    end
    always @(posedge clk) if (rst_n) begin
      if (ldv && (&ldr)) begin
        if (first_ld < 0) first_ld = cyc;
        last_ld = cyc;
        for (int c = 0; c < C; c++) for (int b = 0; b < S; b++) if (ldm[c][b]) ld_got[c].push_back(ldd[c][8*b +: 8]);
        if (ldl) nld_last++;
      end
      if ((&stv) && str) begin
        if (first_st < 0) first_st = cyc;
        for (int c = 0; c < C; c++) for (int b = 0; b < S; b++) if (st_src[c].size() > 0) void'(st_src[c].pop_front());
      end
    end

    // ---------------- stimulus ----------------
    task automatic send(logic [31:0] i, logic [63:0] rs1);
      insn.insn = i; insn.rs1 = rs1; insn.rs2 = '0; iv = 1;
      @(posedge clk); while (!ir) @(posedge clk); #1;
      iv = 0;
    endtask
    function automatic logic [31:0] vsetvli(int sew);
      return {1'b0, 3'b000, 2'b00, 3'(sew), 3'd3, 5'd2, 3'b111, 5'd1, 7'b1010111};
    endfunction
    function automatic logic [2:0] width(int ew);
      case (ew) 0: return 3'b000; 1: return 3'b101; 2: return 3'b110; default: return 3'b111; endcase
    endfunction

    task automatic do_load(addr_t a, int vl, int ew);
      int e, n, t, nl0;
      e = 1 << ew;
      for (int c = 0; c < C; c++) ld_got[c].delete();
      nl0 = nld_last;
      send(vsetvli(ew), 64'(vl));
      send({3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(ew), 5'd8, 7'b0000111}, a);
      t = 0;
      while (nld_last == nl0 && t < 20000) begin @(posedge clk); t++; end
      check(nld_last == nl0 + 1, $sformatf("load %h vl %0d ew %0d finished", a, vl, e));
      for (int c = 0; c < C; c++) begin
        n = 0;
        for (int i = c * L; i < vl; i += L * C)
          for (int k = i; k < i + L && k < vl; k++)
            for (int b = 0; b < e; b++) begin
              logic [7:0] x;
              x = rdb(a + addr_t'(k * e + b));
              if (n < ld_got[c].size()) check(ld_got[c][n] == x, $sformatf("load ew %0d cluster %0d element %0d byte %0d", e, c, k, b));
              n++;
            end
        check(ld_got[c].size() == n, $sformatf("load ew %0d vl %0d: cluster %0d got %0d bytes, expected %0d", e, vl, c, ld_got[c].size(), n));
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
      nd0 = nstdone;
      send(vsetvli(ew), 64'(vl));
      send({3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(ew), 5'd8, 7'b0100111}, a);
      t = 0;
      while (nstdone == nd0 && t < 20000) begin @(posedge clk); t++; end
      repeat (3) @(posedge clk);
      check(nstdone == nd0 + 1, $sformatf("store %h vl %0d ew %0d: done pulses %0d", a, vl, e, nstdone - nd0));
      for (int i = 0; i < vl * e; i++)
        check(rdb(a + addr_t'(i)) == v[i], $sformatf("store ew %0d byte %0d", e, i));
      for (int i = 1; i <= 16; i++) begin
        check(!mem.exists(a - addr_t'(i)) || rdb(a - addr_t'(i)) == 8'((a - i) ^ ((a - i) >> 8) ^ 8'h5A) ||
              mem[a - addr_t'(i)] != 8'hEE, "no write before the vector");
        check(!mem.exists(a + addr_t'(vl * e + i - 1)), $sformatf("no write after the vector (+%0d)", i - 1));
      end
    endtask

    initial begin
      iv = 0; insn = '0; ldr = '1; stv = '0; std = '0; arr = 0; awr = 0; wr = 0; rv = 0; rl = 0; bv = 0;
      rd = '0; rresp = '0; bresp = '0;
      wait (rst_n);
      @(posedge clk); #1;
      // latency and rate: unstalled
      first_r = -1; first_ld = -1;
      do_load(64'h1_0000, 64 * B, 0);
      ld_lat[g] = first_ld - first_r;
      ld_cyc[g] = last_ld - first_ld + 1;
      first_st = -1; first_w = -1;
      do_store(64'h2_0000, 8 * B / 8, 3);
      st_lat[g] = first_w - first_st;
      // all widths, misaligned, page crossing, with stalls
      mstall = 1; cstall = 1;
      for (int ew = 0; ew < 4; ew++) begin
        do_load(64'h3_0000 + addr_t'(ew * 8), 1, ew);
        do_load(64'h3_0FF0 + addr_t'(1 << ew), 700 >> ew, ew);
        do_store(64'h5_0000 + addr_t'(3 << ew), (3 * B) >> ew, ew);
        do_store(64'h6_0FC0, 5, ew);
        do_load(64'h5_0000 + addr_t'(3 << ew), (3 * B) >> ew, ew);
      end
      for (int i = 0; i < 12; i++) begin
        int ew;
        addr_t a;
        ew = $urandom_range(0, 3);
        a = 64'h10_0000 + addr_t'(i * 64'h4000) + addr_t'($urandom_range(0, 511) << ew);
        if (i % 2 == 0) do_store(a, $urandom_range(1, 2000 >> ew), ew);
        else            do_load(a, $urandom_range(1, 2000 >> ew), ew);
      end
      check(!err, "no AXI error");
      done[g] = 1;
    end
  end

  initial begin
    done[0] = 0; done[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    $display("load latency %0d / %0d cycles, store latency %0d / %0d cycles, 64-beat load in %0d cycles",
             ld_lat[0], ld_lat[1], st_lat[0], st_lat[1], ld_cyc[0]);
    check(ld_cyc[0] <= 64 + 1, $sformatf("64 load beats took %0d cycles", ld_cyc[0]));
    check((ld_lat[1] - ld_lat[0]) + (st_lat[1] - st_lat[0]) == 8,
          $sformatf("four cuts add %0d + %0d cycles to a load-store round trip, expected 8",
                    ld_lat[1] - ld_lat[0], st_lat[1] - st_lat[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
