// tb_glsu_addrgen: checks GLSU request splitting for two bus widths, the
// default 256-byte bus (a 4 KiB page is 16 beats) and an 8-byte bus (where
// the 256-beat AXI limit cuts first).  For random unit-stride requests it
// checks: one table entry {off, nbytes, ew, store} per request; bursts that
// start at the address rounded down to the bus word, follow each other
// without gaps, never cross 4 KiB, hold at most 256 beats, cover exactly
// ceil((off + nbytes) / B) beats, and mark only the last burst; and, with
// the address channel always ready, one burst per cycle.
module tb_glsu_addrgen;
  import araxl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit done [2];

  for (genvar g = 0; g < 2; g++) begin : g_w
    localparam int B = (g == 0) ? 4 * NrLanes * NrClusters : 8;
    glsu_req_t  req;
    logic       rv, rr, axv, axr, axs, axl, tv, tr, ts;
    addr_t      axa;
    logic [7:0] axlen;
    logic [3:0] axsz;
    beat_meta_t tbl;

    if (g == 0) begin : g_d
      glsu_addrgen dut (
        .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_valid_i(rv), .req_ready_o(rr),
        .ax_addr_o(axa), .ax_len_o(axlen), .ax_size_o(axsz), .ax_store_o(axs), .ax_last_o(axl),
        .ax_valid_o(axv), .ax_ready_i(axr), .tbl_o(tbl), .tbl_store_o(ts), .tbl_valid_o(tv), .tbl_ready_i(tr)
      );
    end else begin : g_d
      glsu_addrgen #(.AXI_BYTES(B)) dut (
        .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_valid_i(rv), .req_ready_o(rr),
        .ax_addr_o(axa), .ax_len_o(axlen), .ax_size_o(axsz), .ax_store_o(axs), .ax_last_o(axl),
        .ax_valid_o(axv), .ax_ready_i(axr), .tbl_o(tbl), .tbl_store_o(ts), .tbl_valid_o(tv), .tbl_ready_i(tr)
      );
    end

    task automatic one(bit store, addr_t a, int vl, vew_e ew, bit stall);
      int nbytes, off, beats, got, nb, bursts, cyc;
      addr_t nxt;
      bit seen_last;
      nbytes = vl << ew;
      off = int'(a % B);
      beats = (off + nbytes + B - 1) / B;
      req = '{store: store, addr: a, vl: vlen_t'(vl), ew: ew};
      rv = 1;
      @(posedge clk); while (!rr) @(posedge clk); #1; rv = 0;
      // table entry
      while (!tv) begin tr = 1; @(posedge clk); #1; end
      check(tbl.off == 16'(off) && tbl.nbytes == nbytes && tbl.ew == ew && ts == store,
            $sformatf("B=%0d table %0d/%0d/%0d", B, tbl.off, tbl.nbytes, tbl.ew));
      @(posedge clk); #1;
      nxt = a - addr_t'(off); got = 0; bursts = 0; seen_last = 0; cyc = 0;
      while (!seen_last && cyc < 5000) begin
        axr = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
        #1;
        if (axv && axr) begin
          nb = int'(axlen) + 1;
          check(axa == nxt, $sformatf("B=%0d burst address %h, expected %h", B, axa, nxt));
          check(int'(axa % 4096) + nb * B <= 4096, $sformatf("B=%0d burst crosses 4 KiB", B));
          check(axsz == 4'($clog2(B)) && axs == store, "size / direction");
          got += nb; bursts++;
          seen_last = axl;
          check(axl == (got == beats), $sformatf("B=%0d last flag at %0d of %0d beats", B, got, beats));
          nxt = axa + addr_t'(nb * B);
        end
        @(posedge clk); #1; cyc++;
      end
      axr = 0;
      check(got == beats, $sformatf("B=%0d beats %0d, expected %0d", B, got, beats));
      if (!stall) check(cyc == bursts, $sformatf("B=%0d %0d bursts took %0d cycles", B, bursts, cyc));
    endtask

    initial begin
      rv = 0; axr = 0; tr = 1; req = '0;
      wait (rst_n); @(posedge clk); #1;
      one(0, 64'h8000_0000, 1, EW8, 0);
      one(1, 64'h8000_0FFF, 2, EW8, 0);
      one(0, 64'h8000_0010, 65536 / 64 * 8, EW64, 0);
      one(1, 64'h9000_0123, 10000, EW32, 0);
      for (int i = 0; i < 40; i++) begin
        addr_t a;
        a = {32'h0, 32'($urandom)};
        one(1'($urandom), a, $urandom_range(1, 5000), vew_e'($urandom_range(0, 3)), 1'($urandom));
      end
      done[g] = 1;
    end
  end

  initial begin
    done[0] = 0; done[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
