// tb_ringi: checks the ring interconnect at the default 16 clusters and,
// in a second copy, with one extra cut per link.  Single packets must arrive
// at cluster (src +/- hops) mod C after exactly hops cycles (2 * hops with
// one cut per link), on the port of the right direction, and bypass the
// clusters in between.  Then all clusters inject random packets in both
// directions at once, with random receive backpressure; every packet must
// arrive exactly once at the right cluster and nothing else may arrive.
module tb_ringi;
  import araxl_pkg::*;
  localparam int C = NrClusters;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two rings: index 0 without cuts (default parameters), 1 with one cut
  ring_pkt_t [1:0][C-1:0] tu, td, ru, rd;
  logic      [1:0][C-1:0] tuv, tur, tdv, tdr, ruv, rur, rdv, rdr, byp;

  ringi dut0 (
    .clk_i(clk), .rst_ni(rst_n),
    .tx_up_i(tu[0]), .tx_up_valid_i(tuv[0]), .tx_up_ready_o(tur[0]),
    .tx_dn_i(td[0]), .tx_dn_valid_i(tdv[0]), .tx_dn_ready_o(tdr[0]),
    .rx_up_o(ru[0]), .rx_up_valid_o(ruv[0]), .rx_up_ready_i(rur[0]),
    .rx_dn_o(rd[0]), .rx_dn_valid_o(rdv[0]), .rx_dn_ready_i(rdr[0]),
    .bypass_o(byp[0])
  );
  ringi #(.NUM_CUTS(1)) dut1 (
    .clk_i(clk), .rst_ni(rst_n),
    .tx_up_i(tu[1]), .tx_up_valid_i(tuv[1]), .tx_up_ready_o(tur[1]),
    .tx_dn_i(td[1]), .tx_dn_valid_i(tdv[1]), .tx_dn_ready_o(tdr[1]),
    .rx_up_o(ru[1]), .rx_up_valid_o(ruv[1]), .rx_up_ready_i(rur[1]),
    .rx_dn_o(rd[1]), .rx_dn_valid_o(rdv[1]), .rx_dn_ready_i(rdr[1]),
    .bypass_o(byp[1])
  );

  // scoreboard: packet id -> {direction, destination}
  int  pend [2][int];
  int  sent [2], got [2], bypasses [2];
  bit  stall = 0;

  function automatic ring_pkt_t mk(int id, int src, int dst, bit dn, int hops);
    ring_pkt_t p;
    p.data = {8'(src), 8'(dst), 7'd0, dn, 32'(id)};
    p.hops = 8'(hops);
    p.tag  = 4'(id);
    return p;
  endfunction

  for (genvar r = 0; r < 2; r++) begin : g_mon
    always @(negedge clk) begin
      for (int c = 0; c < C; c++) begin
        rur[r][c] = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
        rdr[r][c] = stall ? ($urandom_range(0, 3) != 0) : 1'b1;
      end
    end
    always @(posedge clk) if (rst_n) begin
      for (int c = 0; c < C; c++) begin
        if (byp[r][c]) bypasses[r]++;
        for (int d = 0; d < 2; d++) begin
          ring_pkt_t p;
          logic v, rdy;
          p   = d ? rd[r][c] : ru[r][c];
          v   = d ? rdv[r][c] : ruv[r][c];
          rdy = d ? rdr[r][c] : rur[r][c];
          if (v && rdy) begin
            int id;
            id = int'(p.data[31:0]);
            got[r]++;
            if (!pend[r].exists(id)) check(0, $sformatf("ring %0d: unknown or repeated packet %0d at %0d", r, id, c));
            else begin
              check(pend[r][id] == (d << 8 | c),
                    $sformatf("ring %0d: packet %0d at cluster %0d dir %0d, expected %h", r, id, c, d, pend[r][id]));
              check(p.hops == 8'd1, "delivered with one hop left");
              pend[r].delete(id);
            end
          end
        end
      end
    end
  end

  int next_id = 1;
  logic [1:0][C-1:0] fu, fd;

  // one packet alone; returns its latency
  task automatic single(int r, int src, bit dn, int hops, output int lat);
    int dst, id;
    dst = dn ? (src - hops + C) % C : (src + hops) % C;
    id = next_id; next_id = next_id + 1;
    pend[r][id] = (int'(dn) << 8) | dst;
    if (dn) begin td[r][src] = mk(id, src, dst, dn, hops); tdv[r][src] = 1; end
    else    begin tu[r][src] = mk(id, src, dst, dn, hops); tuv[r][src] = 1; end
    @(posedge clk); #1;
    tdv[r][src] = 0; tuv[r][src] = 0;
    lat = 0;
    while (pend[r].exists(id) && lat < 200) begin @(posedge clk); #1; lat++; end
  endtask

  initial begin
    tu = '0; td = '0; tuv = '0; tdv = '0; rur = '1; rdr = '1;
    sent[0] = 0; sent[1] = 0; got[0] = 0; got[1] = 0; bypasses[0] = 0; bypasses[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < 2; r++)
      for (int h = 1; h < C; h += 3)
        for (int dn = 0; dn < 2; dn++) begin
          int lat, b0;
          b0 = bypasses[r];
          single(r, (h * 5) % C, 1'(dn), h, lat);
          check(lat == h * (r + 1), $sformatf("ring %0d: %0d hops took %0d cycles", r, h, lat));
          check(bypasses[r] - b0 == h - 1, $sformatf("ring %0d: %0d bypasses for %0d hops", r, bypasses[r] - b0, h));
          sent[r]++;
        end
    // all clusters at once, random traffic and backpressure
    stall = 1;
    for (int n = 0; n < 300; n++) begin
      for (int rr = 0; rr < 2; rr++)
        for (int c = 0; c < C; c++) begin
          if (!tuv[rr][c] && $urandom_range(0, 1) == 1) begin
            int h, id;
            h = $urandom_range(1, C - 1); id = next_id; next_id = next_id + 1;
            pend[rr][id] = (c + h) % C; sent[rr]++;
            tu[rr][c] = mk(id, c, (c + h) % C, 0, h); tuv[rr][c] = 1;
          end
          if (!tdv[rr][c] && $urandom_range(0, 1) == 1) begin
            int h, id;
            h = $urandom_range(1, C - 1); id = next_id; next_id = next_id + 1;
            pend[rr][id] = (1 << 8) | ((c - h + C) % C); sent[rr]++;
            td[rr][c] = mk(id, c, (c - h + C) % C, 1, h); tdv[rr][c] = 1;
          end
        end
      @(negedge clk);
      fu = tuv & tur; fd = tdv & tdr;
      @(posedge clk); #1;
      tuv = tuv & ~fu; tdv = tdv & ~fd;
    end
    while (tuv != '0 || tdv != '0) begin
      @(negedge clk);
      fu = tuv & tur; fd = tdv & tdr;
      @(posedge clk); #1;
      tuv = tuv & ~fu; tdv = tdv & ~fd;
    end
    repeat (300) @(posedge clk);
    for (int r = 0; r < 2; r++) begin
      check(pend[r].size() == 0, $sformatf("ring %0d: %0d packets lost", r, pend[r].size()));
      check(got[r] == sent[r], $sformatf("ring %0d: sent %0d, delivered %0d", r, sent[r], got[r]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
