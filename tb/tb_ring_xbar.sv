// tb_ring_xbar: checks one ring node with driven neighbours.  A packet with
// one hop left is delivered locally on the port of its direction; with more
// hops it is forwarded with the count decremented and bypass_o set; the
// local unit's packets leave towards the chosen neighbour.  Forwarding
// takes one cycle, a forwarded packet wins over a local one in the same
// cycle, and a full output back-pressures both.  A random stream with
// random stalls must arrive complete and in order.
module tb_ring_xbar;
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

  ring_pkt_t ip, in, on, op, tu, td, ru, rd;
  logic ipv, ipr, inv, inr, onv, onr, opv, opr, tuv, tur, tdv, tdr, ruv, rur, rdv, rdr, byp;

  ring_xbar dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_prev_i(ip), .in_prev_valid_i(ipv), .in_prev_ready_o(ipr),
    .in_next_i(in), .in_next_valid_i(inv), .in_next_ready_o(inr),
    .out_next_o(on), .out_next_valid_o(onv), .out_next_ready_i(onr),
    .out_prev_o(op), .out_prev_valid_o(opv), .out_prev_ready_i(opr),
    .tx_up_i(tu), .tx_up_valid_i(tuv), .tx_up_ready_o(tur),
    .tx_dn_i(td), .tx_dn_valid_i(tdv), .tx_dn_ready_o(tdr),
    .rx_up_o(ru), .rx_up_valid_o(ruv), .rx_up_ready_i(rur),
    .rx_dn_o(rd), .rx_dn_valid_o(rdv), .rx_dn_ready_i(rdr),
    .bypass_o(byp)
  );

  function automatic ring_pkt_t pk(logic [63:0] d, int h);
    ring_pkt_t p;
    p.data = d; p.hops = 8'(h); p.tag = 4'(d);
    return p;
  endfunction

  // expected streams per output
  ring_pkt_t q_on [$], q_op [$], q_ru [$], q_rd [$];
  bit stall = 0;
  int nbyp = 0;

  always @(negedge clk) begin
    onr = stall ? 1'($urandom) : 1'b1;
    opr = stall ? 1'($urandom) : 1'b1;
    rur = stall ? 1'($urandom) : 1'b1;
    rdr = stall ? 1'($urandom) : 1'b1;
  end
  int nfwd = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) begin
    bit fw;
    fw = 0;
    // record what the node accepts this cycle, before checking its outputs
    if (ipv && ipr) begin
      ring_pkt_t p;
      p = ip;
      if (p.hops > 1) begin p.hops--; q_on.push_back(p); fw = 1; end else q_ru.push_back(p);
    end
    if (inv && inr) begin
      ring_pkt_t p;
      p = in;
      if (p.hops > 1) begin p.hops--; q_op.push_back(p); fw = 1; end else q_rd.push_back(p);
    end
    if (tuv && tur) q_on.push_back(tu);
    if (tdv && tdr) q_op.push_back(td);
    if (fw) nfwd++;
    end
    if (byp) nbyp++;
    if (onv && onr) begin
      if (q_on.size() == 0) check(0, "unexpected packet to next"); else check(on == q_on.pop_front(), "packet to next");
    end
    if (opv && opr) begin
      if (q_op.size() == 0) check(0, "unexpected packet to prev"); else check(op == q_op.pop_front(), "packet to prev");
    end
    if (ruv && rur) begin
      if (q_ru.size() == 0) check(0, "unexpected delivery from prev"); else check(ru == q_ru.pop_front(), "delivery from prev");
    end
    if (rdv && rdr) begin
      if (q_rd.size() == 0) check(0, "unexpected delivery from next"); else check(rd == q_rd.pop_front(), "delivery from next");
    end
  end

  initial begin
    ipv = 0; inv = 0; tuv = 0; tdv = 0; ip = '0; in = '0; tu = '0; td = '0;
    onr = 1; opr = 1; rur = 1; rdr = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // forward: one cycle, hops decremented, bypass flagged
    ip = pk(64'h11, 3); ipv = 1; q_on.push_back(pk(64'h11, 2));
    #1 check(byp == 1'b1, "bypass flagged");
    @(posedge clk); #1; ipv = 0;
    check(onv && on.hops == 8'd2 && on.data == 64'h11, "forwarded after one cycle with hops - 1");
    @(posedge clk); #1;
    // deliver locally
    in = pk(64'h22, 1); inv = 1; q_rd.push_back(pk(64'h22, 1));
    #1 check(rdv && rd.data == 64'h22 && !byp, "one hop left: delivered, no bypass");
    @(posedge clk); #1; inv = 0;
    // bypass wins over a local packet
    ip = pk(64'h33, 2); ipv = 1; tu = pk(64'h44, 1); tuv = 1;
    q_on.push_back(pk(64'h33, 1)); q_on.push_back(pk(64'h44, 1));
    #1 check(!tur, "local packet waits while a packet is forwarded");
    @(posedge clk); #1; ipv = 0;
    #1 check(tur, "local packet goes once the bus is free");
    check(onv && on.data == 64'h33, "forwarded packet first");
    @(posedge clk); #1; tuv = 0;
    check(onv && on.data == 64'h44 && on.hops == 8'd1, "local packet second");
    @(posedge clk); #1;
    // random streams on all four inputs, with stalls
    stall = 1;
    nbyp = 0;
    begin
      for (int n = 0; n < 2000; n++) begin
        if (!ipv && $urandom_range(0, 1) == 1) begin ip = pk({$urandom, $urandom}, $urandom_range(1, 4)); ipv = 1; end
        if (!inv && $urandom_range(0, 1) == 1) begin in = pk({$urandom, $urandom}, $urandom_range(1, 4)); inv = 1; end
        if (!tuv && $urandom_range(0, 2) == 1) begin tu = pk({$urandom, $urandom}, $urandom_range(1, 4)); tuv = 1; end
        if (!tdv && $urandom_range(0, 2) == 1) begin td = pk({$urandom, $urandom}, $urandom_range(1, 4)); tdv = 1; end
        @(posedge clk); #1;
        if (ipv && ipr) ipv = 0;
        if (inv && inr) inv = 0;
        if (tuv && tur) tuv = 0;
        if (tdv && tdr) tdv = 0;
      end
      ipv = 0; inv = 0; tuv = 0; tdv = 0;
      stall = 0;
      repeat (10) @(posedge clk);
      check(q_on.size() == 0 && q_op.size() == 0 && q_ru.size() == 0 && q_rd.size() == 0,
            $sformatf("lost packets %0d %0d %0d %0d", q_on.size(), q_op.size(), q_ru.size(), q_rd.size()));
      check(nbyp == nfwd, $sformatf("bypass flagged in %0d cycles, packets forwarded in %0d", nbyp, nfwd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
