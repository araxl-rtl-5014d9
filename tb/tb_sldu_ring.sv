// tb_sldu_ring: checks the ring slide unit of all 16 clusters together,
// connected through the ring interconnect, at default parameters.
// slide1down / slide1up: random vectors of several lengths; every result
// element below vl must equal src[i+1] / src[i-1], or the scalar at the
// end, including elements that cross cluster boundaries and the ring's
// wrap-around from the last cluster to cluster 0.  Reductions: random
// partials per cluster for each operator; cluster 0 must return the
// combined value, and the log2(C)-step tree (1 + 2 + 4 + 8 hops) must
// finish within 40 cycles.  Result ports stall randomly.
module tb_sldu_ring;
  import araxl_pkg::*;
  localparam int L = NrLanes;
  localparam int C = NrClusters;
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

  ring_pkt_t [C-1:0] tu, td, ru, rd;
  logic      [C-1:0] tuv, tur, tdv, tdr, ruv, rur, rdv, rdr, byp;
  ringi i_ring (
    .clk_i(clk), .rst_ni(rst_n),
    .tx_up_i(tu), .tx_up_valid_i(tuv), .tx_up_ready_o(tur),
    .tx_dn_i(td), .tx_dn_valid_i(tdv), .tx_dn_ready_o(tdr),
    .rx_up_o(ru), .rx_up_valid_o(ruv), .rx_up_ready_i(rur),
    .rx_dn_o(rd), .rx_dn_valid_o(rdv), .rx_dn_ready_i(rdr),
    .bypass_o(byp)
  );

  ring_op_e op;
  red_op_e  rop;
  vlen_t    vl;
  xlen_t    scalar;
  logic     [C-1:0] cv, cr, done, gv, gr, ov, orr, rv, rr, redv;
  xlen_t    [C-1:0][L-1:0] gi, go;
  logic     [C-1:0][L-1:0] gm;
  xlen_t    [C-1:0] redi, redo;

  for (genvar c = 0; c < C; c++) begin : g_cl
    sldu_ring dut (
      .clk_i(clk), .rst_ni(rst_n), .cluster_id_i(8'(c)),
      .op_i(op), .red_op_i(rop), .vl_i(vl), .scalar_i(scalar),
      .cmd_valid_i(cv[c]), .cmd_ready_o(cr[c]), .done_o(done[c]),
      .grp_i(gi[c]), .grp_valid_i(gv[c]), .grp_ready_o(gr[c]),
      .grp_o(go[c]), .grp_mask_o(gm[c]), .grp_valid_o(ov[c]), .grp_ready_i(orr[c]),
      .red_i(redi[c]), .red_valid_i(rv[c]), .red_ready_o(rr[c]),
      .red_o(redo[c]), .red_valid_o(redv[c]), .red_ready_i(1'b1),
      .tx_up_o(tu[c]), .tx_up_valid_o(tuv[c]), .tx_up_ready_i(tur[c]),
      .tx_dn_o(td[c]), .tx_dn_valid_o(tdv[c]), .tx_dn_ready_i(tdr[c]),
      .rx_up_i(ru[c]), .rx_up_valid_i(ruv[c]), .rx_up_ready_o(rur[c]),
      .rx_dn_i(rd[c]), .rx_dn_valid_i(rdv[c]), .rx_dn_ready_o(rdr[c])
    );
  end

  xlen_t src [4096];
  int    nres, grp_out [C], grp_in [C];
  bit    running;

  // result collection and checks
  always @(negedge clk) for (int c = 0; c < C; c++) orr[c] = 1'($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < C; c++) if (ov[c] && orr[c]) begin
      for (int l = 0; l < L; l++) begin
        int i;
        xlen_t e;
        i = grp_out[c] * L * C + c * L + l;
        check(gm[c][l] == (i < int'(vl)), $sformatf("mask of element %0d", i));
        if (i < int'(vl)) begin
          if (op == RING_SLIDE1DOWN) e = (i == int'(vl) - 1) ? scalar : src[i + 1];
          else                       e = (i == 0) ? scalar : src[i - 1];
          check(go[c][l] == e, $sformatf("op %0d vl %0d element %0d: %h, expected %h", op, vl, i, go[c][l], e));
          nres++;
        end
      end
      grp_out[c]++;
    end
  end

  // group feeders
  always @(posedge clk) if (rst_n && running) begin
    for (int c = 0; c < C; c++) if (gv[c] && gr[c]) grp_in[c]++;
  end
  always @(negedge clk) begin
    for (int c = 0; c < C; c++) begin
      int i0;
      i0 = grp_in[c] * L * C + c * L;
      gv[c] = running && (i0 < int'(vl));
      for (int l = 0; l < L; l++) gi[c][l] = (i0 + l < 4096) ? src[i0 + l] : '0;
    end
  end

  task automatic command();
    while (cr != '1) @(posedge clk);
    #1; cv = '1;
    @(posedge clk); #1; cv = '0;
  endtask

  task automatic slide(ring_op_e o, int n);
    op = o; vl = vlen_t'(n); scalar = {$urandom, $urandom};
    for (int i = 0; i < 4096; i++) src[i] = {$urandom, $urandom};
    nres = 0;
    for (int c = 0; c < C; c++) begin grp_out[c] = 0; grp_in[c] = 0; end
    running = 1;
    command();
    while (cr != '1 || ov != '0) @(posedge clk);
    running = 0;
    check(nres == n, $sformatf("op %0d vl %0d: %0d results", o, n, nres));
  endtask

  function automatic xlen_t fold(red_op_e o, xlen_t a, xlen_t b);
    case (o)
      RED_SUM:  return a + b;
      RED_AND:  return a & b;
      RED_OR:   return a | b;
      RED_XOR:  return a ^ b;
      RED_MINU: return (a < b) ? a : b;
      default:  return (a > b) ? a : b;
    endcase
  endfunction

  task automatic reduce(red_op_e o);
    xlen_t e;
    int cyc;
    op = RING_REDUCE; rop = o;
    for (int c = 0; c < C; c++) redi[c] = {$urandom, $urandom} | ((o == RED_AND) ? 64'hFFFF_0000_FFFF_0000 : 64'h0);
    e = redi[0];
    for (int c = 1; c < C; c++) e = fold(o, e, redi[c]);
    rv = '1;
    command();
    rv = '0;
    cyc = 1;
    while (!redv[0] && cyc < 200) begin @(posedge clk); #1; cyc++; end
    check(redv[0] && redo[0] == e, $sformatf("reduction %0d: %h, expected %h", o, redo[0], e));
    check(cyc <= 40, $sformatf("reduction took %0d cycles", cyc));
    while (cr != '1) @(posedge clk);
  endtask

  initial begin
    cv = '0; rv = '0; redi = '0; op = RING_SLIDE1UP; rop = RED_SUM; vl = '0; scalar = '0;
    running = 0; gi = '0; gv = '0; orr = '1;
    for (int c = 0; c < C; c++) begin grp_out[c] = 0; grp_in[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    slide(RING_SLIDE1DOWN, 256);
    slide(RING_SLIDE1UP, 256);
    slide(RING_SLIDE1DOWN, 1);
    slide(RING_SLIDE1UP, 5);
    slide(RING_SLIDE1DOWN, 1000);
    slide(RING_SLIDE1UP, 1000);
    slide(RING_SLIDE1DOWN, 67);
    slide(RING_SLIDE1UP, 129);
    for (int o = 0; o < 6; o++) reduce(red_op_e'(o));
    reduce(RED_SUM);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
