// tb_vlsu_lane_shuffle: checks the cluster-local byte shuffle.  For every
// element width and beat parity, with random data and masks, every element
// of the beat must land in lane (j mod L) at byte offset ((j / L) * EW) mod 8
// of the lane word, with matching byte enables; feeding the lane words back
// through the store direction must give the original beat.
module tb_vlsu_lane_shuffle;
  import araxl_pkg::*;
  localparam int L = NrLanes;
  localparam int S = 4 * L;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vew_e                 ew;
  logic                 par;
  logic [S*8-1:0]       slot, st_slot;
  logic [S-1:0]         mask;
  logic [L-1:0][63:0]   lane_w, st_lane;
  logic [L-1:0][7:0]    be;

  vlsu_lane_shuffle dut (
    .ew_i(ew), .parity_i(par), .ld_slot_i(slot), .ld_mask_i(mask),
    .ld_lane_o(lane_w), .ld_be_o(be), .st_lane_i(st_lane), .st_slot_o(st_slot)
  );

  initial begin
    ew = EW8; par = 0; slot = '0; mask = '0; st_lane = '0;
    for (int it = 0; it < 200; it++) begin
      int e, first_j, nel;
      ew = vew_e'(it % 4);
      par = 1'((it / 4) % 2);
      for (int b = 0; b < S; b++) begin slot[8*b +: 8] = 8'($urandom); mask[b] = 1'($urandom); end
      #1;
      e = 1 << int'(ew);
      nel = S / e;
      first_j = par ? nel : 0;
      for (int k = 0; k < nel; k++) begin
        int j, ln, off;
        j = first_j + k;
        ln = j % L;
        off = ((j / L) * e) % 8;
        for (int b = 0; b < e; b++) begin
          check(lane_w[ln][8*(off+b) +: 8] == slot[8*(k*e+b) +: 8],
                $sformatf("ew=%0d par=%0d element %0d byte %0d", e, par, j, b));
          check(be[ln][off+b] == mask[k*e+b], "byte enable");
        end
      end
      st_lane = lane_w;
      #1;
      check(st_slot == slot, $sformatf("store round trip ew=%0d par=%0d", e, par));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
