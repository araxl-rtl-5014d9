// tb_cut_chain: checks the register-cut chain.  Three cuts must delay a
// word by exactly three cycles, keep the order of a random stream under
// random backpressure and sustain one word per cycle when not stalled.
module tb_cut_chain;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 3;
  logic        vi, ri, vo, ro;
  logic [31:0] di, dout;

  cut_chain #(.T(logic [31:0]), .NUM_CUTS(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .valid_i(vi), .ready_o(ri), .data_i(di),
    .valid_o(vo), .ready_i(ro), .data_o(dout)
  );

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] sent [$];
  int          lat;
  initial begin
    vi = 0; ro = 1; di = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // latency of one word
    #1 vi = 1; di = 32'hCAFE0001;
    @(posedge clk); #1 vi = 0;
    lat = 1;
    while (!vo) begin @(posedge clk); #1 lat++; end
    check(lat == N, $sformatf("latency %0d, expected %0d", lat, N));
    check(dout == 32'hCAFE0001, "latency word data");
    @(posedge clk); #1;
    // full throughput: 20 words in 20 + N cycles
    begin
      int got = 0, cyc = 0;
      for (int i = 0; i < 20 + N + 2; i++) begin
        vi = (i < 20); di = 32'(i);
        @(posedge clk);
        if (vo && ro) begin check(dout == 32'(got), "throughput order"); got++; end
        #1;
      end
      check(got == 20, $sformatf("throughput: %0d of 20 words in %0d cycles", got, 20 + N + 2));
    end
    vi = 0;
    // random stream with random stalls
    fork
      begin
        for (int i = 0; i < 300; i++) begin
          vi = 1; di = $urandom;
          sent.push_back(di);
          @(posedge clk);
          while (!ri) @(posedge clk);
          #1;
          vi = 0;
          if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
        end
        vi = 0;
      end
      begin
        int n = 0;
        while (n < 300) begin
          ro = ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (vo && ro) begin
            check(sent.size() > 0 && dout == sent[0], "random stream order");
            if (sent.size() > 0) void'(sent.pop_front());
            n++;
          end
          #1;
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
