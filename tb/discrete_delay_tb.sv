// discrete_delay_tb: drives random words every cycle and checks that dout equals the
// input of exactly n cycles earlier, for n = 1, 2, a few middle values, MAX_DELAY, and
// for the clamps (n = 0 acts as 1, n above MAX_DELAY acts as MAX_DELAY). The expected
// value comes from a history array kept by the testbench. Also checks that the output
// is 0 until n words have entered after reset.
module discrete_delay_tb;
  localparam int unsigned MAXD = 64;
  localparam int unsigned NW   = $clog2(MAXD + 1);
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NW-1:0] n = 1;
  logic signed [15:0] din = '0, dout;
  logic signed [15:0] hist [$];   // hist[0] = newest input sampled at a clock edge

  discrete_delay #(.W(16), .MAX_DELAY(MAXD)) dut (.clk, .rst_n, .n, .din, .dout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run cycles at delay nn, comparing after the first MAXD cycles of warm-up
  task automatic run(input int nn, input int cycles, input bit warm);
    int eff;
    eff = (nn < 1) ? 1 : (nn > MAXD ? MAXD : nn);
    n = NW'(nn);
    for (int c = 0; c < cycles; c++) begin
      @(posedge clk);
      hist.push_front(din);
      if (hist.size() > MAXD + 4) void'(hist.pop_back());
      #1;
      din = 16'($urandom);
      if (!warm || c >= MAXD)
        check(dout == hist[eff - 1], $sformatf("n=%0d c=%0d dout=%0d exp=%0d", nn, c, dout, hist[eff - 1]));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    // after reset, n = 10: zeros for the first 9 cycles, then the first inputs
    n = 10;
    #1 rst_n = 1;
    for (int c = 0; c < 30; c++) begin
      @(posedge clk);
      hist.push_front(din);
      #1;
      if (c < 9) check(dout == 0, $sformatf("before fill c=%0d dout=%0d", c, dout));
      else       check(dout == hist[9], $sformatf("fill c=%0d dout=%0d exp=%0d", c, dout, hist[9]));
      din = 16'($urandom);
    end
    run(10, 200, 0);
    run(1, 200, 0);
    run(2, 200, 0);
    run(17, 300, 1);
    run(33, 300, 1);
    run(MAXD, 300, 1);
    run(0, 200, 0);
    run(MAXD + 1, 300, 1);
    // delay changes on the fly take effect at once
    for (int k = 0; k < 20; k++) run(int'($urandom_range(1, MAXD)), 150, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
