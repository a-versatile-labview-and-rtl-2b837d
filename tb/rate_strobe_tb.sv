// rate_strobe_tb: checks the A/D (750 kHz) and D/A (1 MHz) strobe rates from 40 MHz.
// Counts strobes over whole accumulator cycles and checks the spacing of each pair of
// strobes against the ideal rate (at most one cycle apart from INC/MOD spacing).
module rate_strobe_tb;
  logic clk = 0, rst_n = 0;
  logic s_adc, s_dac;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;   // 40 MHz, 1 ns units

  rate_strobe #(.INC(3), .MOD(160)) u_adc (.clk, .rst_n, .strobe(s_adc));
  rate_strobe #(.INC(1), .MOD(40))  u_dac (.clk, .rst_n, .strobe(s_dac));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n_adc = 0, n_dac = 0, last_adc = -1, last_dac = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 40 MHz * 1 ms = 40000 cycles: expect 750 and 1000 strobes
    for (int c = 0; c < 40000; c++) begin
      @(posedge clk); #1;
      if (s_adc) begin
        n_adc++;
        if (last_adc >= 0) check((c - last_adc == 53) || (c - last_adc == 54), $sformatf("adc spacing %0d", c - last_adc));
        last_adc = c;
      end
      if (s_dac) begin
        n_dac++;
        if (last_dac >= 0) check(c - last_dac == 40, $sformatf("dac spacing %0d", c - last_dac));
        last_dac = c;
      end
    end
    check(n_adc == 750, $sformatf("adc strobes in 1 ms = %0d", n_adc));
    check(n_dac == 1000, $sformatf("dac strobes in 1 ms = %0d", n_dac));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
