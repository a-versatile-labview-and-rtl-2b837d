// bandpass_filter_tb: checks the biquad bandpass against a bit-true reference model
// written here with 128-bit arithmetic, checks its 7-cycle latency, and checks the
// frequency response with real sine waves: a 75 kHz tone (the centre) passes with
// unity gain, a 60 kHz tone is strongly attenuated. Coefficients for centre f0 and
// bandwidth BW at sample rate fs: r = 1 - pi*BW/fs, a1 = -2 r cos(2 pi f0/fs),
// a2 = r^2, b0 = (1 - r^2)/2, b1 = 0, b2 = -b0 (all Q2.30).
module bandpass_filter_tb;
  import spm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  biquad_coef_t coef;
  logic in_valid = 0, out_valid, busy;
  sample_t in_sample = '0, out_sample;

  bandpass_filter dut (.clk, .rst_n, .coef, .in_valid, .in_sample, .busy, .out_valid, .out_sample);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model (state in units of 2^-16, coefficients Q30) ----
  typedef logic signed [127:0] big_t;
  big_t rx1, rx2, ry1, ry2;
  function automatic big_t sat(big_t v, big_t lim);
    if (v > lim - 1) return lim - 1;
    if (v < -lim)    return -lim;
    return v;
  endfunction
  function automatic sample_t ref_step(sample_t x);
    big_t x0, acc, y, yo;
    x0  = big_t'(x) * 65536;
    acc = big_t'(coef.b0) * x0 + big_t'(coef.b1) * rx1 + big_t'(coef.b2) * rx2
        - big_t'(coef.a1) * ry1 - big_t'(coef.a2) * ry2;
    y   = sat(acc >>> 30, big_t'(1) <<< 39);
    rx2 = rx1; rx1 = x0; ry2 = ry1; ry1 = y;
    yo  = sat(y >>> 16, 32768);
    return sample_t'(yo);
  endfunction

  task automatic set_bp(real f0, real bw, real fs);
    real r, a1, a2, b0;
    r  = 1.0 - 3.141592653589793 * bw / fs;
    a1 = -2.0 * r * $cos(2.0 * 3.141592653589793 * f0 / fs);
    a2 = r * r;
    b0 = (1.0 - r * r) / 2.0;
    coef.b0 = coef_t'($rtoi(b0 * 1073741824.0));
    coef.b1 = '0;
    coef.b2 = -coef.b0;
    coef.a1 = coef_t'($rtoi(a1 * 1073741824.0));
    coef.a2 = coef_t'($rtoi(a2 * 1073741824.0));
  endtask

  // Push one sample, wait for the result, compare with the model and the latency
  task automatic push(input sample_t x, output sample_t y);
    int lat;
    sample_t exp_y;
    @(negedge clk);
    in_sample = x; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
    exp_y = ref_step(x);
    check(lat == 7, $sformatf("latency %0d", lat));
    check(out_sample == exp_y, $sformatf("x=%0d y=%0d expected %0d", x, out_sample, exp_y));
    y = out_sample;
    repeat (2) @(negedge clk);
  endtask

  task automatic reset_all();
    rst_n = 0; rx1 = 0; rx2 = 0; ry1 = 0; ry2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
  endtask

  // Peak |y| over the second half of n samples of a sine at f
  task automatic tone(input real f, input int n, output int peak);
    sample_t y;
    peak = 0;
    for (int i = 0; i < n; i++) begin
      push(sample_t'($rtoi(10000.0 * $sin(2.0 * 3.141592653589793 * f * i / 750000.0))), y);
      if (i > n / 2 && (y > peak || -y > peak)) peak = (y > 0) ? y : -y;
    end
  endtask

  initial begin
    int pk;
    sample_t y;
    set_bp(75000.0, 2000.0, 750000.0);
    reset_all();
    // random input, bit-true comparison
    for (int i = 0; i < 3000; i++) push(sample_t'($urandom), y);
    // centre tone: unity gain
    reset_all();
    tone(75000.0, 4000, pk);
    check(pk > 9500 && pk < 10500, $sformatf("75 kHz peak %0d, expected ~10000", pk));
    // off-band tone: attenuated
    reset_all();
    tone(60000.0, 4000, pk);
    check(pk < 1500, $sformatf("60 kHz peak %0d, expected < 1500", pk));
    // narrow 20 Hz band as in the frequency-detection test: still bit-true
    set_bp(75213.833, 20.0, 750000.0);
    reset_all();
    for (int i = 0; i < 2000; i++)
      push(sample_t'($rtoi(20000.0 * $sin(2.0 * 3.141592653589793 * 75213.833 * i / 750000.0))), y);
    // full-scale input, saturation path stays bit-true
    set_bp(75000.0, 2000.0, 750000.0);
    coef.b0 = coef.b0 <<< 8; coef.b2 = -coef.b0;
    reset_all();
    for (int i = 0; i < 300; i++) push((i % 8 < 4) ? 16'sd32767 : -16'sd32768, y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
