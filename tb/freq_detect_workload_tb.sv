// freq_detect_workload_tb: the frequency-detection test of the microscope, through the
// FPGA program. A function-generator model puts a 75 213.833 Hz sine of 20 000 codes,
// frequency-modulated by 1 mHz at 10 Hz, on AI0. The A/D samples at 690 kHz
// (ADC_INC/ADC_MOD = 69/4000 of 40 MHz), the FPGA bandpass is 5 kHz wide around the
// carrier, and the filtered samples stream to a host model. As in the microscope, the
// host filters again, here with a 20 Hz bandpass in double precision (same biquad form
// as the FPGA's), then cuts the stream into 2048-point records and finds each record's
// frequency as the host software does: it fits the second difference of the signal against the signal (a line through
// the origin, slope k) and takes f = (fs / pi) * asin(sqrt(-k) / 2), which is exact for
// a sampled sinusoid. Checks: the mean frequency is within 1 mHz of the carrier, and the
// 10 Hz modulation is recovered (lock-in over the records) with an amplitude between 0.5
// and 1.1 mHz, and the per-record residual is below 0.2 mHz rms (sub-mHz resolution). The 20 Hz band attenuates the 10 Hz sidebands, so a reduced amplitude is
// expected. The first 100 ms let the narrow filter settle.
module freq_detect_workload_tb;
  import spm_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real FS = 690000.0;
  localparam real FC = 75213.833;
  localparam real FM = 10.0;
  localparam real DF = 1.0e-3;
  localparam int  NREC = 2048;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic adc_convert, dac_update, cmd_valid = 0, cmd_ready, up_valid, up_ready = 1, irq, irq_ack = 0;
  logic scan_busy, drive_blanked;
  logic [10:0] up_fill;
  logic [4:0] cmd_fill;
  logic [N_AI-1:0][SAMPLE_W-1:0] ai;
  logic [N_AO-1:0][SAMPLE_W-1:0] ao;
  cmd_t cmd_data = '0;
  logic [31:0] up_data, up_overflow;

  spm_fpga_top #(.ADC_INC(69), .ADC_MOD(4000)) dut (
    .clk, .rst_n, .adc_convert, .ai, .dac_update, .ao,
    .cmd_valid, .cmd_ready, .cmd_data, .up_valid, .up_ready, .up_data,
    .up_overflow, .irq, .irq_ack, .scan_busy, .drive_blanked, .up_fill, .cmd_fill);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (30_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // function generator: phase = 2 pi FC t - (DF/FM) cos(2 pi FM t)
  longint unsigned cyc = 0;
  real sig = 0.0;
  always @(posedge clk) begin
    real t;
    cyc <= cyc + 1;
    t = real'(cyc) * 25.0e-9;
    sig = 20000.0 * $sin(2.0 * PI * FC * t - (DF / FM) * $cos(2.0 * PI * FM * t));
  end
  always_comb begin
    ai = '0;
    ai[AI_CANT_AC] = 16'($rtoi(sig));
  end

  task automatic send(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cmd_valid = 1; cmd_data.addr = a; cmd_data.data = d;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // host side: collect records and fit
  real z [NREC];
  int  nz = 0, nrec = 0;
  bit  take = 0;
  real f_rec [$];
  real t_rec [$];

  function automatic real fit_freq();
    real szz = 0.0, szd = 0.0, k;
    for (int i = 1; i < NREC - 1; i++) begin
      szz += z[i] * z[i];
      szd += z[i] * (z[i + 1] - 2.0 * z[i] + z[i - 1]);
    end
    k = szd / szz;
    return FS / PI * $asin($sqrt(-k) / 2.0);
  endfunction

  real hb0, ha1, ha2, hx1 = 0, hx2 = 0, hy1 = 0, hy2 = 0;
  always @(posedge clk) begin
    real x0, y0;
    if (up_valid && up_ready) begin
      x0 = real'($signed(up_data[15:0]));
      y0 = hb0 * (x0 - hx2) - ha1 * hy1 - ha2 * hy2;
      hx2 = hx1; hx1 = x0; hy2 = hy1; hy1 = y0;
    end
    if (up_valid && up_ready && take) begin
      z[nz] = y0;
      nz++;
      if (nz == NREC) begin
        f_rec.push_back(fit_freq());
        t_rec.push_back(real'(cyc) * 25.0e-9 - 0.5 * NREC / FS);
        nz = 0;
      end
    end
  end

  initial begin
    real r, mean, ci, cs, amp, res;
    repeat (4) @(posedge clk);
    rst_n = 1;
    r = 1.0 - PI * 20.0 / FS;           // host filter: 20 Hz
    hb0 = (1.0 - r * r) / 2.0;
    ha1 = -2.0 * r * $cos(2.0 * PI * FC / FS);
    ha2 = r * r;
    r = 1.0 - PI * 5000.0 / FS;         // FPGA filter: 5 kHz
    send(REG_BP_B0, $rtoi((1.0 - r * r) / 2.0 * 1073741824.0));
    send(REG_BP_B1, 0);
    send(REG_BP_B2, -$rtoi((1.0 - r * r) / 2.0 * 1073741824.0));
    send(REG_BP_A1, $rtoi(-2.0 * r * $cos(2.0 * PI * FC / FS) * 1073741824.0));
    send(REG_BP_A2, $rtoi(r * r * 1073741824.0));
    send(REG_STREAM_EN, 1);
    repeat (4_000_000) @(posedge clk);       // 100 ms settling
    take = 1;
    repeat (12_000_000) @(posedge clk);      // 300 ms = 3 modulation periods
    take = 0;
    nrec = f_rec.size();
    $display("%0d records of %0d points", nrec, NREC);
    check(nrec >= 100, "enough records");
    check(up_overflow == 0, "no samples lost");
    mean = 0.0;
    foreach (f_rec[i]) mean += f_rec[i];
    mean /= nrec;
    // lock-in at FM over the records (whole number of modulation periods is not
    // guaranteed, so the mean is removed first)
    ci = 0.0; cs = 0.0;
    foreach (f_rec[i]) begin
      ci += (f_rec[i] - mean) * $sin(2.0 * PI * FM * t_rec[i]);
      cs += (f_rec[i] - mean) * $cos(2.0 * PI * FM * t_rec[i]);
    end
    amp = 2.0 * $sqrt(ci * ci + cs * cs) / nrec;
    // residual after removing the recovered 10 Hz sinusoid
    res = 0.0;
    foreach (f_rec[i]) begin
      real e;
      e = f_rec[i] - mean - 2.0 / nrec * (ci * $sin(2.0 * PI * FM * t_rec[i]) + cs * $cos(2.0 * PI * FM * t_rec[i]));
      res += e * e;
    end
    res = $sqrt(res / nrec);
    $display("residual frequency noise per record: %.3f mHz rms", res * 1000.0);
    check(res < 0.2e-3, "sub-mHz frequency resolution per 2048-point record");
    $display("mean frequency %.6f Hz (carrier %.6f), 10 Hz modulation amplitude %.3f mHz",
             mean, FC, amp * 1000.0);
    for (int i = 0; i < 8; i++) $display("  record %0d: %.6f Hz", i, f_rec[i]);
    check(mean > FC - 1.0e-3 && mean < FC + 1.0e-3, "mean frequency within 1 mHz");
    check(amp > 0.5e-3 && amp < 1.1e-3, "1 mHz modulation recovered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
