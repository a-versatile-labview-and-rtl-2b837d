// spm_fpga_top_tb: end-to-end run of the microscope FPGA program at its default
// parameters (40 MHz clock, 750 kHz A/D, 1 MHz D/A, 1024-tick delay line,
// 1024-word up FIFO), with a host model and a cantilever model.
//
// Cantilever model: a damped harmonic oscillator (f0 = 75 kHz, Q = 200, chosen low so
// the ring-up takes a few milliseconds), integrated every 25 ns clock. Its
// position in A/D codes, plus a DC offset, is presented on AI0; AI1 carries a DC level
// set by the test. The AO0 drive code pushes it with a fixed force constant. The gain
// is set high so that the drive saturates: the oscillation then settles at an amplitude
// inside the A/D range, where the interrupt time can lower it.
//
// Host model: writes the control registers through the command stream, reads the
// sample stream, measures amplitude (peak of filtered samples) and frequency (zero
// crossings of filtered samples, as a stand-in for the host's frequency fit), and runs a
// small raster scan (2 slow x 2 (trace/retrace) x 4 fast pixels) and a field sweep,
// waiting for the setpoint-reached interrupt at every pixel.
//
// Mechanisms that must each occur at least once (counted): self-excited ring-up, drive
// phase set wrong (oscillation decays), interrupt-time amplitude control, resonance
// tracking after an f0 shift, bandpass removal of the AI0 offset, DC-level stream,
// slewed scan move with interrupt, electromagnet field sweep, up-stream overflow.
module spm_fpga_top_tb;
  import spm_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real DT = 25.0e-9;

  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic scan_busy, drive_blanked;
  logic [10:0] up_fill;
  logic [4:0] cmd_fill;
  logic adc_convert, dac_update, cmd_valid = 0, cmd_ready, up_valid, up_ready = 1, irq, irq_ack = 0;
  logic [N_AI-1:0][SAMPLE_W-1:0] ai;
  logic [N_AO-1:0][SAMPLE_W-1:0] ao;
  cmd_t cmd_data = '0;
  logic [31:0] up_data, up_overflow;

  spm_fpga_top dut (.clk, .rst_n, .adc_convert, .ai, .dac_update, .ao,
                    .cmd_valid, .cmd_ready, .cmd_data, .up_valid, .up_ready, .up_data,
                    .up_overflow, .irq, .irq_ack, .scan_busy, .drive_blanked, .up_fill, .cmd_fill);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- cantilever model ----------------
  real f0 = 75000.0, q_fac = 200.0, kf = 4.0e8;
  real x = 0.0, v = 0.0, ai0_offset = 3000.0;
  logic signed [15:0] ai1_level = 16'sd5000;
  function automatic logic [15:0] to_code(real r);
    if (r > 32767.0)  return 16'h7fff;
    if (r < -32768.0) return 16'h8000;
    return 16'($rtoi(r));
  endfunction
  always @(posedge clk) begin
    real w0, a;
    w0 = 2.0 * PI * f0;
    a  = -w0 * w0 * x - (w0 / q_fac) * v + kf * real'($signed(ao[AO_SELF_EXCITE]));
    v  = v + a * DT;
    x  = x + v * DT;
  end
  always_comb begin
    ai = '0;
    ai[AI_CANT_AC] = to_code(x + ai0_offset);
    ai[AI_CANT_DC] = ai1_level;
  end

  // ---------------- host model: sample stream ----------------
  sample_t rec_ac [$];
  sample_t rec_dc [$];
  bit recording = 0;
  always @(posedge clk) begin
    if (up_valid && up_ready && recording) begin
      rec_ac.push_back(sample_t'(up_data[15:0]));
      rec_dc.push_back(sample_t'(up_data[31:16]));
    end
  end

  task automatic send(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cmd_valid = 1; cmd_data.addr = a; cmd_data.data = d;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic set_bandpass(real fc, real bw, real fs);
    real r;
    r = 1.0 - PI * bw / fs;
    send(REG_BP_B0, $rtoi((1.0 - r * r) / 2.0 * 1073741824.0));
    send(REG_BP_B1, 0);
    send(REG_BP_B2, -$rtoi((1.0 - r * r) / 2.0 * 1073741824.0));
    send(REG_BP_A1, $rtoi(-2.0 * r * $cos(2.0 * PI * fc / fs) * 1073741824.0));
    send(REG_BP_A2, $rtoi(r * r * 1073741824.0));
  endtask

  // Record n stream samples
  task automatic record(input int n);
    rec_ac.delete(); rec_dc.delete();
    recording = 1;
    while (rec_ac.size() < n) @(posedge clk);
    recording = 0;
  endtask

  function automatic int peak_of(int from);
    int p = 0;
    for (int i = from; i < rec_ac.size(); i++) begin
      int s = rec_ac[i];
      if (s < 0) s = -s;
      if (s > p) p = s;
    end
    return p;
  endfunction

  // frequency from zero crossings of the filtered stream, 750 kHz sample rate
  function automatic real freq_of();
    int first = -1, last = -1, n = 0;
    for (int i = 1; i < rec_ac.size(); i++)
      if (rec_ac[i - 1] < 0 && rec_ac[i] >= 0) begin
        if (first < 0) first = i; else n++;
        last = i;
      end
    if (n == 0) return 0.0;
    return real'(n) * 750000.0 / real'(last - first);
  endfunction

  function automatic real mean_of();
    real s = 0.0;
    foreach (rec_ac[i]) s += rec_ac[i];
    return s / rec_ac.size();
  endfunction

  // mechanism counters
  int n_ringup = 0, n_wrong_phase = 0, n_interrupt = 0, n_tracking = 0, n_dc_reject = 0,
      n_dc_stream = 0, n_scan_moves = 0, n_field = 0, n_overflow = 0;

  // Move the scan outputs and wait for the interrupt; returns ticks waited
  task automatic scan_to(input logic [N_SCAN-1:0][15:0] sp);
    int waited = 0;
    for (int i = 0; i < N_SCAN; i++) send(8'(REG_SETPOINT0 + i), 32'(sp[i]));
    send(REG_GO, 0);
    repeat (4) @(negedge clk);        // command FIFO, register, scan block
    check(scan_busy && !irq, "move in progress after go");
    while (!irq && waited < 2_000_000) begin @(posedge clk); waited++; end
    check(irq, "setpoint interrupt");
    for (int i = 0; i < N_SCAN; i++)
      check(ao[AO_PIEZO_XP + i] == sp[i], $sformatf("AO%0d=%0d, setpoint %0d", i + 1,
            $signed(ao[AO_PIEZO_XP + i]), $signed(sp[i])));
    @(negedge clk); irq_ack = 1;
    @(negedge clk); irq_ack = 0;
    check(!irq, "interrupt acknowledged");
    n_scan_moves++;
  endtask

  initial begin
    int p0, p1, p_free, p_int;
    real f;
    logic [N_SCAN-1:0][15:0] sp;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // configure: bandpass around 75 kHz, 5 kHz wide; streaming on
    set_bandpass(75000.0, 5000.0, 750000.0);
    send(REG_STREAM_EN, 1);
    send(REG_DELAY_N, 372);            // about 3/4 of a period minus path latency
    send(REG_GAIN, 32767);             // ~8: the drive saturates and limits the amplitude
    send(REG_SLEW_STEP, 200);

    // 1. ring-up from a small displacement with drive on
    x = 200.0;
    record(300);
    p0 = peak_of(150);
    send(REG_DRIVE_EN, 1);
    repeat (400_000) @(posedge clk);   // 10 ms
    record(1500);
    p1 = peak_of(0);
    $display("ring-up: peak %0d -> %0d", p0, p1);
    check(p1 > 10 * p0 && p1 > 5000 && p1 < 32000, $sformatf("self-excitation ring-up %0d -> %0d", p0, p1));
    if (p1 > 10 * p0) n_ringup++;
    f = freq_of();
    $display("self-oscillation frequency %f Hz", f);
    check(f > 74500.0 && f < 75500.0, $sformatf("oscillates at f0: %f", f));
    // bandpass strips the 3000-code offset on AI0
    $display("filtered mean %f", mean_of());
    check(mean_of() < 300.0 && mean_of() > -300.0, "bandpass removes AI0 offset");
    if (mean_of() < 300.0 && mean_of() > -300.0) n_dc_reject++;
    p_free = p1;

    // 2. resonance tracking: a force gradient shifts f0 by +1 %
    f0 = 75750.0;
    repeat (200_000) @(posedge clk);
    record(3000);
    f = freq_of();
    $display("after f0 shift: %f Hz", f);
    check(f > 75600.0 && f < 75900.0, $sformatf("drive follows the resonance: %f", f));
    if (f > 75600.0 && f < 75900.0) n_tracking++;
    f0 = 75000.0;

    // 3. interrupt time: drive off 60 % of each 20-period window lowers the amplitude
    send(REG_INTR_PERIOD, 10667);
    send(REG_INTR_OFF, 6400);
    p0 = 0;
    for (int i = 0; i < 400_000; i++) begin
      @(posedge clk);
      if (drive_blanked) begin
        p0++;
        if (ao[AO_SELF_EXCITE] != 0 && i > 2) begin
          check(0, "AO0 must be 0 while the drive is blanked");
        end
      end
    end
    check(p0 > 230_000 && p0 < 250_000, $sformatf("drive off %0d of 400000 cycles, expected 60 %%", p0));
    record(1500);
    p_int = peak_of(0);
    $display("amplitude with interrupt %0d, without %0d", p_int, p_free);
    check(p_int < (p_free * 9) / 10, "interrupt time reduces amplitude");
    if (p_int < (p_free * 9) / 10) n_interrupt++;
    send(REG_INTR_PERIOD, 0);
    send(REG_INTR_OFF, 0);

    // 4. wrong phase: delay by a quarter period less than needed -> damping
    send(REG_DELAY_N, 106);
    repeat (400_000) @(posedge clk);
    record(1500);
    p1 = peak_of(0);
    $display("with wrong phase: %0d", p1);
    check(p1 < p_free / 10, $sformatf("wrong drive phase lets oscillation decay: %0d", p1));
    if (p1 < p_free / 10) n_wrong_phase++;
    send(REG_DELAY_N, 372);
    repeat (400_000) @(posedge clk);

    // 5. raster scan as in the host sequence: slow axis, trace/retrace, fast axis
    for (int s = 0; s < 2; s++)
      for (int dir = 0; dir < 2; dir++)
        for (int k = 0; k < 4; k++) begin
          automatic int fx = (dir == 0) ? k : 3 - k;
          automatic int xv = -3000 + fx * 2000;
          automatic int yv = -1000 + s * 2000;
          sp[0] = 16'(xv); sp[1] = 16'(-xv); sp[2] = 16'(yv); sp[3] = 16'(-yv);
          sp[4] = 16'(1200); sp[5] = 16'(0);
          scan_to(sp);
          // measure: DC level and amplitude at this pixel
          ai1_level = 16'(5000 + 100 * (s * 8 + dir * 4 + k));
          repeat (100) @(posedge clk);
          record(64);
          check(rec_dc[63] == ai1_level, $sformatf("DC level in stream %0d, expected %0d", rec_dc[63], ai1_level));
          if (rec_dc[63] == ai1_level) n_dc_stream++;
          check(peak_of(0) > 5000, "cantilever keeps oscillating during scan");
        end

    // 6. field sweep on AO6
    for (int b = 0; b < 3; b++) begin
      sp[5] = 16'(-8000 + 8000 * b);
      scan_to(sp);
      if (ao[AO_MAGNET] == sp[5]) n_field++;
    end

    // 7. host stops reading: the up FIFO fills and samples are dropped and counted
    @(negedge clk); up_ready = 0;
    repeat (120_000) @(posedge clk);   // 3 ms = 2250 samples into 1024 words
    check(up_overflow > 1000, $sformatf("overflow count %0d", up_overflow));
    check(up_fill == 11'd1024, $sformatf("up FIFO fill %0d while the host is stalled", up_fill));
    if (up_overflow > 0) n_overflow++;
    @(negedge clk); up_ready = 1;
    p0 = up_overflow;
    record(1100);                      // the stream resumes once the host reads again
    check(up_overflow == p0, "no drops while the host keeps up");

    $display("mechanisms: ringup=%0d wrong_phase=%0d interrupt=%0d tracking=%0d dc_reject=%0d dc_stream=%0d scan_moves=%0d field=%0d overflow=%0d",
             n_ringup, n_wrong_phase, n_interrupt, n_tracking, n_dc_reject, n_dc_stream, n_scan_moves, n_field, n_overflow);
    check(n_ringup > 0, "mechanism ring-up seen");
    check(n_wrong_phase > 0, "mechanism wrong phase seen");
    check(n_interrupt > 0, "mechanism interrupt time seen");
    check(n_tracking > 0, "mechanism resonance tracking seen");
    check(n_dc_reject > 0, "mechanism bandpass seen");
    check(n_dc_stream > 0, "mechanism DC stream seen");
    check(n_scan_moves >= 16, "mechanism scan moves seen");
    check(n_field > 0, "mechanism field sweep seen");
    check(n_overflow > 0, "mechanism overflow seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
