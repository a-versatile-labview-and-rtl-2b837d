// drive_stage_tb: checks the self-excitation output stage. The expected drive is
// computed here as sat16(floor(din * gain / 4096)) of the previous cycle's input, or 0
// when the drive is disabled or inside the interrupt window. The interrupt window is
// checked by counting blanked cycles per period against intr_off.
module drive_stage_tb;
  import spm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  sample_t din = '0, drive;
  logic signed [15:0] gain = '0;
  logic enable = 0, blanked;
  logic [31:0] intr_period = 0, intr_off = 0;

  drive_stage dut (.clk, .rst_n, .din, .gain, .enable, .intr_period, .intr_off, .drive, .blanked);

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

  function automatic sample_t expect_drive(sample_t x, logic signed [15:0] g);
    longint p;
    p = longint'(x) * longint'(g);
    p = (p >= 0) ? p / 4096 : -((-p + 4095) / 4096);   // floor division
    if (p > 32767)  p = 32767;
    if (p < -32768) p = -32768;
    return sample_t'(p);
  endfunction

  initial begin
    sample_t x_prev;
    int off_cnt;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // disabled: output stays 0
    for (int i = 0; i < 50; i++) begin
      din = sample_t'($urandom); gain = 16'sd4096;
      @(posedge clk); #1;
      check(drive == 0 && blanked, "disabled drive not 0");
    end
    // enabled, no interrupt: gain and saturation
    enable = 1;
    for (int i = 0; i < 3000; i++) begin
      x_prev = din;
      @(posedge clk); #1;
      check(drive == expect_drive(x_prev, gain) && !blanked,
            $sformatf("x=%0d g=%0d drive=%0d exp=%0d", x_prev, gain, drive, expect_drive(x_prev, gain)));
      din = sample_t'($urandom);
      gain = (i % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 8191) - 4096);
    end
    // periodic interrupt: 100-cycle period, 30 cycles off, measured over 10 periods
    intr_period = 100; intr_off = 30; din = 16'sd1000; gain = 16'sd4096;
    repeat (200) @(posedge clk);
    off_cnt = 0;
    for (int i = 0; i < 1000; i++) begin
      @(posedge clk); #1;
      if (blanked) begin off_cnt++; check(drive == 0, "drive during interrupt"); end
      else check(drive == 16'sd1000, $sformatf("drive %0d outside interrupt", drive));
    end
    check(off_cnt == 300, $sformatf("blanked %0d of 1000 cycles, expected 300", off_cnt));
    // interrupt time can be retuned: 70 of 100
    intr_off = 70;
    repeat (200) @(posedge clk);
    off_cnt = 0;
    for (int i = 0; i < 1000; i++) begin @(posedge clk); #1; if (blanked) off_cnt++; end
    check(off_cnt == 700, $sformatf("blanked %0d of 1000 cycles, expected 700", off_cnt));
    // off time >= period: always off
    intr_off = 100;
    repeat (5) @(posedge clk);
    off_cnt = 0;
    for (int i = 0; i < 500; i++) begin @(posedge clk); #1; if (blanked && drive == 0) off_cnt++; end
    check(off_cnt == 500, "drive must stay off when intr_off >= intr_period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
