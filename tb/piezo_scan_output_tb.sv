// piezo_scan_output_tb: checks the six scan outputs. A testbench model holds the
// expected output of each channel and moves it by at most `step` per D/A tick; after
// every tick the outputs must match, irq must rise exactly on the tick the last
// channel arrives, stay until irq_ack, and the number of ticks a move takes must be
// ceil(max |distance| / step). Also checks step = 0 (jump in one tick).
module piezo_scan_output_tb;
  import spm_pkg::*;
  localparam int NCH = 6;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tick = 0, go = 0, irq_ack = 0, busy, irq;
  logic [NCH-1:0][15:0] setpoint = '0, ao;
  logic [15:0] step = '0;
  int model [NCH];

  piezo_scan_output #(.NCH(NCH)) dut (.clk, .rst_n, .tick, .setpoint, .step, .go, .irq_ack, .ao, .busy, .irq);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_tick();
    @(negedge clk); tick = 1;
    @(negedge clk); tick = 0;
  endtask

  // One complete move to random setpoints
  task automatic move(input int stp, input int range);
    int dst, maxd, expect_ticks, ticks;
    bit arrived;
    maxd = 0;
    for (int i = 0; i < NCH; i++) begin
      setpoint[i] = 16'($signed($urandom_range(0, 2 * range)) - range);
      dst = $signed(setpoint[i]) - model[i];
      if (dst < 0) dst = -dst;
      if (dst > maxd) maxd = dst;
    end
    step = 16'(stp);
    expect_ticks = (stp == 0) ? 1 : (maxd + stp - 1) / stp;
    if (expect_ticks == 0) expect_ticks = 1;
    @(negedge clk); go = 1;
    @(negedge clk); go = 0;
    check(busy && !irq, "busy after go");
    ticks = 0;
    arrived = 0;
    while (!arrived && ticks < 100000) begin
      do_tick();
      ticks++;
      arrived = 1;
      for (int i = 0; i < NCH; i++) begin
        int tgt = $signed(setpoint[i]);
        if (stp == 0) model[i] = tgt;
        else if (tgt - model[i] > stp) model[i] += stp;
        else if (model[i] - tgt > stp) model[i] -= stp;
        else model[i] = tgt;
        if (model[i] != tgt) arrived = 0;
        check($signed(ao[i]) == model[i], $sformatf("ch%0d ao=%0d exp=%0d", i, $signed(ao[i]), model[i]));
      end
      check(irq == arrived, $sformatf("irq=%0d arrived=%0d at tick %0d", irq, arrived, ticks));
    end
    check(ticks == expect_ticks, $sformatf("move took %0d ticks, expected %0d", ticks, expect_ticks));
    // outputs hold, irq holds until acknowledged
    repeat (3) do_tick();
    check(irq && !busy, "irq held until ack");
    @(negedge clk); irq_ack = 1;
    @(negedge clk); irq_ack = 0;
    check(!irq, "irq cleared by ack");
  endtask

  initial begin
    for (int i = 0; i < NCH; i++) model[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(ao == '0 && !irq && !busy, "reset state");
    // outputs do not move without go
    setpoint = '1;
    repeat (5) do_tick();
    check(ao == '0, "no motion without go");
    for (int k = 0; k < 20; k++) move(int'($urandom_range(1, 500)), 20000);
    for (int k = 0; k < 5; k++)  move(0, 32000);
    move(32767, 32767);
    move(1, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
