// control_regs_tb: writes every register with random data through the command
// stream and checks that the matching cfg field (and only it) changed, one cycle
// later. Checks the reset values, that unknown addresses change nothing, and that
// REG_GO gives a single one-cycle go pulse.
module control_regs_tb;
  import spm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, go;
  cmd_t cmd = '0;
  cfg_t cfg, model;

  control_regs dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cfg, .go);

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

  task automatic write(input logic [7:0] a, input logic [31:0] d);
    int gos = 0;
    @(negedge clk);
    cmd_valid = 1; cmd.addr = a; cmd.data = d;
    #1 check(cmd_ready, "cmd_ready");
    @(negedge clk);
    cmd_valid = 0;
    if (go) gos++;
    case (a)
      8'h00: model.drive_en    = d[0];
      8'h01: model.delay_n     = d[15:0];
      8'h02: model.gain        = d[15:0];
      8'h03: model.intr_period = d;
      8'h04: model.intr_off    = d;
      8'h05: model.stream_en   = d[0];
      8'h10: model.bp.b0 = d;
      8'h11: model.bp.b1 = d;
      8'h12: model.bp.b2 = d;
      8'h13: model.bp.a1 = d;
      8'h14: model.bp.a2 = d;
      8'h20, 8'h21, 8'h22, 8'h23, 8'h24, 8'h25: model.setpoint[a - 8'h20] = d[15:0];
      8'h28: model.slew_step = d[15:0];
      default: ;
    endcase
    check(cfg == model, $sformatf("cfg mismatch after write %h", a));
    @(negedge clk);
    if (go) gos++;
    check(gos == ((a == 8'h29) ? 1 : 0), $sformatf("go pulses %0d after write %h", gos, a));
  endtask

  initial begin
    automatic logic [7:0] addrs [] = '{8'h00, 8'h01, 8'h02, 8'h03, 8'h04, 8'h05, 8'h10, 8'h11, 8'h12,
                             8'h13, 8'h14, 8'h20, 8'h21, 8'h22, 8'h23, 8'h24, 8'h25,
                             8'h28, 8'h29, 8'h06, 8'h26, 8'hff};
    model = '0; model.delay_n = 16'd1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg == model, "reset values");
    check(!go, "no go after reset");
    for (int k = 0; k < 400; k++) write(addrs[$urandom_range(0, addrs.size() - 1)], $urandom);
    foreach (addrs[i]) write(addrs[i], $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
