// control_regs: the FPGA program's control variables, written by host commands.
//
// The host does not touch the FPGA logic at run time except through control
// variables: drive enable, z^-n delay, drive gain, interrupt timing, the bandpass
// coefficients, the six scan setpoints with their slew step, and the streaming
// enable. Each command word carries an 8-bit register address (see spm_pkg::reg_addr_e)
// and a 32-bit datum; writing REG_GO produces a one-cycle go pulse that starts a
// move of the scan outputs to the setpoints written so far. Commands to unknown
// addresses are consumed and ignored. The register map is this design's own.
//
// Timing: always ready; a command accepted in cycle t is visible on cfg (and go
// pulses) in cycle t+1. Reset: drive off, delay 1, gain 0, no interrupt, filter
// coefficients 0 (output 0), setpoints 0, slew step 0, streaming off.
module control_regs
  import spm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic cmd_valid,
  output logic cmd_ready,
  input  cmd_t cmd,
  output cfg_t cfg,
  output logic go
);
  assign cmd_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      cfg.delay_n <= 16'd1;
      go          <= 1'b0;
    end else begin
      go <= 1'b0;
      if (cmd_valid) begin
        case (cmd.addr)
          REG_DRIVE_EN:    cfg.drive_en    <= cmd.data[0];
          REG_DELAY_N:     cfg.delay_n     <= cmd.data[15:0];
          REG_GAIN:        cfg.gain        <= cmd.data[15:0];
          REG_INTR_PERIOD: cfg.intr_period <= cmd.data;
          REG_INTR_OFF:    cfg.intr_off    <= cmd.data;
          REG_STREAM_EN:   cfg.stream_en   <= cmd.data[0];
          REG_BP_B0:       cfg.bp.b0       <= cmd.data;
          REG_BP_B1:       cfg.bp.b1       <= cmd.data;
          REG_BP_B2:       cfg.bp.b2       <= cmd.data;
          REG_BP_A1:       cfg.bp.a1       <= cmd.data;
          REG_BP_A2:       cfg.bp.a2       <= cmd.data;
          8'h20, 8'h21, 8'h22, 8'h23, 8'h24, 8'h25:
                           cfg.setpoint[cmd.addr[2:0]] <= cmd.data[SAMPLE_W-1:0];
          REG_SLEW_STEP:   cfg.slew_step   <= cmd.data[15:0];
          REG_GO:          go              <= 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
