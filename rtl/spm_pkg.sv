// spm_pkg: types and constants shared by the scanned-probe-microscope FPGA program.
//
// The FPGA card digitises eight +/-10 V inputs and drives eight +/-10 V outputs, all
// with 16-bit codes (two's complement, 305 uV per LSB). The channel assignment below
// is the one of the microscope: AI0 carries the AC-coupled interferometer signal,
// AI1 its DC level, AO0 the cantilever self-excitation drive, AO1-AO5 the five piezo
// tube electrodes and AO6 the electromagnet control voltage.
//
// The host reaches the control variables through a command stream: each command word
// is an 8-bit register address and a 32-bit datum. The register map is this design's
// own; the set of variables (filter coefficients, delay, drive gain, interrupt time,
// piezo setpoints) is the one the microscope software exposes.
package spm_pkg;

  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned N_AI     = 8;
  localparam int unsigned N_AO     = 8;
  localparam int unsigned N_SCAN   = 6;   // AO1..AO6
  localparam int unsigned COEF_W   = 32;  // biquad coefficients, Q2.30
  localparam int unsigned COEF_FRAC = 30;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [COEF_W-1:0]   coef_t;

  // Input channels
  localparam int unsigned AI_CANT_AC = 0;
  localparam int unsigned AI_CANT_DC = 1;
  // Output channels
  localparam int unsigned AO_SELF_EXCITE = 0;
  localparam int unsigned AO_PIEZO_XP    = 1;
  localparam int unsigned AO_PIEZO_XN    = 2;
  localparam int unsigned AO_PIEZO_YP    = 3;
  localparam int unsigned AO_PIEZO_YN    = 4;
  localparam int unsigned AO_PIEZO_Z     = 5;
  localparam int unsigned AO_MAGNET      = 6;

  // Biquad coefficient set: y = b0 x + b1 x1 + b2 x2 - a1 y1 - a2 y2
  typedef struct packed {
    coef_t b0;
    coef_t b1;
    coef_t b2;
    coef_t a1;
    coef_t a2;
  } biquad_coef_t;

  // Register addresses of the host command stream
  typedef enum logic [7:0] {
    REG_DRIVE_EN    = 8'h00,
    REG_DELAY_N     = 8'h01,
    REG_GAIN        = 8'h02,
    REG_INTR_PERIOD = 8'h03,
    REG_INTR_OFF    = 8'h04,
    REG_STREAM_EN   = 8'h05,
    REG_BP_B0       = 8'h10,
    REG_BP_B1       = 8'h11,
    REG_BP_B2       = 8'h12,
    REG_BP_A1       = 8'h13,
    REG_BP_A2       = 8'h14,
    REG_SETPOINT0   = 8'h20,   // 0x20..0x25: AO1..AO6
    REG_SLEW_STEP   = 8'h28,
    REG_GO          = 8'h29
  } reg_addr_e;

  typedef struct packed {
    logic [7:0]  addr;
    logic [31:0] data;
  } cmd_t;

  // All control variables, as seen by the datapath
  typedef struct packed {
    logic          drive_en;
    logic [15:0]   delay_n;
    logic signed [15:0] gain;         // Q4.12
    logic [31:0]   intr_period;       // clock cycles, 0 = never interrupt
    logic [31:0]   intr_off;          // clock cycles of each period with the drive off
    logic          stream_en;
    biquad_coef_t  bp;
    logic [N_SCAN-1:0][SAMPLE_W-1:0] setpoint;
    logic [15:0]   slew_step;         // max code change per D/A update, 0 = jump
  } cfg_t;

endpackage
