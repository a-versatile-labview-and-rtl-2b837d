// spm_fpga_top: FPGA program of an FPGA/host scanned probe microscope.
//
// The FPGA does the time-critical part of running the microscope; the host PC does
// the rest (frequency detection by fitting the second derivative of the signal against
// the signal itself, scan calculation, feedback loops, display). Data path:
//
//   AI0 (cantilever, AC) --A/D 750 kHz--> bandpass --+--> up DMA FIFO --> host
//   AI1 (cantilever, DC) --------------------------- |-/
//                                                    +--> z^-n delay --> gain,
//                                                         interrupt --> AO0 drive
//   host --> command FIFO --> control registers --> scan outputs --> AO1..AO6, irq
//
// Self-excitation: the filtered position signal, delayed by n clock ticks so that the
// drive is a quarter period out of phase with the position, is amplified and fed back
// to the piezo disc under the cantilever. The cantilever then oscillates at its own
// resonance, wherever forces move it.
//
// Converters: adc_convert pulses at the A/D rate (ADC_INC/ADC_MOD of the 40 MHz clock,
// 750 kHz by default); ai[] is captured at the clock edge that ends that pulse (the
// converter is modelled as presenting its codes by then). dac_update pulses at the D/A
// rate (1 MHz); AO1..AO6 change only then, AO0 every clock (the drive path is
// clock-rate, as in the paper, and the converter takes it at its own rate). AO7 is
// unused and held at 0.
//
// Host interface: cmd_* is the host-to-FPGA DMA stream of {addr, data} command words
// (spm_pkg::cmd_t). up_* is the FPGA-to-host DMA stream: one 32-bit word per A/D
// sample while streaming is enabled, {AI1 raw, AI0 filtered}. If the host falls behind
// and the FIFO is full, the word is dropped and up_overflow counts it. irq signals
// that the scan outputs reached the setpoints; irq_ack clears it. scan_busy shows a move
// in progress and drive_blanked the cycles in which the drive is off (interrupt time or
// drive disabled). up_fill and cmd_fill are the fill levels of the two DMA FIFOs.
// The block partition and data path follow the paper's Fig. 2 and channel table; the
// register map, FIFO depths, up-word packing and the converter handshake are this
// design's own.
module spm_fpga_top
  import spm_pkg::*;
#(
  parameter int unsigned ADC_INC   = 3,
  parameter int unsigned ADC_MOD   = 160,
  parameter int unsigned DAC_INC   = 1,
  parameter int unsigned DAC_MOD   = 40,
  parameter int unsigned MAX_DELAY = 1024,
  parameter int unsigned UP_DEPTH  = 1024,
  parameter int unsigned CMD_DEPTH = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // converters
  output logic                            adc_convert,
  input  logic [N_AI-1:0][SAMPLE_W-1:0]   ai,
  output logic                            dac_update,
  output logic [N_AO-1:0][SAMPLE_W-1:0]   ao,
  // host-to-FPGA DMA
  input  logic                            cmd_valid,
  output logic                            cmd_ready,
  input  cmd_t                            cmd_data,
  // FPGA-to-host DMA
  output logic                            up_valid,
  input  logic                            up_ready,
  output logic [31:0]                     up_data,
  output logic [31:0]                     up_overflow,
  // interrupt and status
  output logic                            irq,
  input  logic                            irq_ack,
  output logic                            scan_busy,
  output logic                            drive_blanked,
  output logic [$clog2(UP_DEPTH+1)-1:0]   up_fill,
  output logic [$clog2(CMD_DEPTH+1)-1:0]  cmd_fill
);
  localparam int unsigned NW = $clog2(MAX_DELAY + 1);

  // ---------------- converter timing ----------------
  logic adc_tick, dac_tick, sample_now;
  rate_strobe #(.INC(ADC_INC), .MOD(ADC_MOD)) u_adc_rate (.clk, .rst_n, .strobe(adc_tick));
  rate_strobe #(.INC(DAC_INC), .MOD(DAC_MOD)) u_dac_rate (.clk, .rst_n, .strobe(dac_tick));
  assign adc_convert = adc_tick;
  assign dac_update  = dac_tick;

  sample_t ai_ac, ai_dc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_now <= 1'b0;
      ai_ac      <= '0;
      ai_dc      <= '0;
    end else begin
      sample_now <= adc_tick;
      if (adc_tick) begin
        ai_ac <= sample_t'(ai[AI_CANT_AC]);
        ai_dc <= sample_t'(ai[AI_CANT_DC]);
      end
    end
  end

  // ---------------- host commands ----------------
  logic cmdq_valid, cmdq_ready;
  cmd_t cmdq_data;
  cfg_t cfg;
  logic go;

  dma_fifo #(.WIDTH($bits(cmd_t)), .DEPTH(CMD_DEPTH)) u_cmd_fifo (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd_data),
    .out_valid(cmdq_valid), .out_ready(cmdq_ready), .out_data(cmdq_data),
    .count(cmd_fill));

  control_regs u_regs (
    .clk, .rst_n,
    .cmd_valid(cmdq_valid), .cmd_ready(cmdq_ready), .cmd(cmdq_data),
    .cfg, .go);

  // ---------------- bandpass ----------------
  logic    bp_valid, bp_busy;
  sample_t bp_out;
  bandpass_filter u_bp (
    .clk, .rst_n, .coef(cfg.bp),
    .in_valid(sample_now), .in_sample(ai_ac),
    .busy(bp_busy), .out_valid(bp_valid), .out_sample(bp_out));

  // the filter finishes a sample in 7 cycles, far inside the A/D period
  a_bp_keeps_up: assert property (@(posedge clk) disable iff (!rst_n) sample_now |-> !bp_busy);

  // ---------------- stream to host ----------------
  logic up_in_valid, up_in_ready;
  logic [31:0] up_word;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_in_valid <= 1'b0;
      up_word     <= '0;
      up_overflow <= '0;
    end else begin
      up_in_valid <= bp_valid && cfg.stream_en;
      up_word     <= {ai_dc, bp_out};
      if (up_in_valid && !up_in_ready) up_overflow <= up_overflow + 1;
    end
  end

  dma_fifo #(.WIDTH(32), .DEPTH(UP_DEPTH)) u_up_fifo (
    .clk, .rst_n,
    .in_valid(up_in_valid), .in_ready(up_in_ready), .in_data(up_word),
    .out_valid(up_valid), .out_ready(up_ready), .out_data(up_data),
    .count(up_fill));

  // ---------------- self-excitation ----------------
  sample_t delayed, drive;
  logic [NW-1:0] delay_n;
  always_comb delay_n = (cfg.delay_n > 16'(MAX_DELAY)) ? NW'(MAX_DELAY) : NW'(cfg.delay_n);

  discrete_delay #(.W(SAMPLE_W), .MAX_DELAY(MAX_DELAY)) u_delay (
    .clk, .rst_n, .n(delay_n), .din(bp_out), .dout(delayed));

  drive_stage u_drive (
    .clk, .rst_n, .din(delayed), .gain(cfg.gain), .enable(cfg.drive_en),
    .intr_period(cfg.intr_period), .intr_off(cfg.intr_off),
    .drive(drive), .blanked(drive_blanked));

  // ---------------- scan outputs ----------------
  logic [N_SCAN-1:0][SAMPLE_W-1:0] scan_ao;
  piezo_scan_output #(.NCH(N_SCAN)) u_scan (
    .clk, .rst_n, .tick(dac_tick), .setpoint(cfg.setpoint), .step(cfg.slew_step),
    .go, .irq_ack, .ao(scan_ao), .busy(scan_busy), .irq);

  always_comb begin
    ao = '0;
    ao[AO_SELF_EXCITE] = drive;
    for (int i = 0; i < N_SCAN; i++) ao[AO_PIEZO_XP + i] = scan_ao[i];
  end
endmodule
