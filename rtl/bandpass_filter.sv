// bandpass_filter: second-order IIR bandpass for the cantilever signal.
//
// The AC-coupled interferometer signal is band-limited around the cantilever
// resonance before it is sent to the host and to the self-excitation path. The
// filter is a direct-form-I biquad
//     y[n] = b0 x[n] + b1 x[n-1] + b2 x[n-2] - a1 y[n-1] - a2 y[n-2]
// whose coefficients (signed Q2.30) are loaded by the host, so centre frequency and
// bandwidth follow the cantilever in use. A 20 Hz band around 75 kHz at 750 kHz
// sampling puts the poles about 1e-4 inside the unit circle, so the output history
// is kept with STATE_FRAC extra fractional bits; only the 16-bit output is rounded
// (by truncation toward minus infinity) and saturated.
//
// One A/D sample arrives every 53 clocks, so the five products share one multiplier:
// a sample accepted on in_valid is multiplied-and-accumulated over the next five
// cycles, and out_valid pulses with the result 7 cycles after the cycle in which in_valid was
// high (one capture cycle, five multiply-accumulate cycles, one write-back cycle).
// A sample offered while the filter is busy (busy = 1) is ignored.
// The filter structure and number formats are this design's own choice; the paper
// specifies only that the FPGA bandpass-filters the signal.
module bandpass_filter
  import spm_pkg::*;
#(
  parameter int unsigned STATE_FRAC = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  biquad_coef_t coef,
  input  logic         in_valid,
  input  sample_t      in_sample,
  output logic         busy,
  output logic         out_valid,
  output sample_t      out_sample
);
  localparam int unsigned YW   = SAMPLE_W + STATE_FRAC + 8;  // 8 guard bits
  localparam int unsigned PW   = COEF_W + YW;
  localparam int unsigned ACCW = PW + 4;

  typedef logic signed [YW-1:0]   state_t;
  typedef logic signed [ACCW-1:0] acc_t;

  state_t x0, x1, x2, y1, y2;
  acc_t   acc;
  logic [2:0] phase;   // 0 idle, 1..5 MAC steps, 6 write-back

  coef_t  mul_c;
  state_t mul_s;
  logic signed [PW-1:0] prod;
  acc_t   y_full;
  state_t y_new;

  // Operand selection for the shared multiplier
  always_comb begin
    unique case (phase)
      3'd1:    begin mul_c = coef.b0; mul_s = x0; end
      3'd2:    begin mul_c = coef.b1; mul_s = x1; end
      3'd3:    begin mul_c = coef.b2; mul_s = x2; end
      3'd4:    begin mul_c = coef.a1; mul_s = y1; end
      3'd5:    begin mul_c = coef.a2; mul_s = y2; end
      default: begin mul_c = '0;      mul_s = '0; end
    endcase
    prod = PW'(mul_c) * PW'(mul_s);
  end

  // Result in state units, saturated to the state width
  localparam acc_t YMAX = acc_t'({1'b0, {(YW-1){1'b1}}});
  localparam acc_t YMIN = -YMAX - 1;
  always_comb begin
    y_full = acc >>> COEF_FRAC;
    if (y_full > YMAX)      y_new = state_t'(YMAX);
    else if (y_full < YMIN) y_new = state_t'(YMIN);
    else                    y_new = state_t'(y_full);
  end

  // 16-bit output: drop the fractional bits and saturate
  localparam state_t OMAX = state_t'(32767);
  localparam state_t OMIN = state_t'(-32768);
  state_t y_int;
  always_comb y_int = y_new >>> STATE_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x0 <= '0; x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      acc <= '0; phase <= '0;
      out_valid <= 1'b0; out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (phase)
        3'd0: if (in_valid) begin
          x0    <= state_t'(in_sample) <<< STATE_FRAC;
          acc   <= '0;
          phase <= 3'd1;
        end
        3'd1, 3'd2, 3'd3: begin
          acc   <= acc + ACCW'(prod);
          phase <= phase + 3'd1;
        end
        3'd4, 3'd5: begin
          acc   <= acc - ACCW'(prod);
          phase <= phase + 3'd1;
        end
        3'd6: begin
          x2 <= x1; x1 <= x0;
          y2 <= y1; y1 <= y_new;
          if (y_int > OMAX)      out_sample <= sample_t'(OMAX);
          else if (y_int < OMIN) out_sample <= sample_t'(OMIN);
          else                   out_sample <= sample_t'(y_int);
          out_valid <= 1'b1;
          phase     <= 3'd0;
        end
        default: phase <= 3'd0;
      endcase
    end
  end

  assign busy = (phase != 3'd0);
endmodule
