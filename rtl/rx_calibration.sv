// rx_calibration: per-chain gain and phase correction of the receive samples.
//
// The RF front-ends of the N_CH receive chains differ in gain and phase. The
// host measures those mismatches with a reference tone and writes one complex
// correction coefficient per chain; this block multiplies every ADC sample of
// chain k by coef[k] (Q2.14, 1.0 = 16384) in its own complex multiplier.
// Correcting mismatches with digital complex multipliers follows the design
// description; the Q2.14 format, the 16-bit output (ADC scale kept, headroom
// for gain above 1) and the absence of a register interface are this
// design's choices.
//
// Interface: one complex 12-bit sample per chain per in_valid, coefficients
// as static inputs; calibrated 16-bit samples per out_valid, one sat bit per
// chain. Timing: one vector per clock, latency 3.
module rx_calibration
  import mbf_pkg::*;
#(
  parameter int unsigned N_CH      = N_ANT,
  parameter int unsigned IN_W      = ADC_W,
  parameter int unsigned OUT_W     = SAMP_W,
  parameter int unsigned CW        = COEF_W,
  parameter int unsigned CFRAC     = COEF_FRAC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] adc_re  [N_CH],
  input  logic signed [IN_W-1:0] adc_im  [N_CH],
  input  logic signed [CW-1:0]   coef_re [N_CH],
  input  logic signed [CW-1:0]   coef_im [N_CH],
  output logic                   out_valid,
  output logic signed [OUT_W-1:0] out_re [N_CH],
  output logic signed [OUT_W-1:0] out_im [N_CH],
  output logic [N_CH-1:0]        sat
);
  logic [N_CH-1:0] vld;

  for (genvar k = 0; k < N_CH; k++) begin : g_ch
    cplx_mult #(.A_W(IN_W), .B_W(CW), .OUT_W(OUT_W), .SHIFT(CFRAC)) u_mult (
      .clk, .rst_n, .in_valid,
      .a_re(adc_re[k]), .a_im(adc_im[k]), .b_re(coef_re[k]), .b_im(coef_im[k]),
      .out_valid(vld[k]), .p_re(out_re[k]), .p_im(out_im[k]), .sat(sat[k])
    );
  end

  // All chains share one strobe; they run in lock step.
  assign out_valid = &vld;
endmodule
