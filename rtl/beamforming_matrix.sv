// beamforming_matrix: fully digital multi-beam former, y = W x.
//
// Each of the N_OUT outputs is a weighted sum of all N_IN complex inputs,
// y[r] = sum_c W[r][c] * x[c], with its own complex weight vector (row r of
// W). All N_OUT x N_IN complex multiplications (the per-element "phase
// shifters") run in parallel on the same input vector, so every beam is
// formed from the same time-domain samples at once. On receive the inputs are
// the calibrated antenna chains and the outputs are beams; on transmit the
// inputs are the stream samples and the outputs are the antenna (DAC) signals.
// The host supplies W as written: for a receive combiner W^H it writes the
// conjugated weights.
//
// Products are kept exact (SHIFT 0 in the multipliers), summed at full width,
// then SHIFT fraction bits are dropped with round-half-up and the result is
// saturated to OUT_W bits. The parallel multiplier-and-adder structure follows
// the design description; the widths, rounding and latency are this design's.
//
// Interface: in_valid with the input vector, static weights; out_valid with
// the output vector and one sat bit per output. Timing: one vector per clock,
// latency 4 (3 in the multipliers, 1 for sum/round/saturate).
// The multipliers' sat pins are left unconnected on purpose: a product kept
// at full width cannot clip, so the pin would always be low.
module beamforming_matrix
  import mbf_pkg::*;
#(
  parameter int unsigned N_IN  = N_ANT,
  parameter int unsigned N_OUT = N_BEAM,
  parameter int unsigned IN_W  = SAMP_W,
  parameter int unsigned OUT_W = BEAM_W,
  parameter int unsigned CW    = COEF_W,
  parameter int unsigned SHIFT = COEF_FRAC
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re [N_IN],
  input  logic signed [IN_W-1:0]  in_im [N_IN],
  input  logic signed [CW-1:0]    w_re  [N_OUT][N_IN],
  input  logic signed [CW-1:0]    w_im  [N_OUT][N_IN],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re [N_OUT],
  output logic signed [OUT_W-1:0] out_im [N_OUT],
  output logic [N_OUT-1:0]        sat
);
  localparam int unsigned PW = IN_W + CW + 1;          // exact complex product
  localparam int unsigned SW = PW + $clog2(N_IN) + 1;  // sum of N_IN products

  logic signed [PW-1:0] p_re [N_OUT][N_IN];
  logic signed [PW-1:0] p_im [N_OUT][N_IN];
  logic [N_OUT-1:0][N_IN-1:0] p_vld;

  for (genvar r = 0; r < N_OUT; r++) begin : g_row
    for (genvar c = 0; c < N_IN; c++) begin : g_col
      cplx_mult #(.A_W(IN_W), .B_W(CW), .OUT_W(PW), .SHIFT(0)) u_mult (
        .clk, .rst_n, .in_valid,
        .a_re(in_re[c]), .a_im(in_im[c]), .b_re(w_re[r][c]), .b_im(w_im[r][c]),
        .out_valid(p_vld[r][c]), .p_re(p_re[r][c]), .p_im(p_im[r][c]),
        .sat()  // full-width product: never clips, left open
      );
    end
  end

  function automatic logic signed [OUT_W:0] bf_round_sat(input logic signed [SW-1:0] x);
    logic signed [SW:0] r, s, maxv, minv;
    r = {x[SW-1], x} + (((SW+1)'(1) <<< SHIFT) >>> 1);
    s = r >>> SHIFT;
    maxv = ((SW+1)'(1) <<< (OUT_W-1)) - (SW+1)'(1);
    minv = -maxv - 1;
    if (s > maxv)      return {1'b1, OUT_W'(maxv)};
    else if (s < minv) return {1'b1, OUT_W'(minv)};
    else               return {1'b0, OUT_W'(s)};
  endfunction

  logic signed [SW-1:0]  acc_re [N_OUT];
  logic signed [SW-1:0]  acc_im [N_OUT];
  logic signed [OUT_W:0] rs_re  [N_OUT];
  logic signed [OUT_W:0] rs_im  [N_OUT];

  always_comb begin
    for (int r = 0; r < N_OUT; r++) begin
      acc_re[r] = '0;
      acc_im[r] = '0;
      for (int c = 0; c < N_IN; c++) begin
        acc_re[r] = acc_re[r] + SW'(p_re[r][c]);
        acc_im[r] = acc_im[r] + SW'(p_im[r][c]);
      end
      rs_re[r] = bf_round_sat(acc_re[r]);
      rs_im[r] = bf_round_sat(acc_im[r]);
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < N_OUT; r++) begin
      out_re[r] <= rs_re[r][OUT_W-1:0];
      out_im[r] <= rs_im[r][OUT_W-1:0];
      sat[r]    <= (&p_vld) & (rs_re[r][OUT_W] | rs_im[r][OUT_W]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= &p_vld;
  end
endmodule
