// cplx_mult: pipelined complex multiplier, the digital phase shifter.
//
// Computes p = a * b for a complex sample a and a complex coefficient b,
// i.e. p_re = a_re*b_re - a_im*b_im and p_im = a_re*b_im + a_im*b_re, then
// drops SHIFT fraction bits with round-half-up and saturates to OUT_W bits.
// Used to correct the gain and phase of each receive chain and, in the
// beamforming matrix, as the per-element phase shifter. With SHIFT = 0 and a
// wide OUT_W it returns the exact product.
//
// Interface: in_valid/a/b in, out_valid/p/sat out; sat flags that either part
// was clipped. Timing: fully pipelined, one product per clock, latency 3
// (input register, product register, sum/round/saturate register).
// The four-multiplier structure is the textbook form; the latency, rounding
// and saturation are this design's choices.
module cplx_mult #(
  parameter int unsigned A_W   = 16,
  parameter int unsigned B_W   = 16,
  parameter int unsigned OUT_W = 16,
  parameter int unsigned SHIFT = 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [A_W-1:0]   a_re,
  input  logic signed [A_W-1:0]   a_im,
  input  logic signed [B_W-1:0]   b_re,
  input  logic signed [B_W-1:0]   b_im,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] p_re,
  output logic signed [OUT_W-1:0] p_im,
  output logic                    sat
);
  localparam int unsigned PW = A_W + B_W;      // one real product
  localparam int unsigned SW = PW + 1;         // sum of two products

  logic signed [A_W-1:0] a_re_q, a_im_q;
  logic signed [B_W-1:0] b_re_q, b_im_q;
  logic signed [PW-1:0]  rr, ii, ri, ir;
  logic [2:0]            vld;

  always_ff @(posedge clk) begin
    a_re_q <= a_re;  a_im_q <= a_im;
    b_re_q <= b_re;  b_im_q <= b_im;
    rr <= a_re_q * b_re_q;
    ii <= a_im_q * b_im_q;
    ri <= a_re_q * b_im_q;
    ir <= a_im_q * b_re_q;
  end

  // Round half up, shift, saturate to OUT_W bits.
  function automatic logic signed [OUT_W:0] round_sat(input logic signed [SW-1:0] x);
    logic signed [SW:0]   r;
    logic signed [SW:0]   s;
    logic signed [SW:0]   maxv, minv;
    r = (SHIFT > 0) ? ({x[SW-1], x} + ((SW+1)'(1) <<< (SHIFT > 0 ? SHIFT-1 : 0))) : {x[SW-1], x};
    s = r >>> SHIFT;
    maxv = ((SW+1)'(1) <<< (OUT_W-1)) - (SW+1)'(1);
    minv = -maxv - 1;
    if (s > maxv)      return {1'b1, OUT_W'(maxv)};
    else if (s < minv) return {1'b1, OUT_W'(minv)};
    else               return {1'b0, OUT_W'(s)};
  endfunction

  logic signed [SW-1:0] sum_re, sum_im;
  logic signed [OUT_W:0] rs_re, rs_im;
  always_comb begin
    sum_re = SW'(rr) - SW'(ii);
    sum_im = SW'(ri) + SW'(ir);
    rs_re  = round_sat(sum_re);
    rs_im  = round_sat(sum_im);
  end

  always_ff @(posedge clk) begin
    p_re <= rs_re[OUT_W-1:0];
    p_im <= rs_im[OUT_W-1:0];
    sat  <= vld[1] & (rs_re[OUT_W] | rs_im[OUT_W]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];
endmodule
