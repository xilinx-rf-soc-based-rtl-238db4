// cordic_rotator: pipelined CORDIC that rotates a complex value by a phase.
//
// out = in * exp(j*2*pi*phase/2^PH_W). The top two phase bits select an
// exact quarter-turn pre-rotation (swap and negate); the remaining angle, in
// [0, 90 degrees), is removed by ITER micro-rotations by +/-atan(2^-i). The
// CORDIC gain (about 1.6468) is cancelled at the end by multiplying with
// round(2^15 / 1.6468) = 19898, after which the result is rounded and
// saturated to W bits. Two guard bits below the input LSB and two above it
// keep the iterations exact enough and overflow-free.
// The arctangent constants are round(atan(2^-i) / (2*pi) * 2^32).
// The block is how this design places each transmit stream on its frequency
// sub-channel and makes CW tones; the design description names the tones and
// sub-channels, the CORDIC is this design's choice.
//
// Interface: in_valid/in_re/in_im/phase; out_valid/out_re/out_im.
// Timing: one value per clock, latency ITER + 2.
module cordic_rotator
  import mbf_pkg::*;
#(
  parameter int unsigned W     = SAMP_W,
  parameter int unsigned PHW   = PH_W,
  parameter int unsigned ITER  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  input  logic [PHW-1:0]      phase,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im
);
  localparam int unsigned G  = 2;          // fraction guard bits
  localparam int unsigned IW = W + 2 + G;  // internal width
  localparam logic signed [16:0] K_INV = 17'sd19898;  // 2^15 / 1.6468

  // atan(2^-i) in units of 2^-32 turn, shifted to PHW bits.
  function automatic logic [PHW-1:0] atan_tab(input int unsigned i);
    logic [31:0] t;
    case (i)
      0:  t = 32'd536870912;  1:  t = 32'd316933406;  2:  t = 32'd167458907;
      3:  t = 32'd85004756;   4:  t = 32'd42667331;   5:  t = 32'd21354465;
      6:  t = 32'd10679838;   7:  t = 32'd5340245;    8:  t = 32'd2670163;
      9:  t = 32'd1335087;    10: t = 32'd667544;     11: t = 32'd333772;
      12: t = 32'd166886;     13: t = 32'd83443;      14: t = 32'd41722;
      15: t = 32'd20861;      16: t = 32'd10430;      17: t = 32'd5215;
      18: t = 32'd2608;       19: t = 32'd1304;
      default: t = 32'd0;
    endcase
    return PHW'(t >> (32 - PHW));
  endfunction

  logic signed [IW-1:0]  x [ITER+1];
  logic signed [IW-1:0]  y [ITER+1];
  logic signed [PHW-1:0] z [ITER+1];
  logic [ITER+1:0]       vld;

  // Stage 0: quarter-turn pre-rotation.
  logic signed [IW-1:0] xi, yi;
  assign xi = IW'(in_re) <<< G;
  assign yi = IW'(in_im) <<< G;

  always_ff @(posedge clk) begin
    unique case (phase[PHW-1 -: 2])
      2'd0: begin x[0] <=  xi; y[0] <=  yi; end
      2'd1: begin x[0] <= -yi; y[0] <=  xi; end
      2'd2: begin x[0] <= -xi; y[0] <= -yi; end
      2'd3: begin x[0] <=  yi; y[0] <= -xi; end
    endcase
    z[0] <= {2'b00, phase[PHW-3:0]};
  end

  // Stages 1..ITER: micro-rotations.
  for (genvar i = 0; i < ITER; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (!z[i][PHW-1]) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - atan_tab(i);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + atan_tab(i);
      end
    end
  end

  // Final stage: gain correction, round, saturate.
  localparam int unsigned MW = IW + 17;
  localparam int unsigned SH = 15 + G;

  function automatic logic signed [W-1:0] scale(input logic signed [IW-1:0] v);
    logic signed [MW-1:0] m, maxv, minv;
    m = (MW'(v) * MW'(K_INV) + (MW'(1) <<< (SH - 1))) >>> SH;
    maxv = (MW'(1) <<< (W - 1)) - MW'(1);
    minv = -maxv - MW'(1);
    if (m > maxv)      return W'(maxv);
    else if (m < minv) return W'(minv);
    else               return W'(m);
  endfunction

  always_ff @(posedge clk) begin
    out_re <= scale(x[ITER]);
    out_im <= scale(y[ITER]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[ITER:0], in_valid};
  end
  assign out_valid = vld[ITER+1];
endmodule
