// beam_power_integrator: integrate-and-dump power meter for one beam.
//
// Beam patterns are measured by turning the array against a fixed transmitter
// and recording, at each angle, how much power each beam receives. This block
// forms the instantaneous power I^2 + Q^2 of every beam sample and sums it
// over int_len input words of LANES consecutive samples each (int_len * LANES
// samples); at the end of each interval it presents the sum on power with a
// one-cycle power_valid pulse and starts the next interval from zero.
// Integrating the samples to obtain the beam gain follows the design
// description; what is integrated (power), the interval control and the
// widths are this design's choices. int_len = 0 is treated as 1.
//
// Interface: in_valid with LANES samples in_re/in_im[l] (lane 0 earliest),
// static int_len; power/power_valid.
// Timing: accepts one word per clock; power_valid rises 2 cycles after the
// in_valid of the interval's last word.
module beam_power_integrator
  import mbf_pkg::*;
#(
  parameter int unsigned LANES = SPC,
  parameter int unsigned IN_W  = BEAM_W,
  parameter int unsigned AW    = ACC_W,
  parameter int unsigned LW    = LEN_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_re [LANES],
  input  logic signed [IN_W-1:0] in_im [LANES],
  input  logic [LW-1:0]          int_len,
  output logic [AW-1:0]          power,
  output logic                   power_valid
);
  // I^2 + Q^2 fits in 2*IN_W bits; LANES of them need clog2(LANES) more.
  localparam int unsigned PW = 2 * IN_W + $clog2(LANES);

  logic [PW-1:0] pwr, pwr_c;
  logic          pwr_vld;
  logic [AW-1:0] acc;
  logic [LW-1:0] cnt;
  logic [LW-1:0] last_idx;

  assign last_idx = (int_len == '0) ? '0 : int_len - 1'b1;

  always_comb begin
    pwr_c = '0;
    for (int l = 0; l < LANES; l++)
      pwr_c = pwr_c + PW'(in_re[l] * in_re[l]) + PW'(in_im[l] * in_im[l]);
  end

  // Stage 1: instantaneous power of the word.
  always_ff @(posedge clk) begin
    if (!rst_n) pwr_vld <= 1'b0;
    else        pwr_vld <= in_valid;
    pwr <= pwr_c;
  end

  // Stage 2: accumulate and dump.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc         <= '0;
      cnt         <= '0;
      power       <= '0;
      power_valid <= 1'b0;
    end else begin
      power_valid <= 1'b0;
      if (pwr_vld) begin
        if (cnt >= last_idx) begin
          power       <= acc + AW'(pwr);
          power_valid <= 1'b1;
          acc         <= '0;
          cnt         <= '0;
        end else begin
          acc <= acc + AW'(pwr);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
