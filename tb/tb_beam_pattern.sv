// tb_beam_pattern: beam-pattern measurement with the per-beam integrators.
//
// Emulates the rotating-array measurement: a CW tone arrives as a plane wave
// on a 4-element, half-wavelength-spaced array from angle theta, so element m
// sees A exp(j (2 pi f0 n + pi m sin(theta))) quantised to 12 bits. The node
// forms four fixed beams pointing at sin(theta_b) = (b - 1.5) / 2 (weights
// exp(-j pi m sin(theta_b)), unit calibration) and every beam integrator sums
// 64 samples (8 words of 8 samples). For theta from -90 to +90 degrees in 3-degree steps the
// reported power of each beam must match 64 |A sum_m exp(j pi m (u - u_b))|^2
// within 2 % of the peak, and the strongest beam must be the one pointing
// nearest the source. The measured pattern is printed in dB.
module tb_beam_pattern;
  import mbf_pkg::*;
  localparam int NA = 4, NB = 4, L = SPC, NINT = 64;
  localparam real PI = 3.14159265358979, A = 1500.0, F0 = 0.0371;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, adc_valid;
  logic signed [ADC_W-1:0]  adc_re [NA][L], adc_im [NA][L];
  logic signed [COEF_W-1:0] cal_re [NA], cal_im [NA];
  logic signed [COEF_W-1:0] w_re [NB][NA], w_im [NB][NA];
  logic beam_valid;
  logic signed [BEAM_W-1:0] beam_re [NB][L], beam_im [NB][L];
  logic [ACC_W-1:0] beam_power [NB];
  logic [NB-1:0] beam_power_valid;

  logic [PH_W-1:0] z_ftw [4];
  logic signed [SAMP_W-1:0] z_amp [4];
  logic signed [COEF_W-1:0] z_w [NA][4];
  logic [1:0] z_bits [4];

  mbeam_array_processor dut (
    .clk, .rst_n, .adc_valid, .adc_re, .adc_im, .cal_re, .cal_im, .rx_w_re(w_re), .rx_w_im(w_im),
    .int_len(32'(NINT / L)), .beam_valid, .beam_re, .beam_im, .beam_power, .beam_power_valid,
    .cap_arm(1'b0), .cap_src(1'b0), .cap_busy(), .cap_done(), .cap_rd_addr(10'd0), .cap_rd_re(), .cap_rd_im(),
    .tx_enable(1'b0), .tx_mode(TX_CW), .tx_sps(16'd1), .tx_ftw(z_ftw), .tx_amp(z_amp),
    .tx_w_re(z_w), .tx_w_im(z_w), .tx_sym_bits(z_bits), .tx_sym_valid('0), .tx_sym_ready(),
    .dac_valid(), .dac_re(), .dac_im(), .rx_cal_sat(), .rx_beam_sat(), .tx_dac_sat(), .tx_underflow()
  );

  int checks = 0, failures = 0;
  real meas [NB];
  int  got;

  always @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (rst_n && beam_power_valid[b]) begin meas[b] = real'(beam_power[b]); got++; end

  function automatic int rnd(input real v);
    return $rtoi(v < 0.0 ? v - 0.5 : v + 0.5);
  endfunction

  function automatic real model(input real u, input int b);
    real ub, sr, si;
    ub = (real'(b) - 1.5) / 2.0;
    sr = 0.0; si = 0.0;
    for (int m = 0; m < NA; m++) begin
      sr += $cos(PI * m * (u - ub));
      si += $sin(PI * m * (u - ub));
    end
    return real'(NINT) * A * A * (sr * sr + si * si);
  endfunction

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint n;
    n = 0;
    rst_n = 1'b0; adc_valid = 1'b0;
    for (int s = 0; s < 4; s++) begin
      z_ftw[s] = '0; z_amp[s] = '0; z_bits[s] = '0;
      for (int m = 0; m < NA; m++) begin z_w[m][s] = '0; end
    end
    for (int m = 0; m < NA; m++) begin
      cal_re[m] = COEF_ONE; cal_im[m] = '0;
      for (int l = 0; l < L; l++) begin adc_re[m][l] = '0; adc_im[m][l] = '0; end
      for (int b = 0; b < NB; b++) begin
        real ub;
        ub = (real'(b) - 1.5) / 2.0;
        w_re[b][m] = COEF_W'(rnd(16383.0 * $cos(PI * m * ub)));
        w_im[b][m] = COEF_W'(rnd(-16383.0 * $sin(PI * m * ub)));
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    $display("theta   beam0    beam1    beam2    beam3   (dB re. peak)");
    for (int deg = -90; deg <= 90; deg += 3) begin
      real u, pk, d [NB];
      int best, near;
      u = $sin(real'(deg) * PI / 180.0);
      got = 0;
      for (int i = 0; i < NINT / L; i++) begin
        @(negedge clk);
        adc_valid = 1'b1;
        for (int l = 0; l < L; l++) begin
          for (int m = 0; m < NA; m++) begin
            real a;
            a = 2.0 * PI * F0 * real'(n) + PI * m * u;
            adc_re[m][l] = ADC_W'(rnd(A * $cos(a)));
            adc_im[m][l] = ADC_W'(rnd(A * $sin(a)));
          end
          n++;
        end
      end
      @(negedge clk); adc_valid = 1'b0;
      repeat (12) @(negedge clk);
      checks++;
      if (got != NB) begin failures++; $display("theta %0d: %0d reports", deg, got); end
      pk = real'(NINT) * A * A * 16.0;
      best = 0; near = 0;
      for (int b = 0; b < NB; b++) begin
        real e;
        e = meas[b] - model(u, b);
        checks++;
        if (e > 0.02 * pk || e < -0.02 * pk) begin
          failures++; $display("theta %0d beam %0d: power %e, model %e", deg, b, meas[b], model(u, b));
        end
        if (meas[b] > meas[best]) best = b;
        d[b] = u - (real'(b) - 1.5) / 2.0;
        if (d[b] < 0.0) d[b] = -d[b];
        if (d[b] > 1.0) d[b] = 2.0 - d[b];   // array factor repeats every 2 in u
        if (d[b] < d[near]) near = b;
      end
      begin
        bit tie;
        tie = 1'b0;
        for (int b = 0; b < NB; b++) if (b != near && d[b] - d[near] < 0.05) tie = 1'b1;
        if (!tie) begin
          checks++;
          if (best != near) begin failures++; $display("theta %0d: strongest beam %0d, nearest %0d", deg, best, near); end
        end
      end
      $display("%5d %8.2f %8.2f %8.2f %8.2f", deg,
               10.0 * $log10(meas[0] / pk + 1e-9), 10.0 * $log10(meas[1] / pk + 1e-9),
               10.0 * $log10(meas[2] / pk + 1e-9), 10.0 * $log10(meas[3] / pk + 1e-9));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
