// tb_link_demo: two-node 60 GHz data-link scenario, end to end.
//
// Node 1 transmits four independent QPSK streams, each on its own frequency
// sub-channel (fs/32, fs/16, 3fs/32, fs/8; 32 samples per symbol) and each
// steered with its own weight vector F[m][s] = exp(j pi/2 m s) / 2. The
// channel between the nodes connects antenna m to antenna m with a different
// gain and phase per chain (0.9..1.1, -70..120 degrees), keeps the top 12 of
// the 14 DAC bits and adds +/-1 LSB of noise. Node 2 corrects each chain with
// the inverse coefficient and forms four beams with W[b][m] =
// exp(-j pi/2 m b), so beam b should carry stream b alone.
// For every receive beam and every stream the test shifts the beam back by
// the stream's NCO frequency, integrates over each symbol and slices the
// result (32 samples per symbol make the four sub-channels orthogonal over a
// symbol, so what one stream leaves on a beam is measured apart from the
// others), like the 4 x 4 grid of constellations of the link experiment: each
// stream must decode without error on its own beam, and the energy of every
// other stream on that beam must stay below 1 % of it.
module tb_link_demo;
  import mbf_pkg::*;
  localparam int NA = 4, NS = 4, L = SPC, SPS = 32, N_SYM = 120;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  // node 1 (transmitter)
  logic signed [COEF_W-1:0] t_w_re [NA][NS], t_w_im [NA][NS];
  logic [PH_W-1:0] t_ftw [NS];
  logic signed [SAMP_W-1:0] t_amp [NS];
  logic [1:0] t_bits [NS];
  logic [NS-1:0] t_valid, t_ready, t_under;
  logic t_en;
  logic dac_valid;
  logic signed [DAC_W-1:0] dac_re [NA][L], dac_im [NA][L];
  logic [NA-1:0] t_dsat;
  // node 2 (receiver)
  logic adc_valid;
  logic signed [ADC_W-1:0] adc_re [NA][L], adc_im [NA][L];
  logic signed [COEF_W-1:0] cal_re [NA], cal_im [NA];
  logic signed [COEF_W-1:0] r_w_re [NA][NA], r_w_im [NA][NA];
  logic beam_valid;
  logic signed [BEAM_W-1:0] beam_re [NA][L], beam_im [NA][L];

  // unused ports
  logic signed [ADC_W-1:0]  z_adc [NA][L];
  logic signed [COEF_W-1:0] z_coef [NA];
  logic signed [COEF_W-1:0] z_w [NA][NA];
  logic [1:0] z_bits [NS];
  logic [PH_W-1:0] z_ftw [NS];
  logic signed [SAMP_W-1:0] z_amp [NS];

  mbeam_array_processor node1 (
    .clk, .rst_n,
    .adc_valid(1'b0), .adc_re(z_adc), .adc_im(z_adc), .cal_re(z_coef), .cal_im(z_coef),
    .rx_w_re(z_w), .rx_w_im(z_w), .int_len(32'd1),
    .beam_valid(), .beam_re(), .beam_im(), .beam_power(), .beam_power_valid(),
    .cap_arm(1'b0), .cap_src(1'b0), .cap_busy(), .cap_done(), .cap_rd_addr(10'd0), .cap_rd_re(), .cap_rd_im(),
    .tx_enable(t_en), .tx_mode(TX_QPSK), .tx_sps(16'(SPS)), .tx_ftw(t_ftw), .tx_amp(t_amp),
    .tx_w_re(t_w_re), .tx_w_im(t_w_im), .tx_sym_bits(t_bits), .tx_sym_valid(t_valid), .tx_sym_ready(t_ready),
    .dac_valid, .dac_re, .dac_im,
    .rx_cal_sat(), .rx_beam_sat(), .tx_dac_sat(t_dsat), .tx_underflow(t_under)
  );

  mbeam_array_processor node2 (
    .clk, .rst_n,
    .adc_valid, .adc_re, .adc_im, .cal_re, .cal_im, .rx_w_re(r_w_re), .rx_w_im(r_w_im), .int_len(32'd8),
    .beam_valid, .beam_re, .beam_im, .beam_power(), .beam_power_valid(),
    .cap_arm(1'b0), .cap_src(1'b0), .cap_busy(), .cap_done(), .cap_rd_addr(10'd0), .cap_rd_re(), .cap_rd_im(),
    .tx_enable(1'b0), .tx_mode(TX_CW), .tx_sps(16'd1), .tx_ftw(z_ftw), .tx_amp(z_amp),
    .tx_w_re(z_w), .tx_w_im(z_w), .tx_sym_bits(z_bits), .tx_sym_valid('0), .tx_sym_ready(),
    .dac_valid(), .dac_re(), .dac_im(),
    .rx_cal_sat(), .rx_beam_sat(), .tx_dac_sat(), .tx_underflow()
  );

  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979;
  real g [NA]  = '{1.0, 0.9, 1.1, 0.95};
  real ph [NA] = '{0.0, 40.0, -70.0, 120.0};

  // bits sent per stream, in order
  logic [1:0] sent [NS][$];
  always @(posedge clk)
    if (rst_n)
      for (int s = 0; s < NS; s++)
        if (t_ready[s] && t_valid[s]) sent[s].push_back(t_bits[s]);

  // channel: per-chain gain/phase, 14 -> 12 bits, +/-1 LSB noise, one register
  always @(posedge clk) begin
    adc_valid <= rst_n && dac_valid;
    for (int m = 0; m < NA; m++)
      for (int l = 0; l < L; l++) begin
        real c, sn, xr, xi;
        c  = g[m] * $cos(ph[m] * PI / 180.0);
        sn = g[m] * $sin(ph[m] * PI / 180.0);
        xr = (real'(dac_re[m][l]) * c - real'(dac_im[m][l]) * sn) / 4.0 + real'(int'($urandom % 3) - 1);
        xi = (real'(dac_re[m][l]) * sn + real'(dac_im[m][l]) * c) / 4.0 + real'(int'($urandom % 3) - 1);
        adc_re[m][l] <= ADC_W'($rtoi(xr < 0.0 ? xr - 0.5 : xr + 0.5));
        adc_im[m][l] <= ADC_W'($rtoi(xi < 0.0 ? xi - 0.5 : xi + 0.5));
      end
  end

  // receiver analysis: per beam b and stream s, demodulate and integrate
  longint n_rx = 0;
  real acc_re [NA][NS], acc_im [NA][NS];
  real energy [NA][NS];
  int  errs [NA][NS];
  int  n_dec = 0;
  always @(posedge clk) begin
    if (rst_n && beam_valid) begin
      for (int l = 0; l < L; l++) begin
        for (int b = 0; b < NA; b++)
          for (int s = 0; s < NS; s++) begin
            real a, c, sn;
            a  = -2.0 * PI * real'(32'(n_rx * longint'(t_ftw[s]))) / 4294967296.0;
            c  = $cos(a); sn = $sin(a);
            acc_re[b][s] += real'(beam_re[b][l]) * c - real'(beam_im[b][l]) * sn;
            acc_im[b][s] += real'(beam_re[b][l]) * sn + real'(beam_im[b][l]) * c;
          end
        n_rx++;
        if (n_rx % SPS == 0) begin
          int m;
          m = int'(n_rx / SPS) - 1;
          for (int b = 0; b < NA; b++)
            for (int s = 0; s < NS; s++) begin
              logic [1:0] dec;
              dec = {acc_re[b][s] < 0.0, acc_im[b][s] < 0.0};
              energy[b][s] += acc_re[b][s] * acc_re[b][s] + acc_im[b][s] * acc_im[b][s];
              if (m < sent[s].size() && dec != sent[s][m]) errs[b][s]++;
              acc_re[b][s] = 0.0; acc_im[b][s] = 0.0;
            end
          n_dec++;
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; t_en = 1'b0;
    for (int a = 0; a < NA; a++) begin
      for (int l = 0; l < L; l++) z_adc[a][l] = '0;
      z_coef[a] = '0;
      for (int b = 0; b < NA; b++) z_w[a][b] = '0;
    end
    for (int s = 0; s < NS; s++) begin
      z_bits[s] = '0; z_ftw[s] = '0; z_amp[s] = '0;
      t_ftw[s] = 32'h0800_0000 * (s + 1);
      t_amp[s] = 16'sd10000;
      for (int m = 0; m < NA; m++) begin
        t_w_re[m][s] = COEF_W'($rtoi($cos(PI / 2.0 * m * s) * 8192.0 + ($cos(PI / 2.0 * m * s) < 0 ? -0.5 : 0.5)));
        t_w_im[m][s] = COEF_W'($rtoi($sin(PI / 2.0 * m * s) * 8192.0 + ($sin(PI / 2.0 * m * s) < 0 ? -0.5 : 0.5)));
      end
    end
    for (int b = 0; b < NA; b++)
      for (int m = 0; m < NA; m++) begin
        r_w_re[b][m] = COEF_W'($rtoi($cos(PI / 2.0 * m * b) * 16383.0 + ($cos(PI / 2.0 * m * b) < 0 ? -0.5 : 0.5)));
        r_w_im[b][m] = COEF_W'($rtoi(-$sin(PI / 2.0 * m * b) * 16383.0 + (-$sin(PI / 2.0 * m * b) < 0 ? -0.5 : 0.5)));
      end
    for (int m = 0; m < NA; m++) begin
      // inverse of the chain's gain and phase, Q2.14
      cal_re[m] = COEF_W'($rtoi(16384.0 / g[m] * $cos(-ph[m] * PI / 180.0)));
      cal_im[m] = COEF_W'($rtoi(16384.0 / g[m] * $sin(-ph[m] * PI / 180.0)));
      for (int l = 0; l < L; l++) begin adc_re[m][l] = '0; adc_im[m][l] = '0; end
    end
    for (int b = 0; b < NA; b++)
      for (int s = 0; s < NS; s++) begin
        acc_re[b][s] = 0.0; acc_im[b][s] = 0.0; energy[b][s] = 0.0; errs[b][s] = 0;
      end
    t_valid = '1;
    for (int s = 0; s < NS; s++) t_bits[s] = 2'($urandom);
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    t_en = 1'b1;
    for (int i = 0; i < N_SYM * SPS / L; i++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (t_ready[s] || i == 0) t_bits[s] = 2'($urandom);
    end
    repeat (40) @(negedge clk);
    t_en = 1'b0;
    repeat (40) @(negedge clk);

    $display("rows = receive beams, columns = streams: symbol errors / relative energy");
    for (int b = 0; b < NA; b++) begin
      string line;
      line = "";
      for (int s = 0; s < NS; s++)
        line = {line, $sformatf("  %4d/%8.5f", errs[b][s], energy[b][s] / energy[b][b])};
      $display("beam %0d:%s", b, line);
    end
    for (int b = 0; b < NA; b++) begin
      checks++;
      if (errs[b][b] != 0) begin failures++; $display("stream %0d: %0d symbol errors on its beam", b, errs[b][b]); end
      for (int s = 0; s < NS; s++) if (s != b) begin
        checks++;
        if (energy[b][s] > 0.01 * energy[b][b]) begin failures++; $display("stream %0d leaks into beam %0d", s, b); end
      end
    end
    checks++;
    if (n_dec < N_SYM - 5) begin failures++; $display("only %0d symbols decoded", n_dec); end
    checks++;
    if (|t_dsat) begin failures++; $display("transmitter clipped"); end
    $display("symbols decoded per beam/stream pair: %0d", n_dec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
