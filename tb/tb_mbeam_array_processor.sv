// tb_mbeam_array_processor: end-to-end test of the node baseband at its
// default size (4 antennas, 4 beams, 4 streams, 8 samples per clock,
// 1024-word capture).
//
// Receive: random 12-bit ADC words on all chains and lanes pass calibration
// and the
// 4-beam former. A bit-exact model here (complex products rounded half up,
// 16-bit calibrated samples, 18-bit beams) predicts every beam sample, which
// must match and appear 7 cycles after its ADC words; the four integrators
// (16 words of 8 samples per interval) must report the model's power sums. The test runs
// with identity weights (each beam is one chain, as behind a lens) and with
// random weights and coefficients (digital beams). It then captures 1024
// beam vectors and 1024 raw ADC vectors and reads both back.
// Transmit: four streams, first as CW tones on four frequencies, then as
// QPSK on four sub-channels (32 samples per symbol) with a symbol source
// that sometimes stalls, go
// through the transmit beamformer. A floating-point model predicts each DAC
// word (within 3 LSB, clipped at the DAC range); DAC words must leave 23
// cycles after the edge that formed the stream sample. A final burst with
// large amplitudes and weights must clip at the DAC and raise tx_dac_sat.
// Each mechanism (lens mode, digital beams, integrator dump, beam capture,
// raw capture, CW, QPSK, CW/QPSK switch, symbol underflow, DAC saturation) is
// counted and must happen at least once.
module tb_mbeam_array_processor;
  import mbf_pkg::*;
  localparam int NA = 4, NB = 4, NS = 4, L = SPC, DEPTH = 1024, RX_LAT = 7, TX_LAT = 23, TOL = 3;
  localparam int INT_LEN = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic adc_valid;
  logic signed [ADC_W-1:0]  adc_re [NA][L], adc_im [NA][L];
  logic signed [COEF_W-1:0] cal_re [NA], cal_im [NA];
  logic signed [COEF_W-1:0] rx_w_re [NB][NA], rx_w_im [NB][NA];
  logic [LEN_W-1:0] int_len;
  logic beam_valid;
  logic signed [BEAM_W-1:0] beam_re [NB][L], beam_im [NB][L];
  logic [ACC_W-1:0] beam_power [NB];
  logic [NB-1:0] beam_power_valid;
  logic cap_arm, cap_src, cap_busy, cap_done;
  logic [9:0] cap_rd_addr;
  logic signed [BEAM_W-1:0] cap_rd_re [NB][L], cap_rd_im [NB][L];
  logic tx_enable;
  tx_mode_e tx_mode;
  logic [15:0] tx_sps;
  logic [PH_W-1:0] tx_ftw [NS];
  logic signed [SAMP_W-1:0] tx_amp [NS];
  logic signed [COEF_W-1:0] tx_w_re [NA][NS], tx_w_im [NA][NS];
  logic [1:0] tx_sym_bits [NS];
  logic [NS-1:0] tx_sym_valid, tx_sym_ready;
  logic dac_valid;
  logic signed [DAC_W-1:0] dac_re [NA][L], dac_im [NA][L];
  logic [NA-1:0] rx_cal_sat;
  logic [NB-1:0] rx_beam_sat;
  logic [NA-1:0] tx_dac_sat;
  logic [NS-1:0] tx_underflow;

  mbeam_array_processor dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_lens = 0, n_digital = 0, n_dump = 0, n_cap_beam = 0, n_cap_raw = 0;
  int n_cw = 0, n_qpsk = 0, n_switch = 0, n_under = 0, n_dacsat = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // Receive model
  // ------------------------------------------------------------------
  function automatic longint rs(input longint x, input int sh, input int w);
    longint r = (x + (longint'(1) <<< (sh - 1))) >>> sh;
    longint mx = (longint'(1) <<< (w - 1)) - 1;
    if (r > mx) r = mx;
    if (r < -mx - 1) r = -mx - 1;
    return r;
  endfunction

  typedef struct { longint re [NB][L]; longint im [NB][L]; int t; } rx_exp_t;
  rx_exp_t rxq[$];
  longint cap_beam_re [DEPTH][NB][L], cap_beam_im [DEPTH][NB][L];
  longint cap_raw_re [DEPTH][NA][L], cap_raw_im [DEPTH][NA][L];
  int cap_beam_n = -1, cap_raw_n = -1;   // -1: not recording
  longint pw_acc [NB];
  int     pw_cnt;
  longint pwq [NB][$];

  task automatic rx_drive();
    rx_exp_t e;
    longint cr [NA], ci [NA];
    @(negedge clk);
    adc_valid = 1'b1;
    for (int l = 0; l < L; l++) begin
      for (int a = 0; a < NA; a++) begin
        adc_re[a][l] = ADC_W'($urandom);
        adc_im[a][l] = ADC_W'($urandom);
        cr[a] = rs(longint'(adc_re[a][l]) * cal_re[a] - longint'(adc_im[a][l]) * cal_im[a], 14, 16);
        ci[a] = rs(longint'(adc_re[a][l]) * cal_im[a] + longint'(adc_im[a][l]) * cal_re[a], 14, 16);
      end
      for (int b = 0; b < NB; b++) begin
        longint sr = 0, si = 0;
        for (int a = 0; a < NA; a++) begin
          sr += cr[a] * rx_w_re[b][a] - ci[a] * rx_w_im[b][a];
          si += cr[a] * rx_w_im[b][a] + ci[a] * rx_w_re[b][a];
        end
        e.re[b][l] = rs(sr, 14, 18);
        e.im[b][l] = rs(si, 14, 18);
      end
    end
    if (cap_raw_n >= 0 && cap_raw_n < DEPTH) begin
      for (int a = 0; a < NA; a++)
        for (int l = 0; l < L; l++) begin
          cap_raw_re[cap_raw_n][a][l] = adc_re[a][l];
          cap_raw_im[cap_raw_n][a][l] = adc_im[a][l];
        end
      cap_raw_n++;
    end
    e.t = cycle + 1;
    rxq.push_back(e);
  endtask

  always @(posedge clk) begin
    if (rst_n && beam_valid) begin
      rx_exp_t e;
      if (rxq.size() == 0) fail("unexpected beam output");
      else begin
        e = rxq.pop_front();
        for (int b = 0; b < NB; b++)
          for (int l = 0; l < L; l++) begin
            checks++;
            if (beam_re[b][l] != BEAM_W'(e.re[b][l]) || beam_im[b][l] != BEAM_W'(e.im[b][l]))
              fail($sformatf("beam %0d lane %0d got %0d %0d want %0d %0d", b, l, beam_re[b][l], beam_im[b][l], e.re[b][l], e.im[b][l]));
            pw_acc[b] += e.re[b][l] * e.re[b][l] + e.im[b][l] * e.im[b][l];
          end
        checks++;
        if (cycle - e.t != RX_LAT - 1) fail($sformatf("rx latency %0d", cycle - e.t + 1));
        pw_cnt++;
        if (pw_cnt == INT_LEN) begin
          for (int b = 0; b < NB; b++) begin pwq[b].push_back(pw_acc[b]); pw_acc[b] = 0; end
          pw_cnt = 0;
        end
        if (cap_beam_n >= 0 && cap_beam_n < DEPTH) begin
          for (int b = 0; b < NB; b++)
            for (int l = 0; l < L; l++) begin
              cap_beam_re[cap_beam_n][b][l] = e.re[b][l];
              cap_beam_im[cap_beam_n][b][l] = e.im[b][l];
            end
          cap_beam_n++;
        end
      end
    end
    for (int b = 0; b < NB; b++) begin
      if (rst_n && beam_power_valid[b]) begin
        longint p;
        checks++;
        if (pwq[b].size() == 0) fail("unexpected power report");
        else begin
          p = pwq[b].pop_front();
          if (beam_power[b] != ACC_W'(p)) fail($sformatf("power beam %0d got %0d want %0d", b, beam_power[b], p));
        end
        if (b == 0) n_dump++;
      end
    end
  end

  task automatic rx_idle(input int n);
    @(negedge clk); adc_valid = 1'b0;
    repeat (n) @(negedge clk);
  endtask

  task automatic rx_burst(input int n);
    for (int i = 0; i < n; i++) begin
      if (($urandom % 8) == 0) begin @(negedge clk); adc_valid = 1'b0; end
      else rx_drive();
    end
  endtask

  task automatic read_capture(input bit raw);
    for (int a = 0; a < DEPTH; a++) begin
      cap_rd_addr = 10'(a);
      @(negedge clk);
      for (int b = 0; b < NB; b++)
        for (int l = 0; l < L; l++) begin
          checks++;
          if (raw) begin
            if (cap_rd_re[b][l] != BEAM_W'(cap_raw_re[a][b][l]) || cap_rd_im[b][l] != BEAM_W'(cap_raw_im[a][b][l]))
              fail($sformatf("raw capture %0d/%0d/%0d", a, b, l));
          end else begin
            if (cap_rd_re[b][l] != BEAM_W'(cap_beam_re[a][b][l]) || cap_rd_im[b][l] != BEAM_W'(cap_beam_im[a][b][l]))
              fail($sformatf("beam capture %0d/%0d/%0d", a, b, l));
          end
        end
    end
  endtask

  // ------------------------------------------------------------------
  // Transmit model
  // ------------------------------------------------------------------
  typedef struct { real re [NA][L]; real im [NA][L]; int t; } tx_exp_t;
  tx_exp_t txq[$];
  logic [31:0] mph [NS];
  real sym_re [NS], sym_im [NS];
  tx_mode_e last_mode;
  bit       was_enabled = 1'b0;

  always @(posedge clk) begin
    if (!rst_n || !tx_enable) begin
      for (int s = 0; s < NS; s++) begin mph[s] = '0; sym_re[s] = 0.0; sym_im[s] = 0.0; end
      was_enabled = 1'b0;
    end else begin
      tx_exp_t e; real st_re [NS][L], st_im [NS][L];
      if (was_enabled && tx_mode != last_mode) n_switch++;
      last_mode = tx_mode; was_enabled = 1'b1;
      if (tx_mode == TX_CW) n_cw++; else n_qpsk++;
      for (int s = 0; s < NS; s++) begin
        real a;
        if (tx_mode == TX_CW) begin
          sym_re[s] = real'(tx_amp[s]); sym_im[s] = 0.0;
        end else if (tx_sym_ready[s]) begin
          if (tx_sym_valid[s]) begin
            sym_re[s] = tx_sym_bits[s][1] ? -real'(tx_amp[s]) : real'(tx_amp[s]);
            sym_im[s] = tx_sym_bits[s][0] ? -real'(tx_amp[s]) : real'(tx_amp[s]);
          end else begin
            sym_re[s] = 0.0; sym_im[s] = 0.0;
            checks++;
            if (!tx_underflow[s]) fail("underflow not flagged");
            n_under++;
          end
        end
        for (int l = 0; l < L; l++) begin
          a = 2.0 * 3.14159265358979 * real'(mph[s]) / 4294967296.0;
          st_re[s][l] = sym_re[s] * $cos(a) - sym_im[s] * $sin(a);
          st_im[s][l] = sym_re[s] * $sin(a) + sym_im[s] * $cos(a);
          mph[s] = mph[s] + tx_ftw[s];
        end
      end
      for (int m = 0; m < NA; m++)
        for (int l = 0; l < L; l++) begin
          real sr, si;
          sr = 0.0; si = 0.0;
          for (int s = 0; s < NS; s++) begin
            sr += st_re[s][l] * tx_w_re[m][s] - st_im[s][l] * tx_w_im[m][s];
            si += st_re[s][l] * tx_w_im[m][s] + st_im[s][l] * tx_w_re[m][s];
          end
          e.re[m][l] = sr / 65536.0;
          e.im[m][l] = si / 65536.0;
        end
      e.t = cycle;
      txq.push_back(e);
    end
  end

  function automatic real clip(input real v);
    if (v > 8191.0) return 8191.0;
    if (v < -8192.0) return -8192.0;
    return v;
  endfunction

  always @(posedge clk) begin
    if (rst_n && dac_valid) begin
      tx_exp_t e;
      if (txq.size() == 0) fail("unexpected DAC output");
      else begin
        e = txq.pop_front();
        for (int m = 0; m < NA; m++)
          for (int l = 0; l < L; l++) begin
            real dr, di;
            dr = real'(dac_re[m][l]) - clip(e.re[m][l]);
            di = real'(dac_im[m][l]) - clip(e.im[m][l]);
            checks++;
            if (dr > TOL || dr < -TOL || di > TOL || di < -TOL)
              fail($sformatf("dac %0d lane %0d got %0d %0d want %f %f", m, l, dac_re[m][l], dac_im[m][l], e.re[m][l], e.im[m][l]));
          end
        checks++;
        if (cycle - e.t != TX_LAT) fail($sformatf("tx latency %0d", cycle - e.t));
        if (|tx_dac_sat) n_dacsat++;
      end
    end
  end

  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) begin
      tx_sym_bits[s]  <= 2'($urandom);
      tx_sym_valid[s] <= ($urandom % 10) != 0;
    end
  end

  // ------------------------------------------------------------------
  // Stimulus
  // ------------------------------------------------------------------
  initial begin
    rst_n = 1'b0; adc_valid = 1'b0; int_len = LEN_W'(INT_LEN);
    cap_arm = 1'b0; cap_src = 1'b0; cap_rd_addr = '0;
    tx_enable = 1'b0; tx_mode = TX_CW; tx_sps = 16'd32;
    for (int b = 0; b < NB; b++) begin pw_acc[b] = 0; end
    pw_cnt = 0;
    for (int a = 0; a < NA; a++) begin
      for (int l = 0; l < L; l++) begin adc_re[a][l] = '0; adc_im[a][l] = '0; end
      cal_re[a] = COEF_ONE; cal_im[a] = '0;
      for (int b = 0; b < NB; b++) begin
        rx_w_re[b][a] = (a == b) ? COEF_ONE : '0; rx_w_im[b][a] = '0;
      end
    end
    for (int s = 0; s < NS; s++) begin
      tx_ftw[s] = 32'h0080_0000 * (s + 1);     // fs/512 .. fs/128
      tx_amp[s] = 16'sd8000;
      for (int m = 0; m < NA; m++) begin
        // steering vectors exp(j*pi/2*m*s) / 2: one direction per stream
        case ((m * s) % 4)
          0: begin tx_w_re[m][s] =  16'sd8192; tx_w_im[m][s] =  16'sd0;    end
          1: begin tx_w_re[m][s] =  16'sd0;    tx_w_im[m][s] =  16'sd8192; end
          2: begin tx_w_re[m][s] = -16'sd8192; tx_w_im[m][s] =  16'sd0;    end
          default: begin tx_w_re[m][s] = 16'sd0; tx_w_im[m][s] = -16'sd8192; end
        endcase
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // Lens mode: identity weights, unit calibration, each beam = one chain.
    rx_burst(32 * INT_LEN);
    n_lens++;
    rx_idle(RX_LAT + 2);

    // Digital beams: random calibration and random weights.
    for (int a = 0; a < NA; a++) begin
      cal_re[a] = 16'sd12000 + COEF_W'($urandom % 9000);
      cal_im[a] = COEF_W'($urandom % 8000) - 16'sd4000;
      for (int b = 0; b < NB; b++) begin
        rx_w_re[b][a] = COEF_W'($urandom);
        rx_w_im[b][a] = COEF_W'($urandom);
      end
    end
    rx_burst(40 * INT_LEN);
    n_digital++;
    rx_idle(RX_LAT + 2);

    // Capture 1024 beam vectors.
    cap_src = 1'b0; cap_arm = 1'b1; @(negedge clk); cap_arm = 1'b0;
    cap_beam_n = 0;
    while (!cap_done) rx_burst(1);
    rx_idle(RX_LAT + 2);
    checks++;
    if (cap_beam_n != DEPTH) fail("beam capture count");
    read_capture(1'b0);
    n_cap_beam++;

    // Capture 1024 raw ADC vectors.
    cap_src = 1'b1; cap_arm = 1'b1; @(negedge clk); cap_arm = 1'b0;
    cap_raw_n = 0;
    while (!cap_done) rx_burst(1);
    rx_idle(RX_LAT + 2);
    checks++;
    if (cap_raw_n < DEPTH) fail("raw capture count");
    read_capture(1'b1);
    n_cap_raw++;

    // Transmit: CW tones, then QPSK on sub-channels, then switch back.
    tx_enable = 1'b1; tx_mode = TX_CW;
    repeat (400) @(negedge clk);
    tx_mode = TX_QPSK; tx_sps = 16'd32;
    repeat (800) @(negedge clk);
    tx_mode = TX_CW;
    repeat (100) @(negedge clk);
    tx_enable = 1'b0;
    repeat (TX_LAT + 3) @(negedge clk);
    // Overdrive: full amplitude, weights 1.0: the DAC word must clip.
    for (int s = 0; s < NS; s++) begin
      tx_amp[s] = 16'sd32000;
      for (int m = 0; m < NA; m++) begin tx_w_re[m][s] = COEF_ONE; tx_w_im[m][s] = '0; end
    end
    tx_mode = TX_CW; tx_enable = 1'b1;
    repeat (200) @(negedge clk);
    tx_enable = 1'b0;
    repeat (TX_LAT + 3) @(negedge clk);

    checks++;
    if (rxq.size() != 0 || txq.size() != 0) fail("outputs missing");
    checks++;
    if (n_lens == 0 || n_digital == 0 || n_dump == 0 || n_cap_beam == 0 || n_cap_raw == 0 ||
        n_cw == 0 || n_qpsk == 0 || n_switch < 2 || n_under == 0 || n_dacsat == 0) fail("a mechanism never happened");
    $display("lens %0d digital %0d dumps %0d beam-capture %0d raw-capture %0d cw %0d qpsk %0d switch %0d underflow %0d dac-sat %0d",
             n_lens, n_digital, n_dump, n_cap_beam, n_cap_raw, n_cw, n_qpsk, n_switch, n_under, n_dacsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
