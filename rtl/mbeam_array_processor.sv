// mbeam_array_processor: FPGA baseband of a fully digital multi-beam node.
//
// One node has NA antenna elements, each with its own RF chain and its own
// I/Q pair of data converters. Because every element is digitised, any number
// of beams can be formed at once from the same samples; here NB receive beams
// and NS transmit streams. The converters run at fs = 1966.08 MSps, so every
// sample port carries L = SPC consecutive samples of each chain per clock
// (index [chain][lane], lane 0 earliest) and the fabric clock is fs / L.
//
// Receive path (ADC words in), per lane:
//   rx_calibration      per-chain complex gain/phase correction (latency 3)
//   beamforming_matrix  NB x NA complex weights -> beam outputs (latency 4)
// then, across lanes:
//   beam_power_integrator, one per beam: integrate-and-dump power meter
//   capture_buffer      snapshot of the beams, or of the raw ADC words
//                       (cap_src = 1), CAP_DEPTH words of L samples
// Beam samples reach beam_re/beam_im 7 cycles after their ADC words.
// With identity weights each beam is one chain; that is how a lens-fed array,
// whose lens already forms the beams, is operated.
//
// Transmit path (DAC words out):
//   tx_stream_gen, one per stream: CW tone or QPSK on the stream's NCO
//                       sub-channel, L samples per clock (latency ITER+3 = 19)
//   beamforming_matrix  per lane, NA x NS precoder, each stream steered with
//                       its own weight vector, rounded to DAC_W bits (4)
//
// All weights, coefficients, frequencies and lengths are static inputs
// written by the host processor; ADC and DAC words are exchanged with the
// converter tiles as ports. The structure (calibrating multipliers, parallel
// beamformers, integrators, tones and sub-channel streams) follows the design
// description; the lane count, fixed-point formats, latencies and control
// ports are this design's.
module mbeam_array_processor
  import mbf_pkg::*;
#(
  parameter int unsigned NA        = N_ANT,
  parameter int unsigned NB        = N_BEAM,
  parameter int unsigned NS        = N_STREAM,
  parameter int unsigned L         = SPC,
  parameter int unsigned CAP_DEPTH = 1024,
  localparam int unsigned CAW      = $clog2(CAP_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,

  // Receive: converter side
  input  logic                     adc_valid,
  input  logic signed [ADC_W-1:0]  adc_re [NA][L],
  input  logic signed [ADC_W-1:0]  adc_im [NA][L],
  // Receive: configuration
  input  logic signed [COEF_W-1:0] cal_re [NA],
  input  logic signed [COEF_W-1:0] cal_im [NA],
  input  logic signed [COEF_W-1:0] rx_w_re [NB][NA],
  input  logic signed [COEF_W-1:0] rx_w_im [NB][NA],
  input  logic [LEN_W-1:0]         int_len,   // words of L samples
  // Receive: results
  output logic                     beam_valid,
  output logic signed [BEAM_W-1:0] beam_re [NB][L],
  output logic signed [BEAM_W-1:0] beam_im [NB][L],
  output logic [ACC_W-1:0]         beam_power [NB],
  output logic [NB-1:0]            beam_power_valid,
  // Capture buffer
  input  logic                     cap_arm,
  input  logic                     cap_src,   // 0: beams, 1: raw ADC words
  output logic                     cap_busy,
  output logic                     cap_done,
  input  logic [CAW-1:0]           cap_rd_addr,
  output logic signed [BEAM_W-1:0] cap_rd_re [NB][L],
  output logic signed [BEAM_W-1:0] cap_rd_im [NB][L],

  // Transmit: configuration and symbols
  input  logic                     tx_enable,
  input  tx_mode_e                 tx_mode,
  input  logic [15:0]              tx_sps,    // samples per symbol, multiple of L
  input  logic [PH_W-1:0]          tx_ftw [NS],
  input  logic signed [SAMP_W-1:0] tx_amp [NS],
  input  logic signed [COEF_W-1:0] tx_w_re [NA][NS],
  input  logic signed [COEF_W-1:0] tx_w_im [NA][NS],
  input  logic [1:0]               tx_sym_bits [NS],
  input  logic [NS-1:0]            tx_sym_valid,
  output logic [NS-1:0]            tx_sym_ready,
  // Transmit: converter side
  output logic                     dac_valid,
  output logic signed [DAC_W-1:0]  dac_re [NA][L],
  output logic signed [DAC_W-1:0]  dac_im [NA][L],

  // Status strobes
  output logic [NA-1:0]            rx_cal_sat,
  output logic [NB-1:0]            rx_beam_sat,
  output logic [NA-1:0]            tx_dac_sat,
  output logic [NS-1:0]            tx_underflow
);
  // ---------------- receive ----------------
  logic [L-1:0]             cal_valid, bf_valid;
  logic [NA-1:0]            cal_sat_l  [L];
  logic [NB-1:0]            beam_sat_l [L];
  logic signed [BEAM_W-1:0] beam_l_re [L][NB];
  logic signed [BEAM_W-1:0] beam_l_im [L][NB];

  for (genvar l = 0; l < L; l++) begin : g_rx_lane
    logic signed [ADC_W-1:0]  a_re [NA], a_im [NA];
    logic signed [SAMP_W-1:0] c_re [NA], c_im [NA];
    always_comb
      for (int a = 0; a < NA; a++) begin
        a_re[a] = adc_re[a][l];
        a_im[a] = adc_im[a][l];
      end

    rx_calibration #(.N_CH(NA)) u_cal (
      .clk, .rst_n, .in_valid(adc_valid), .adc_re(a_re), .adc_im(a_im),
      .coef_re(cal_re), .coef_im(cal_im),
      .out_valid(cal_valid[l]), .out_re(c_re), .out_im(c_im), .sat(cal_sat_l[l])
    );

    beamforming_matrix #(.N_IN(NA), .N_OUT(NB), .IN_W(SAMP_W), .OUT_W(BEAM_W),
                         .CW(COEF_W), .SHIFT(COEF_FRAC)) u_rx_bf (
      .clk, .rst_n, .in_valid(cal_valid[l]), .in_re(c_re), .in_im(c_im),
      .w_re(rx_w_re), .w_im(rx_w_im),
      .out_valid(bf_valid[l]), .out_re(beam_l_re[l]), .out_im(beam_l_im[l]), .sat(beam_sat_l[l])
    );
  end

  assign beam_valid = &bf_valid;
  always_comb begin
    rx_cal_sat  = '0;
    rx_beam_sat = '0;
    for (int l = 0; l < L; l++) begin
      rx_cal_sat  = rx_cal_sat  | cal_sat_l[l];
      rx_beam_sat = rx_beam_sat | beam_sat_l[l];
      for (int b = 0; b < NB; b++) begin
        beam_re[b][l] = beam_l_re[l][b];
        beam_im[b][l] = beam_l_im[l][b];
      end
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_int
    beam_power_integrator #(.LANES(L)) u_int (
      .clk, .rst_n, .in_valid(beam_valid), .in_re(beam_re[b]), .in_im(beam_im[b]),
      .int_len, .power(beam_power[b]), .power_valid(beam_power_valid[b])
    );
  end

  // Capture source: beams, or the raw words of the first NB chains.
  // Channel b*L + l of the buffer holds beam (or chain) b, lane l.
  logic                     cap_in_valid;
  logic signed [BEAM_W-1:0] cap_in_re [NB*L], cap_in_im [NB*L];
  logic signed [BEAM_W-1:0] cap_out_re [NB*L], cap_out_im [NB*L];
  always_comb begin
    cap_in_valid = cap_src ? adc_valid : beam_valid;
    for (int b = 0; b < NB; b++)
      for (int l = 0; l < L; l++) begin
        if (cap_src && b < NA) begin
          cap_in_re[b*L+l] = BEAM_W'(adc_re[b][l]);
          cap_in_im[b*L+l] = BEAM_W'(adc_im[b][l]);
        end else if (cap_src) begin
          cap_in_re[b*L+l] = '0;
          cap_in_im[b*L+l] = '0;
        end else begin
          cap_in_re[b*L+l] = beam_re[b][l];
          cap_in_im[b*L+l] = beam_im[b][l];
        end
        cap_rd_re[b][l] = cap_out_re[b*L+l];
        cap_rd_im[b][l] = cap_out_im[b*L+l];
      end
  end

  capture_buffer #(.N_CH(NB*L), .W(BEAM_W), .DEPTH(CAP_DEPTH)) u_cap (
    .clk, .rst_n, .arm(cap_arm), .in_valid(cap_in_valid), .in_re(cap_in_re), .in_im(cap_in_im),
    .busy(cap_busy), .done(cap_done), .rd_addr(cap_rd_addr), .rd_re(cap_out_re), .rd_im(cap_out_im)
  );

  // ---------------- transmit ----------------
  logic [NS-1:0]            st_valid;
  logic signed [SAMP_W-1:0] st_re [NS][L];
  logic signed [SAMP_W-1:0] st_im [NS][L];

  for (genvar s = 0; s < NS; s++) begin : g_tx
    tx_stream_gen #(.LANES(L)) u_gen (
      .clk, .rst_n, .enable(tx_enable), .mode(tx_mode), .ftw(tx_ftw[s]), .amp(tx_amp[s]),
      .sps(tx_sps), .sym_bits(tx_sym_bits[s]), .sym_valid(tx_sym_valid[s]),
      .sym_ready(tx_sym_ready[s]), .underflow(tx_underflow[s]),
      .out_valid(st_valid[s]), .out_re(st_re[s]), .out_im(st_im[s])
    );
  end

  logic [L-1:0]  dac_valid_l;
  logic [NA-1:0] dac_sat_l [L];

  for (genvar l = 0; l < L; l++) begin : g_tx_lane
    logic signed [SAMP_W-1:0] s_re [NS], s_im [NS];
    logic signed [DAC_W-1:0]  d_re [NA], d_im [NA];
    always_comb
      for (int s = 0; s < NS; s++) begin
        s_re[s] = st_re[s][l];
        s_im[s] = st_im[s][l];
      end

    beamforming_matrix #(.N_IN(NS), .N_OUT(NA), .IN_W(SAMP_W), .OUT_W(DAC_W),
                         .CW(COEF_W), .SHIFT(COEF_FRAC + 2)) u_tx_bf (
      .clk, .rst_n, .in_valid(&st_valid), .in_re(s_re), .in_im(s_im),
      .w_re(tx_w_re), .w_im(tx_w_im),
      .out_valid(dac_valid_l[l]), .out_re(d_re), .out_im(d_im), .sat(dac_sat_l[l])
    );

    always_comb
      for (int a = 0; a < NA; a++) begin
        dac_re[a][l] = d_re[a];
        dac_im[a][l] = d_im[a];
      end
  end

  assign dac_valid = &dac_valid_l;
  always_comb begin
    tx_dac_sat = '0;
    for (int l = 0; l < L; l++) tx_dac_sat = tx_dac_sat | dac_sat_l[l];
  end

  // Usage rule: in QPSK mode a symbol spans a whole number of words.
  a_sps_lanes: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_enable && tx_mode == TX_QPSK) |-> (tx_sps != '0 && tx_sps % 16'(L) == '0));
endmodule
