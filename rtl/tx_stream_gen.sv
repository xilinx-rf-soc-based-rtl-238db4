// tx_stream_gen: baseband source for one transmit stream.
//
// Two modes. TX_CW sends a constant-amplitude continuous-wave tone at the
// stream's NCO frequency, f = ftw / 2^32 * fs; with a different ftw per
// stream each transmit chain shows its own spectral line. TX_QPSK sends QPSK
// symbols shifted onto the stream's frequency sub-channel: each symbol of two
// bits is mapped to (+/-amp, +/-amp), bit 1 giving the sign of I and bit 0
// the sign of Q (0 = +, 1 = -), held for sps samples (rectangular pulse) and
// rotated by the running NCO phase in a CORDIC.
// CW tones, QPSK streams and one sub-channel per stream follow the design
// description; the mapping, pulse shape, NCO and CORDIC are this design's.
//
// Every clock produces a word of LANES consecutive samples, lane 0 first:
// sample k = word * LANES + l carries NCO phase k * ftw, so the accumulator
// advances by LANES * ftw per clock and lane l adds l * ftw. One CORDIC
// rotates each lane. A symbol lasts sps / LANES words (sps is expected to be
// a multiple of LANES; smaller values give one word per symbol).
//
// Symbols arrive on a valid/ready port: sym_ready is high in the cycle a
// symbol is due (enable, QPSK mode, word counter at zero); a transfer happens
// when sym_valid is also high. If no symbol is offered when one is due, a zero
// symbol is sent for that period and underflow pulses. amp must lie in
// 0 .. 2^(W-1)-1.
//
// Timing: while enable is high one word per clock; a word leaves ITER + 3
// cycles after the clock edge that formed it. Dropping enable resets phase
// and symbol counter.
module tx_stream_gen
  import mbf_pkg::*;
#(
  parameter int unsigned LANES = SPC,
  parameter int unsigned W     = SAMP_W,
  parameter int unsigned PHW   = PH_W,
  parameter int unsigned ITER  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  tx_mode_e            mode,
  input  logic [PHW-1:0]      ftw,
  input  logic signed [W-1:0] amp,
  input  logic [15:0]         sps,
  input  logic [1:0]          sym_bits,
  input  logic                sym_valid,
  output logic                sym_ready,
  output logic                underflow,
  output logic                out_valid,
  output logic signed [W-1:0] out_re [LANES],
  output logic signed [W-1:0] out_im [LANES]
);
  logic [PHW-1:0]      acc;              // NCO phase of lane 0
  logic [15:0]         cnt;              // words left in the current symbol
  logic [15:0]         words_per_sym;
  logic [PHW-1:0]      ph_q [LANES];
  logic signed [W-1:0] s_re, s_im;
  logic                s_vld;
  logic [LANES-1:0]    r_vld;

  assign words_per_sym = (sps < 16'(LANES)) ? 16'd1 : sps / 16'(LANES);
  assign sym_ready = enable && (mode == TX_QPSK) && (cnt == '0);
  assign underflow = sym_ready && !sym_valid;

  always_ff @(posedge clk) begin
    if (!rst_n || !enable) begin
      acc   <= '0;
      cnt   <= '0;
      s_vld <= 1'b0;
      s_re  <= '0;
      s_im  <= '0;
      for (int l = 0; l < LANES; l++) ph_q[l] <= '0;
    end else begin
      acc   <= acc + PHW'(LANES) * ftw;
      for (int l = 0; l < LANES; l++) ph_q[l] <= acc + PHW'(l) * ftw;
      s_vld <= 1'b1;
      if (mode == TX_CW) begin
        s_re <= amp;
        s_im <= '0;
        cnt  <= '0;
      end else if (cnt == '0) begin
        if (sym_valid) begin
          s_re <= sym_bits[1] ? -amp : amp;
          s_im <= sym_bits[0] ? -amp : amp;
        end else begin
          s_re <= '0;
          s_im <= '0;
        end
        cnt <= words_per_sym - 1'b1;
      end else begin
        cnt <= cnt - 1'b1;
      end
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    cordic_rotator #(.W(W), .PHW(PHW), .ITER(ITER)) u_rot (
      .clk, .rst_n, .in_valid(s_vld), .in_re(s_re), .in_im(s_im), .phase(ph_q[l]),
      .out_valid(r_vld[l]), .out_re(out_re[l]), .out_im(out_im[l])
    );
  end
  assign out_valid = &r_vld;

  // Usage rules: a non-negative amplitude (its negation must not overflow),
  // and a symbol is only offered as ready in QPSK mode.
  a_amp_range: assert property (@(posedge clk) disable iff (!rst_n) enable |-> !amp[W-1]);
  a_ready_mode: assert property (@(posedge clk) disable iff (!rst_n) sym_ready |-> mode == TX_QPSK);
endmodule
