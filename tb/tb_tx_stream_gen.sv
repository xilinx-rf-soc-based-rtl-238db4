// tb_tx_stream_gen: self-checking test of one transmit stream source.
//
// The block runs with its default 8 lanes (samples per clock). It sends a CW
// tone, then QPSK with 32 samples per symbol on a negative-frequency
// sub-channel with a symbol source that is sometimes not ready (forcing
// underflows), then QPSK with 8 and with 3 (rounded up to one word) samples
// per symbol, switches to CW while running and back to QPSK with 24. A model
// here keeps its own NCO phase and symbol counter: it predicts when sym_ready
// and underflow must be high, which symbol each sample carries, and every
// sample k = word * 8 + lane as sym * exp(j 2 pi k ftw / 2^32), which must
// match within 3 LSB. Each word must leave ITER + 3 = 19 cycles after the
// clock edge that formed it.
module tb_tx_stream_gen;
  import mbf_pkg::*;
  localparam int LAT = 19, TOL = 3, L = SPC;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, enable, sym_valid, sym_ready, underflow, out_valid;
  tx_mode_e mode;
  logic [PH_W-1:0] ftw;
  logic signed [SAMP_W-1:0] amp, out_re [L], out_im [L];
  logic [15:0] sps;
  logic [1:0]  sym_bits;

  tx_stream_gen dut (.*);

  int checks = 0, failures = 0, cycle = 0, max_err = 0;
  int n_under = 0, n_taken = 0, n_cw = 0, n_qpsk = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { real re [L]; real im [L]; int t; } exp_t;
  exp_t q[$];

  // Model state
  longint    k;       // sample index since enable
  int        mcnt;    // samples left in the current symbol
  real       cur_re, cur_im;
  logic [31:0] mphase;

  always @(posedge clk) begin
    if (!rst_n || !enable) begin
      k = 0; mcnt = 0; mphase = '0; cur_re = 0.0; cur_im = 0.0;
    end else begin
      exp_t e; real a; bit due; int wps;
      wps = (int'(sps) < L) ? 1 : int'(sps) / L;
      due = (mode == TX_QPSK) && (mcnt == 0);
      checks++;
      if (sym_ready != due) begin failures++; $display("sym_ready %0b want %0b at k=%0d", sym_ready, due, k); end
      checks++;
      if (underflow != (due && !sym_valid)) begin failures++; $display("underflow wrong at k=%0d", k); end
      if (mode == TX_CW) begin
        cur_re = real'(amp); cur_im = 0.0; mcnt = 0; n_cw++;
      end else begin
        n_qpsk++;
        if (due) begin
          if (sym_valid) begin
            cur_re = sym_bits[1] ? -real'(amp) : real'(amp);
            cur_im = sym_bits[0] ? -real'(amp) : real'(amp);
            n_taken++;
          end else begin
            cur_re = 0.0; cur_im = 0.0; n_under++;
          end
          mcnt = wps - 1;
        end else mcnt--;
      end
      for (int l = 0; l < L; l++) begin
        a = 2.0 * 3.14159265358979 * real'(mphase) / 4294967296.0;
        e.re[l] = cur_re * $cos(a) - cur_im * $sin(a);
        e.im[l] = cur_re * $sin(a) + cur_im * $cos(a);
        mphase = mphase + ftw;
      end
      e.t = cycle;
      q.push_back(e);
      k++;
    end
  end

  function automatic int iabs(input real v);
    return (v < 0.0) ? int'(-v) : int'(v);
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e; int er, ei;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        for (int l = 0; l < L; l++) begin
          er = iabs(real'(out_re[l]) - e.re[l]);
          ei = iabs(real'(out_im[l]) - e.im[l]);
          if (er > max_err) max_err = er;
          if (ei > max_err) max_err = ei;
          checks++;
          if (er > TOL || ei > TOL) begin failures++; $display("lane %0d got %0d %0d want %f %f", l, out_re[l], out_im[l], e.re[l], e.im[l]); end
        end
        checks++;
        if (cycle - e.t != LAT) begin failures++; $display("latency %0d", cycle - e.t); end
      end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Symbol source: random bits, valid most of the time.
  always @(negedge clk) begin
    sym_bits  <= 2'($urandom);
    sym_valid <= ($urandom % 8) != 0;
  end

  initial begin
    rst_n = 1'b0; enable = 1'b0; mode = TX_CW; ftw = 32'h0123_4567; amp = 16'sd12000; sps = 16'd32;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    enable = 1'b1;
    repeat (300) @(negedge clk);
    enable = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    mode = TX_QPSK; ftw = 32'hF000_0000; amp = 16'sd9000; sps = 16'd32;
    enable = 1'b1;
    repeat (800) @(negedge clk);
    sps = 16'd8;                     // one word per symbol
    repeat (200) @(negedge clk);
    sps = 16'd3;                     // below one word: one word per symbol
    repeat (100) @(negedge clk);
    mode = TX_CW;                    // switch while running
    repeat (100) @(negedge clk);
    mode = TX_QPSK; sps = 16'd24;
    repeat (200) @(negedge clk);
    enable = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d samples missing", q.size()); end
    checks++;
    if (n_under == 0 || n_taken == 0 || n_cw == 0 || n_qpsk == 0) begin
      failures++; $display("mechanism missing: underflow %0d taken %0d cw %0d qpsk %0d", n_under, n_taken, n_cw, n_qpsk);
    end
    $display("symbols %0d underflows %0d max error %0d LSB", n_taken, n_under, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
