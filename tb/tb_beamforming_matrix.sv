// tb_beamforming_matrix: self-checking test of the 4 x 4 beamformer.
//
// Phase 1 uses identity weights (1.0 on the diagonal), so every output must
// equal its input. Phase 2 uses random complex weights and random inputs
// with idle gaps; each output is compared with sum_c W[r][c] x[c] computed
// here in 64-bit integers, then rounded (half up, 14 fraction bits) and
// saturated to 18 bits. Full-scale inputs with full-scale weights must
// saturate and raise sat. Latency must be 4 cycles.
module tb_beamforming_matrix;
  import mbf_pkg::*;
  localparam int NI = 4, NO = 4, LAT = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic signed [SAMP_W-1:0] in_re [NI], in_im [NI];
  logic signed [COEF_W-1:0] w_re [NO][NI], w_im [NO][NI];
  logic signed [BEAM_W-1:0] out_re [NO], out_im [NO];
  logic [NO-1:0] sat;

  beamforming_matrix dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_sat = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint re [NO]; longint im [NO]; bit s [NO]; int t; } exp_t;
  exp_t q[$];

  function automatic longint rsat(input longint x, output bit s);
    longint r = (x + 8192) >>> 14;
    s = 1'b0;
    if (r > 131071) begin r = 131071; s = 1'b1; end
    if (r < -131072) begin r = -131072; s = 1'b1; end
    return r;
  endfunction

  task automatic drive(input bit full_scale);
    exp_t e; bit s1, s2;
    @(negedge clk);
    in_valid = 1'b1;
    for (int c = 0; c < NI; c++) begin
      in_re[c] = full_scale ? 16'sh7fff : SAMP_W'($urandom);
      in_im[c] = full_scale ? 16'sh7fff : SAMP_W'($urandom);
    end
    for (int r = 0; r < NO; r++) begin
      longint sr = 0, si = 0;
      for (int c = 0; c < NI; c++) begin
        sr += longint'(in_re[c]) * w_re[r][c] - longint'(in_im[c]) * w_im[r][c];
        si += longint'(in_re[c]) * w_im[r][c] + longint'(in_im[c]) * w_re[r][c];
      end
      e.re[r] = rsat(sr, s1);
      e.im[r] = rsat(si, s2);
      e.s[r]  = s1 | s2;
    end
    e.t = cycle + 1;
    q.push_back(e);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        for (int r = 0; r < NO; r++) begin
          checks++;
          if (out_re[r] != BEAM_W'(e.re[r]) || out_im[r] != BEAM_W'(e.im[r]) || sat[r] != e.s[r]) begin
            failures++;
            $display("beam %0d: got %0d %0d sat %0b want %0d %0d sat %0b", r, out_re[r], out_im[r], sat[r], e.re[r], e.im[r], e.s[r]);
          end
          if (sat[r]) n_sat++;
        end
        checks++;
        if (cycle - e.t != LAT - 1) begin failures++; $display("latency %0d", cycle - e.t + 1); end
      end
    end
  end

  initial begin
    #300000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle(input int n);
    @(negedge clk); in_valid = 1'b0;
    repeat (n) @(negedge clk);
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    for (int c = 0; c < NI; c++) begin in_re[c] = '0; in_im[c] = '0; end
    for (int r = 0; r < NO; r++)
      for (int c = 0; c < NI; c++) begin
        w_re[r][c] = (r == c) ? COEF_ONE : '0;
        w_im[r][c] = '0;
      end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 100; i++) drive(1'b0);
    idle(LAT + 1);
    for (int b = 0; b < 8; b++) begin
      for (int r = 0; r < NO; r++)
        for (int c = 0; c < NI; c++) begin
          w_re[r][c] = COEF_W'($urandom);
          w_im[r][c] = COEF_W'($urandom);
        end
      for (int i = 0; i < 200; i++) begin
        if (($urandom % 6) == 0) begin @(negedge clk); in_valid = 1'b0; end
        else drive(1'b0);
      end
      idle(LAT + 1);
    end
    // full scale: all weights 1.0 + j1.0 must saturate
    for (int r = 0; r < NO; r++)
      for (int c = 0; c < NI; c++) begin w_re[r][c] = COEF_ONE; w_im[r][c] = -COEF_ONE; end
    for (int i = 0; i < 5; i++) drive(1'b1);
    idle(10);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
