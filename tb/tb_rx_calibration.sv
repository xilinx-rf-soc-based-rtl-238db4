// tb_rx_calibration: self-checking test of the per-chain calibration.
//
// Four chains of random 12-bit ADC words are corrected with four different
// random Q2.14 coefficients (changed between bursts), then with unity
// coefficients, which must return every sample unchanged. Outputs are
// compared with products computed here (round half up, 16-bit saturation)
// and the latency with 3 cycles.
module tb_rx_calibration;
  import mbf_pkg::*;
  localparam int N = 4, LAT = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic signed [ADC_W-1:0]  adc_re [N], adc_im [N];
  logic signed [COEF_W-1:0] coef_re [N], coef_im [N];
  logic signed [SAMP_W-1:0] out_re [N], out_im [N];
  logic [N-1:0] sat;

  rx_calibration dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint re [N]; longint im [N]; int t; } exp_t;
  exp_t q[$];

  function automatic longint rsat(input longint x);
    longint r = (x + 8192) >>> 14;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  task automatic drive_random();
    exp_t e;
    @(negedge clk);
    in_valid = 1'b1;
    for (int k = 0; k < N; k++) begin
      adc_re[k] = ADC_W'($urandom);
      adc_im[k] = ADC_W'($urandom);
      e.re[k] = rsat(longint'(adc_re[k]) * coef_re[k] - longint'(adc_im[k]) * coef_im[k]);
      e.im[k] = rsat(longint'(adc_re[k]) * coef_im[k] + longint'(adc_im[k]) * coef_re[k]);
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
        for (int k = 0; k < N; k++) begin
          checks++;
          if (out_re[k] != SAMP_W'(e.re[k]) || out_im[k] != SAMP_W'(e.im[k])) begin
            failures++;
            $display("chain %0d: got %0d %0d want %0d %0d", k, out_re[k], out_im[k], e.re[k], e.im[k]);
          end
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

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    for (int k = 0; k < N; k++) begin
      adc_re[k] = '0; adc_im[k] = '0; coef_re[k] = COEF_ONE; coef_im[k] = '0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // unity coefficients: samples pass unchanged
    for (int i = 0; i < 200; i++) drive_random();
    for (int b = 0; b < 10; b++) begin
      @(negedge clk); in_valid = 1'b0;
      repeat (LAT + 1) @(negedge clk);
      for (int k = 0; k < N; k++) begin
        coef_re[k] = COEF_W'($urandom);
        coef_im[k] = COEF_W'($urandom);
      end
      for (int i = 0; i < 200; i++) drive_random();
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
