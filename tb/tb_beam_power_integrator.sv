// tb_beam_power_integrator: self-checking test of the integrate-and-dump
// power meter.
//
// Words of 8 random 18-bit beam samples (the default LANES) arrive with
// random idle gaps. The integration length, in words, is changed between
// runs (7, 1, 0 -> treated as 1, 64). For each interval the expected sum of
// I^2 + Q^2 over all its samples is computed here; the reported power must
// match it, power_valid must come exactly 2 cycles after the interval's last
// word, and the number of reports must equal the number of complete
// intervals.
module tb_beam_power_integrator;
  import mbf_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, power_valid;
  localparam int LANES = SPC;
  logic signed [BEAM_W-1:0] in_re [LANES], in_im [LANES];
  logic [LEN_W-1:0] int_len;
  logic [ACC_W-1:0] power;

  beam_power_integrator dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint p; int t; } exp_t;
  exp_t q[$];
  longint run_sum;
  int     run_cnt;

  task automatic run(input int len, input int n_samples);
    int eff = (len == 0) ? 1 : len;
    @(negedge clk); in_valid = 1'b0;
    int_len = LEN_W'(len);
    // restart from reset so every run starts on an interval boundary
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    run_sum = 0; run_cnt = 0;
    for (int i = 0; i < n_samples; ) begin
      @(negedge clk);
      if (($urandom % 4) == 0) in_valid = 1'b0;
      else begin
        in_valid = 1'b1;
        for (int l = 0; l < LANES; l++) begin
          in_re[l] = BEAM_W'($urandom);
          in_im[l] = BEAM_W'($urandom);
          run_sum += longint'(in_re[l]) * in_re[l] + longint'(in_im[l]) * in_im[l];
        end
        run_cnt++;
        i++;
        if (run_cnt == eff) begin
          exp_t e;
          e.p = run_sum; e.t = cycle + 1;
          q.push_back(e);
          run_sum = 0; run_cnt = 0;
        end
      end
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("len %0d: %0d reports missing", len, q.size()); q.delete(); end
  endtask

  always @(posedge clk) begin
    if (rst_n && power_valid) begin
      exp_t e;
      if (q.size() == 0) begin failures++; $display("unexpected report"); end
      else begin
        e = q.pop_front();
        checks++;
        if (power != ACC_W'(e.p)) begin failures++; $display("power %0d want %0d", power, e.p); end
        checks++;
        if (cycle - e.t != 1) begin failures++; $display("report %0d cycles after last sample", cycle - e.t + 1); end
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

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; int_len = 32'd7;
    for (int l = 0; l < LANES; l++) begin in_re[l] = '0; in_im[l] = '0; end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    run(7, 700);
    run(1, 200);
    run(0, 100);
    run(64, 1280);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
