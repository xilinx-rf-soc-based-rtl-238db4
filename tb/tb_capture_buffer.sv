// tb_capture_buffer: self-checking test of the capture memory.
//
// Arms a capture, feeds more than DEPTH random vectors with idle gaps, and
// checks that busy/done behave (busy while filling, done sticky once DEPTH
// vectors were written, nothing written afterwards), then reads every
// address back and compares with the first DEPTH vectors sent after the arm.
// A second capture is re-armed half way through to check that arm restarts
// at address 0.
module tb_capture_buffer;
  import mbf_pkg::*;
  localparam int N = 4, DEPTH = 1024, AW = 10;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, arm, in_valid, busy, done;
  logic signed [BEAM_W-1:0] in_re [N], in_im [N], rd_re [N], rd_im [N];
  logic [AW-1:0] rd_addr;

  capture_buffer dut (.*);

  int checks = 0, failures = 0;
  logic signed [BEAM_W-1:0] ref_re [DEPTH][N], ref_im [DEPTH][N];

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic capture(input int n_before_rearm);
    int n = 0;
    @(negedge clk); arm = 1'b1; in_valid = 1'b1;   // vector offered with arm is not stored
    for (int c = 0; c < N; c++) begin in_re[c] = BEAM_W'($urandom); in_im[c] = BEAM_W'($urandom); end
    @(negedge clk); arm = 1'b0;
    checks++;
    if (!busy || done) begin failures++; $display("busy/done wrong after arm"); end
    while (n < DEPTH + 50) begin
      if (n_before_rearm > 0 && n == n_before_rearm) begin
        n_before_rearm = 0; n = 0; arm = 1'b1; in_valid = 1'b0;
        @(negedge clk); arm = 1'b0;
      end
      if (($urandom % 5) == 0) in_valid = 1'b0;
      else begin
        in_valid = 1'b1;
        for (int c = 0; c < N; c++) begin
          in_re[c] = BEAM_W'($urandom); in_im[c] = BEAM_W'($urandom);
          if (n < DEPTH) begin ref_re[n][c] = in_re[c]; ref_im[n][c] = in_im[c]; end
        end
        n++;
      end
      @(negedge clk);
      if (n == DEPTH && in_valid) begin
        checks++;
        if (busy || !done) begin failures++; $display("busy/done wrong when full"); end
      end
    end
    in_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (busy || !done) begin failures++; $display("done not sticky"); end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = AW'(a);
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        checks++;
        if (rd_re[c] != ref_re[a][c] || rd_im[c] != ref_im[a][c]) begin
          failures++;
          if (failures < 10) $display("addr %0d ch %0d: got %0d %0d want %0d %0d", a, c, rd_re[c], rd_im[c], ref_re[a][c], ref_im[a][c]);
        end
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; arm = 1'b0; in_valid = 1'b0; rd_addr = '0;
    for (int c = 0; c < N; c++) begin in_re[c] = '0; in_im[c] = '0; end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("busy/done set after reset"); end
    capture(0);
    capture(500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
