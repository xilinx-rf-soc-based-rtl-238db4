// tb_cplx_mult: self-checking test of the complex multiplier.
//
// Streams random samples and coefficients (with idle gaps) through the
// default 16 x 16 -> 16-bit, SHIFT 14 multiplier, plus full-scale corner
// cases that must saturate. Each result is compared with a product computed
// here in 64-bit integers (round half up, saturate), the sat flag with the
// expected clipping, and the latency with 3 cycles.
module tb_cplx_mult;
  localparam int A_W = 16, B_W = 16, OUT_W = 16, SHIFT = 14, LAT = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic in_valid;
  logic signed [A_W-1:0] a_re, a_im;
  logic signed [B_W-1:0] b_re, b_im;
  logic out_valid, sat;
  logic signed [OUT_W-1:0] p_re, p_im;

  cplx_mult #(.A_W(A_W), .B_W(B_W), .OUT_W(OUT_W), .SHIFT(SHIFT)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_sat = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { longint re; longint im; bit s; int t; } exp_t;
  exp_t q[$];

  function automatic longint rsat(input longint x, output bit s);
    longint r, mx;
    r  = (x + (longint'(1) <<< (SHIFT - 1))) >>> SHIFT;
    mx = (longint'(1) <<< (OUT_W - 1)) - 1;
    s = 1'b0;
    if (r > mx) begin r = mx; s = 1'b1; end
    if (r < -mx - 1) begin r = -mx - 1; s = 1'b1; end
    return r;
  endfunction

  task automatic drive(input longint ar, ai, br, bi);
    exp_t e; bit s1, s2;
    @(negedge clk);
    in_valid = 1'b1;
    a_re = A_W'(ar); a_im = A_W'(ai); b_re = B_W'(br); b_im = B_W'(bi);
    e.re = rsat(ar * br - ai * bi, s1);
    e.im = rsat(ar * bi + ai * br, s2);
    e.s  = s1 | s2;
    e.t  = cycle + 1;   // input sampled on the next rising edge
    q.push_back(e);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (p_re != OUT_W'(e.re) || p_im != OUT_W'(e.im) || sat != e.s) begin
          failures++;
          $display("mismatch: got %0d %0d sat %0b, want %0d %0d sat %0b", p_re, p_im, sat, e.re, e.im, e.s);
        end
        checks++;
        if (cycle - e.t != LAT - 1) begin
          failures++; $display("latency %0d", cycle - e.t + 1);
        end
        if (sat) n_sat++;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a_re = '0; a_im = '0; b_re = '0; b_im = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // corner cases
    drive(-32768, 0, -32768, 0);          // +2^30 >> 14 = 65536: saturates
    drive(32767, 32767, 16384, 0);        // x * 1.0
    drive(32767, -32768, 0, 16384);       // x * j
    drive(-32768, -32768, 16384, 16384);  // saturates in I? no, Q
    drive(1, 0, 8192, 0);                 // 0.5 rounds up to 1
    drive(-1, 0, 8192, 0);                // -0.5 rounds up to 0
    for (int i = 0; i < 2000; i++) begin
      if (($urandom % 5) == 0) begin
        @(negedge clk); in_valid = 1'b0;
      end else begin
        drive($signed(16'($urandom)), $signed(16'($urandom)), $signed(16'($urandom)), $signed(16'($urandom)));
      end
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
