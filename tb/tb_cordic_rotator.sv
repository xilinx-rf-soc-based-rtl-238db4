// tb_cordic_rotator: self-checking test of the CORDIC rotator.
//
// Rotates random complex values (|re|, |im| <= 23000, so the result cannot
// clip) by random phases, and by the four exact quarter turns, and compares
// with (re + j im) * exp(j 2 pi phase / 2^32) computed here in floating point.
// The error must stay within 3 LSB per part; the latency must be ITER + 2 = 18.
module tb_cordic_rotator;
  import mbf_pkg::*;
  localparam int LAT = 18, TOL = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic signed [SAMP_W-1:0] in_re, in_im, out_re, out_im;
  logic [PH_W-1:0] phase;

  cordic_rotator dut (.*);

  int checks = 0, failures = 0, cycle = 0, max_err = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct { real re; real im; int t; } exp_t;
  exp_t q[$];

  task automatic drive(input int xr, input int xi, input logic [31:0] ph);
    exp_t e; real a;
    @(negedge clk);
    in_valid = 1'b1; in_re = SAMP_W'(xr); in_im = SAMP_W'(xi); phase = ph;
    a = 2.0 * 3.14159265358979 * real'(ph) / 4294967296.0;
    e.re = xr * $cos(a) - xi * $sin(a);
    e.im = xr * $sin(a) + xi * $cos(a);
    e.t = cycle + 1;
    q.push_back(e);
  endtask

  function automatic int iabs(input real v);
    return (v < 0.0) ? int'(-v) : int'(v);
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e; int er, ei;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        er = iabs(real'(out_re) - e.re);
        ei = iabs(real'(out_im) - e.im);
        if (er > max_err) max_err = er;
        if (ei > max_err) max_err = ei;
        checks++;
        if (er > TOL || ei > TOL) begin
          failures++;
          $display("got %0d %0d want %f %f", out_re, out_im, e.re, e.im);
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
    rst_n = 1'b0; in_valid = 1'b0; in_re = '0; in_im = '0; phase = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 4; k++) drive(20000, -5000, 32'(k) << 30);
    drive(10000, 0, 32'h2000_0000);   // 45 degrees
    for (int i = 0; i < 3000; i++) begin
      if (($urandom % 7) == 0) begin @(negedge clk); in_valid = 1'b0; end
      else drive(int'($urandom % 46001) - 23000, int'($urandom % 46001) - 23000, $urandom);
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("max error %0d LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
