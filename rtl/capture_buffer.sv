// capture_buffer: snapshot memory that hands receive samples to the host.
//
// The host studies raw or beamformed receive signals offline (spectra,
// constellations, calibration measurements). Pulsing arm starts a capture:
// the next DEPTH valid input vectors (N_CH complex words) are written to
// consecutive addresses of an on-chip memory, busy is high meanwhile, and done
// rises when the memory is full and stays high until the next arm. The host
// then reads word rd_addr on rd_re/rd_im one clock later. An arm while busy
// restarts the capture. Moving samples to the host follows the design
// description; depth, memory layout and the plain read port (in place of the
// host bus and DMA) are this design's choices.
//
// Timing: one vector written per clock; read latency 1.
module capture_buffer
  import mbf_pkg::*;
#(
  parameter int unsigned N_CH  = N_BEAM,
  parameter int unsigned W     = BEAM_W,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                arm,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re [N_CH],
  input  logic signed [W-1:0] in_im [N_CH],
  output logic                busy,
  output logic                done,
  input  logic [AW-1:0]       rd_addr,
  output logic signed [W-1:0] rd_re [N_CH],
  output logic signed [W-1:0] rd_im [N_CH]
);
  localparam int unsigned WW = 2 * W * N_CH;

  logic [WW-1:0] mem [DEPTH];
  logic [WW-1:0] wdata, rdata;
  logic [AW-1:0] wptr;
  logic          we;

  always_comb begin
    for (int k = 0; k < N_CH; k++) begin
      wdata[2*W*k     +: W] = in_re[k];
      wdata[2*W*k + W +: W] = in_im[k];
    end
  end

  assign we = busy && in_valid && !arm;

  always_ff @(posedge clk) begin
    if (we) mem[wptr] <= wdata;
    rdata <= mem[rd_addr];
  end

  always_comb begin
    for (int k = 0; k < N_CH; k++) begin
      rd_re[k] = rdata[2*W*k     +: W];
      rd_im[k] = rdata[2*W*k + W +: W];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      wptr <= '0;
    end else if (arm) begin
      busy <= 1'b1;
      done <= 1'b0;
      wptr <= '0;
    end else if (we) begin
      wptr <= wptr + 1'b1;
      if (wptr == AW'(DEPTH - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // A capture is either running or finished, never both.
  a_busy_xor_done: assert property (@(posedge clk) disable iff (!rst_n) !(busy && done));
endmodule
