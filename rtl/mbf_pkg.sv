// mbf_pkg: constants shared by the multi-beam array baseband.
//
// Array and converter sizes follow the design description: four antenna
// elements per node, four simultaneous beams, four transmit streams, 12-bit ADC
// words and 14-bit DAC words. The internal fixed-point formats (16-bit
// calibrated samples, 18-bit beam samples, 16-bit Q2.14 coefficients, 32-bit
// NCO phase) are choices of this design, as is SPC: the converters run at
// 1966.08 MSps, so the fabric takes SPC = 8 consecutive samples of every
// chain per clock, at fs / 8 = 245.76 MHz.
package mbf_pkg;
  localparam int unsigned N_ANT     = 4;   // antenna elements / RF chains
  localparam int unsigned N_BEAM    = 4;   // simultaneous receive beams
  localparam int unsigned N_STREAM  = 4;   // transmit streams
  localparam int unsigned SPC       = 8;   // samples per clock per chain
  localparam int unsigned ADC_W     = 12;  // RF-ADC word
  localparam int unsigned DAC_W     = 14;  // RF-DAC word
  localparam int unsigned SAMP_W    = 16;  // calibrated receive sample
  localparam int unsigned BEAM_W    = 18;  // receive beam sample
  localparam int unsigned COEF_W    = 16;  // complex coefficient, Q2.14
  localparam int unsigned COEF_FRAC = 14;
  localparam int unsigned PH_W      = 32;  // NCO phase, 2^32 = one turn
  localparam int unsigned ACC_W     = 64;  // power integrator accumulator
  localparam int unsigned LEN_W     = 32;  // integration length word

  // Coefficient value 1.0 + j0 in Q2.14.
  localparam logic signed [COEF_W-1:0] COEF_ONE = 16'sd16384;

  typedef enum logic {TX_CW = 1'b0, TX_QPSK = 1'b1} tx_mode_e;
endpackage
