// hpc_pkg: shared types and constants of the neuromorphic audio denoiser.
//
// Samples and spectrum components are 16-bit two's complement, as in the
// paper's FPGA data path ("16-bit data configuration for the real and
// imaginary parts"). Frame geometry (512-sample window, hop 128, 256 bands)
// is the paper's. Phase is a 16-bit signed angle in which 2^15 stands for pi
// (this design's choice). Spike events travel between the SNN encoder and
// decoder as address-event words (band address plus time step), an encoding
// this design chose.
package hpc_pkg;

  localparam int SAMPLE_W = 16;          // audio sample and FFT component width
  localparam int FFT_N    = 512;         // STFT window length
  localparam int HOP_LEN  = 128;         // STFT hop length
  localparam int NBANDS   = 256;         // frequency bands handed to the SNN
  localparam int MAG_W    = 18;          // CORDIC magnitude, carries the CORDIC gain
  localparam int PHASE_W  = 16;          // 2^15 == pi
  localparam int MASK_W   = 16;          // unsigned Q1.15, 32768 == 1.0

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic [MAG_W-1:0]          mag;
    logic signed [PHASE_W-1:0] phase;
  } polar_t;

  // CORDIC: atan(2^-i) in phase units (2^15 == pi), i = 0..15, and
  // 1/K^2 in Q1.15 where K = prod sqrt(1 + 2^-2i) ~ 1.64676 is the gain of
  // one 16-step CORDIC pass.
  localparam int CORDIC_ITER = 16;
  localparam logic signed [15:0] CORDIC_ATAN [CORDIC_ITER] = '{
    16'sd8192, 16'sd4836, 16'sd2555, 16'sd1297, 16'sd651, 16'sd326, 16'sd163, 16'sd81,
    16'sd41,   16'sd20,   16'sd10,   16'sd5,    16'sd3,   16'sd1,   16'sd1,   16'sd0};
  localparam int CORDIC_INVK2 = 12083;

  // Spike event between SNN encoder and decoder: a spike of neuron 'band' in
  // time step 'step', or (eof = 1) the end of a frame's spike window, which
  // also carries the coding used for that frame.
  localparam int STEP_W = 8;
  typedef enum logic {
    CODE_RATE = 1'b0,   // rate coding, leaky integrate-and-fire
    CODE_TTFS = 1'b1    // time-to-first-spike coding
  } code_mode_e;

  typedef struct packed {
    logic                  eof;
    code_mode_e            mode;
    logic [STEP_W-1:0]     step;
    logic [7:0]            band;
  } spike_event_t;

  // Saturate a wide signed value into SAMPLE_W bits.
  function automatic logic signed [SAMPLE_W-1:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[SAMPLE_W-1:0];
  endfunction

endpackage
