// ap_pkg: types and constants shared by the near-memory 2D FFT design.
//
// A sample is one complex value of 64 bits, a 32-bit signed fixed-point real
// part and a 32-bit signed fixed-point imaginary part. A memory access vector is
// 256 bits wide and so carries K = 4 samples; K is also the number of
// consecutive rows whose 1D FFT results are buffered on chip before they are
// written back transposed. The 64-bit sample and 256-bit access width (K = 4)
// follow the paper's example for an HBM2 channel; the fixed-point format
// (instead of single-precision floating point) is this design's own choice.
package ap_pkg;

  localparam int unsigned SAMPLE_W    = 64;                 // bits per complex sample
  localparam int unsigned COMP_W      = SAMPLE_W / 2;       // bits per real/imag part
  localparam int unsigned ACCESS_W    = 256;                // memory access vector width
  localparam int unsigned K           = ACCESS_W / SAMPLE_W; // samples per vector (k = 4)
  localparam int unsigned TW_W        = 18;                 // twiddle factor width (Q2.16)
  localparam int unsigned TW_FRAC     = 16;                 // twiddle fraction bits
  localparam int unsigned ADDR_W      = 32;                 // vector address width

  typedef struct packed {
    logic signed [COMP_W-1:0] im;
    logic signed [COMP_W-1:0] re;
  } sample_t;

  // One memory access vector: sample m sits in bits [64*m +: 64].
  typedef sample_t [K-1:0] vec_t;

  // Request to the memory port (one 256-bit vector per beat).
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    vec_t              wdata;
  } mem_req_t;

  // Direction of the transform.
  typedef enum logic { FFT_FWD = 1'b0, FFT_INV = 1'b1 } fft_dir_e;

endpackage
