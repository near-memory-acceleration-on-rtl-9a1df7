// twiddle_rom: read-only table of the twiddle factors exp(-2*pi*i*j/NMAX),
// j = 0 .. NMAX/2-1, for the largest supported FFT length NMAX = 2**LOG2_NMAX.
// Shorter transforms of length N read every (NMAX/N)-th entry. The table is
// computed at start-up from cos/sin and rounded to TW_W-bit Q2.16 fixed point
// (cos = cos_tab, sin part stored as -sin so the entry is the forward twiddle).
// Read is combinational on the address (a distributed ROM); the inverse
// transform conjugates the entry outside this module. This table layout is
// this design's own choice; the paper does not describe the FFT internals.
module twiddle_rom #(
  parameter int unsigned LOG2_NMAX = 15
) (
  input  logic [LOG2_NMAX-2:0]             idx,
  output logic signed [ap_pkg::TW_W-1:0]   w_re,
  output logic signed [ap_pkg::TW_W-1:0]   w_im
);
  import ap_pkg::*;
  localparam int unsigned DEPTH = 2 ** (LOG2_NMAX - 1);

  logic signed [TW_W-1:0] rom_re [DEPTH];
  logic signed [TW_W-1:0] rom_im [DEPTH];

  initial begin
    for (int j = 0; j < DEPTH; j++) begin
      real ang;
      ang = 2.0 * 3.14159265358979323846 * real'(j) / real'(2 * DEPTH);
      rom_re[j] = TW_W'($rtoi($floor($cos(ang) * real'(1 << TW_FRAC) + 0.5)));
      rom_im[j] = TW_W'($rtoi($floor(-$sin(ang) * real'(1 << TW_FRAC) + 0.5)));
    end
  end

  assign w_re = rom_re[idx];
  assign w_im = rom_im[idx];
endmodule
