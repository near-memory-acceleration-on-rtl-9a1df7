// fft_butterfly: radix-2 decimation-in-time butterfly with scaling by 1/2.
//   t  = b * w        (complex, product rounded back by TW_FRAC bits)
//   a' = (a + t) / 2,  b' = (a - t) / 2   (rounded to nearest)
// Scaling every stage by 1/2 keeps the data in range, so a transform of length
// N returns X[k]/N. The twiddle w arrives in Q2.16. Purely combinational.
// The butterfly structure and scaling are this design's own choices.
module fft_butterfly (
  input  ap_pkg::sample_t                a,
  input  ap_pkg::sample_t                b,
  input  logic signed [ap_pkg::TW_W-1:0] w_re,
  input  logic signed [ap_pkg::TW_W-1:0] w_im,
  output ap_pkg::sample_t                y0,
  output ap_pkg::sample_t                y1
);
  import ap_pkg::*;
  localparam int unsigned PW = COMP_W + TW_W + 1;

  logic signed [PW-1:0]     p_re, p_im;
  logic signed [COMP_W+1:0] t_re, t_im;
  logic signed [COMP_W+1:0] s0_re, s0_im, s1_re, s1_im;

  always_comb begin
    p_re  = PW'(b.re) * PW'(w_re) - PW'(b.im) * PW'(w_im);
    p_im  = PW'(b.re) * PW'(w_im) + PW'(b.im) * PW'(w_re);
    t_re  = (COMP_W+2)'((p_re + PW'(1 << (TW_FRAC - 1))) >>> TW_FRAC);
    t_im  = (COMP_W+2)'((p_im + PW'(1 << (TW_FRAC - 1))) >>> TW_FRAC);
    s0_re = (COMP_W+2)'(a.re) + t_re + 1;
    s0_im = (COMP_W+2)'(a.im) + t_im + 1;
    s1_re = (COMP_W+2)'(a.re) - t_re + 1;
    s1_im = (COMP_W+2)'(a.im) - t_im + 1;
    y0.re = COMP_W'(s0_re >>> 1);
    y0.im = COMP_W'(s0_im >>> 1);
    y1.re = COMP_W'(s1_re >>> 1);
    y1.im = COMP_W'(s1_im >>> 1);
  end
endmodule
