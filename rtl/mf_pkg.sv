// mf_pkg: types and constants shared by the matched-filtering core.
//
// Samples are complex fixed-point numbers in the <24,1> format the paper
// selects for its fixed-point architecture: 24-bit two's complement words
// with one integer (sign) bit and 23 fraction bits, so every component lies
// in [-1, 1). A complex sample packs the imaginary part above the real part,
// which is also the layout of a 48-bit AXI-Stream beat.
//
// The four waveform codes follow the order of the correlation sequences
// drawn in the paper's hardware figure (FMCW, PMCW, standard Golay,
// Doppler-resilient Golay); the numeric encoding is this design's choice.
package mf_pkg;

  localparam int unsigned DW   = 24;  // word length of one component
  localparam int unsigned FRAC = 23;  // fraction bits (<24,1>)
  localparam int unsigned NWF  = 4;   // number of stored correlation sequences

  typedef logic signed [DW-1:0] fx_t;

  typedef struct packed {
    fx_t im;
    fx_t re;
  } cplx_t;

  typedef enum logic [1:0] {
    WF_FMCW     = 2'd0,
    WF_PMCW     = 2'd1,
    WF_GOLAY    = 2'd2,
    WF_DR_GOLAY = 2'd3
  } waveform_e;

  // Largest and smallest representable component values.
  localparam fx_t FX_MAX = fx_t'({1'b0, {(DW-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(DW-1){1'b0}}});

  // Saturate a wide signed value to one component; ovf reports clipping.
  function automatic fx_t sat(input logic signed [DW+FRAC+2:0] v, output logic ovf);
    if (v > (DW+FRAC+3)'(FX_MAX)) begin
      ovf = 1'b1;
      return FX_MAX;
    end else if (v < (DW+FRAC+3)'(signed'(FX_MIN))) begin
      ovf = 1'b1;
      return FX_MIN;
    end else begin
      ovf = 1'b0;
      return fx_t'(v);
    end
  endfunction

  // Fixed-point product of two components, rounded to nearest, result in
  // DW+FRAC+3 bits so that sums of two products cannot wrap before saturation.
  function automatic logic signed [DW+FRAC+2:0] fxmul(input fx_t a, input fx_t b);
    logic signed [DW+FRAC+2:0] p;
    p = (DW+FRAC+3)'(a) * (DW+FRAC+3)'(b);
    return (p + (DW+FRAC+3)'(1 << (FRAC-1))) >>> FRAC;
  endfunction

  // Complex product a * conj(b) (conj_b = 1) or a * b (conj_b = 0).
  function automatic cplx_t cmul(input cplx_t a, input cplx_t b, input logic conj_b,
                                 output logic ovf);
    logic signed [DW+FRAC+2:0] rr, ii, ri, ir, re_w, im_w;
    logic o1, o2;
    cplx_t r;
    rr = fxmul(a.re, b.re);
    ii = fxmul(a.im, b.im);
    ri = fxmul(a.re, b.im);
    ir = fxmul(a.im, b.re);
    if (conj_b) begin
      re_w = rr + ii;
      im_w = ir - ri;
    end else begin
      re_w = rr - ii;
      im_w = ir + ri;
    end
    r.re = sat(re_w, o1);
    r.im = sat(im_w, o2);
    ovf = o1 | o2;
    return r;
  endfunction

endpackage
