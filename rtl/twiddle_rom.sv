// twiddle_rom: cosine / sine table for the radix-2 FFT.
//
// Entry e (0 <= e < N/2) holds cos(2*pi*e/N) and sin(2*pi*e/N) in the <24,1>
// fixed-point format, rounded to nearest. cos(0) = 1 is not representable and
// is stored as the largest value, 1 - 2^-23. The table is computed while the
// design is elaborated, so no data file is needed. The read is combinational.
//
// The table is part of this design's radix-2 FFT; the source fixes only the
// <24,1> word length it is stored in.
module twiddle_rom
  import mf_pkg::*;
#(
  parameter int unsigned N   = 512,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic [AW-2:0] addr,
  output fx_t           cos_o,
  output fx_t           sin_o
);

  localparam real PI = 3.14159265358979323846;

  function automatic fx_t to_fx(input real x);
    real  s;
    longint q;
    s = x * real'(64'(1) << FRAC);
    q = (s >= 0.0) ? longint'($floor(s + 0.5)) : -longint'($floor(-s + 0.5));
    if (q > longint'(FX_MAX)) q = longint'(FX_MAX);
    if (q < longint'(FX_MIN)) q = longint'(FX_MIN);
    return fx_t'(q);
  endfunction

  function automatic fx_t tw_cos(input int e);
    return to_fx($cos(2.0 * PI * real'(e) / real'(N)));
  endfunction

  function automatic fx_t tw_sin(input int e);
    return to_fx($sin(2.0 * PI * real'(e) / real'(N)));
  endfunction

  fx_t cos_tab [N/2];
  fx_t sin_tab [N/2];

  for (genvar e = 0; e < int'(N/2); e++) begin : g_tab
    assign cos_tab[e] = tw_cos(e);
    assign sin_tab[e] = tw_sin(e);
  end

  assign cos_o = cos_tab[addr];
  assign sin_o = sin_tab[addr];

endmodule
