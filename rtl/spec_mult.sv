// spec_mult: frequency-domain matched filter multiply.
//
// Multiplies every bin of the received spectrum, held in sample_buf, by the
// complex conjugate of the selected reference spectrum: Y[k] = X[k] * conj(S[k]).
// This is the diagonal of S~ w s~^H in the paper's matched filter equation,
// one bin at a time. The forward FFT leaves X in bit-reversed order, so the
// word at buffer address m is bin bitrev(m) and the reference is read at
// bitrev(m) (REF_BITREV = 1); the product goes back to address m, where the
// decimation-in-time IFFT expects it.
//
// Interface: start (one-cycle pulse while busy is low) begins a pass of N
// cycles, one bin per cycle, with a combinational read and a write at the
// next edge. done pulses once the last product has been written, N cycles
// after the start edge; ovf, valid with done, tells whether a product was
// saturated. rst_n is an active-low synchronous reset.
//
// The conjugate multiply is the paper's; the bin-serial schedule and the
// rounding and saturation are this design's choices.
module spec_mult
  import mf_pkg::*;
#(
  parameter int unsigned N          = 512,
  parameter bit          REF_BITREV = 1'b1,
  localparam int unsigned AW        = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          ovf,
  // sample buffer
  output logic [AW-1:0] rd_addr,
  input  cplx_t         rd_data,
  output logic          we,
  output logic [AW-1:0] wr_addr,
  output cplx_t         wr_data,
  // reference spectrum
  output logic [AW-1:0] ref_idx,
  input  cplx_t         ref_data
);

  logic [AW-1:0] k;
  logic          ovf_q, o;

  function automatic logic [AW-1:0] bitrev(input logic [AW-1:0] v);
    for (int i = 0; i < int'(AW); i++) bitrev[i] = v[AW-1-i];
  endfunction

  assign rd_addr = k;
  assign wr_addr = k;
  assign ref_idx = REF_BITREV ? bitrev(k) : k;
  assign we      = busy;

  always_comb wr_data = cmul(rd_data, ref_data, 1'b1, o);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      k     <= '0;
      ovf_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          k     <= '0;
          ovf_q <= 1'b0;
        end
      end else begin
        ovf_q <= ovf_q | o;
        k     <= k + 1'b1;
        if (k == {AW{1'b1}}) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ovf = ovf_q;

  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
