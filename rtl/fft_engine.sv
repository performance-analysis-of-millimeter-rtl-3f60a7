// fft_engine: in-place radix-2 FFT / IFFT over the sample buffer.
//
// One pass transforms the N complex words held in sample_buf. The engine
// computes one radix-2 butterfly per clock cycle: it drives the two read
// addresses of the pair, combines the words with one twiddle factor and
// writes both results back at the next clock edge, so a pass takes
// log2(N) * N/2 cycles. Two butterfly forms are offered:
//   dif = 1  decimation in frequency: natural-order input, bit-reversed
//            output; stages run with spans N/2, N/4, ..., 1;
//            A' = A + B, B' = (A - B) * W.
//   dif = 0  decimation in time: bit-reversed input, natural-order output;
//            spans 1, 2, ..., N/2; A' = A + W*B, B' = A - W*B.
// The matched filter uses the DIF form for the forward FFT and the DIT form
// for the IFFT, so the spectrum never has to be reordered. inverse = 1 uses
// the conjugate twiddles exp(+j*2*pi*e/N). scale = 1 halves every stage
// output (rounded), which divides the whole transform by N and keeps a
// forward FFT inside the [-1, 1) range of the <24,1> format; with scale = 0
// results that leave the range are saturated.
//
// Interface: inverse, dif and scale are sampled with start (a one-cycle
// pulse while busy is low). busy is high during the pass; done pulses for
// one cycle once the last butterfly has been written, i.e. log2(N)*N/2
// cycles after the start edge. ovf is valid with done and tells whether any
// result of the pass was saturated. rst_n is an active-low synchronous reset.
//
// The paper specifies the FFT / IFFT, their place in the matched filter and
// the <24,1> word length; the radix-2 in-place architecture, the per-stage
// scaling and the saturation are this design's choices.
module fft_engine
  import mf_pkg::*;
#(
  parameter int unsigned N   = 512,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          inverse,
  input  logic          dif,
  input  logic          scale,
  output logic          busy,
  output logic          done,
  output logic          ovf,
  // sample buffer ports
  output logic [AW-1:0] rd_addr_a,
  output logic [AW-1:0] rd_addr_b,
  input  cplx_t         rd_data_a,
  input  cplx_t         rd_data_b,
  output logic          we,
  output logic [AW-1:0] wr_addr_a,
  output logic [AW-1:0] wr_addr_b,
  output cplx_t         wr_data_a,
  output cplx_t         wr_data_b
);

  localparam int unsigned SW = $clog2(AW);  // stage counter width
  localparam int unsigned XW = DW + 2;      // butterfly internal width

  typedef logic signed [XW-1:0] wx_t;

  logic [SW:0]   stage;   // 0 .. AW-1
  logic [AW-2:0] bfly;    // 0 .. N/2-1
  logic          inv_q, dif_q, scale_q, ovf_q;

  // ------------------------------------------------------------------
  // Address and twiddle generation
  // ------------------------------------------------------------------
  logic [SW:0]   lg_h;    // log2 of the butterfly span
  logic [AW-1:0] h, j, a_idx, b_idx;
  logic [AW-2:0] tw_addr;

  always_comb begin
    lg_h    = dif_q ? (SW+1)'(AW - 1) - stage : stage;
    h       = AW'(1) << lg_h;
    j       = AW'(bfly) & (h - AW'(1));
    a_idx   = ((AW'(bfly) & ~(h - AW'(1))) << 1) | j;
    b_idx   = a_idx + h;
    tw_addr = (AW-1)'(j << ((SW+1)'(AW - 1) - lg_h));
  end

  fx_t tw_cos, tw_sin;

  twiddle_rom #(.N(N)) u_tw (
    .addr  (tw_addr),
    .cos_o (tw_cos),
    .sin_o (tw_sin)
  );

  // ------------------------------------------------------------------
  // Butterfly
  // ------------------------------------------------------------------
  function automatic wx_t wmul(input wx_t x, input fx_t w);
    logic signed [XW+DW-1:0] p;
    p = (XW+DW)'(x) * (XW+DW)'(w);
    return XW'((p + (XW+DW)'(1 << (FRAC-1))) >>> FRAC);
  endfunction

  function automatic fx_t finish(input wx_t x, input logic halve, output logic o);
    wx_t y;
    y = halve ? (x + wx_t'(1)) >>> 1 : x;
    if (y > wx_t'(FX_MAX)) begin
      o = 1'b1;
      return FX_MAX;
    end else if (y < wx_t'(FX_MIN)) begin
      o = 1'b1;
      return FX_MIN;
    end else begin
      o = 1'b0;
      return fx_t'(y);
    end
  endfunction

  fx_t  w_re, w_im;
  wx_t  ar, ai, br, bi, tr, ti, pr, pi, qr, qi;
  logic [3:0] o;

  always_comb begin
    // W = cos - j*sin forward, cos + j*sin inverse
    w_re = tw_cos;
    w_im = inv_q ? tw_sin : -tw_sin;
    ar = wx_t'(rd_data_a.re);
    ai = wx_t'(rd_data_a.im);
    br = wx_t'(rd_data_b.re);
    bi = wx_t'(rd_data_b.im);
    if (dif_q) begin
      pr = ar + br;
      pi = ai + bi;
      tr = ar - br;
      ti = ai - bi;
      qr = wmul(tr, w_re) - wmul(ti, w_im);
      qi = wmul(tr, w_im) + wmul(ti, w_re);
    end else begin
      tr = wmul(br, w_re) - wmul(bi, w_im);
      ti = wmul(br, w_im) + wmul(bi, w_re);
      pr = ar + tr;
      pi = ai + ti;
      qr = ar - tr;
      qi = ai - ti;
    end
    wr_data_a.re = finish(pr, scale_q, o[0]);
    wr_data_a.im = finish(pi, scale_q, o[1]);
    wr_data_b.re = finish(qr, scale_q, o[2]);
    wr_data_b.im = finish(qi, scale_q, o[3]);
  end

  assign rd_addr_a = a_idx;
  assign rd_addr_b = b_idx;
  assign wr_addr_a = a_idx;
  assign wr_addr_b = b_idx;
  assign we        = busy;

  // ------------------------------------------------------------------
  // Pass control
  // ------------------------------------------------------------------
  wire last_bfly  = (bfly == {(AW-1){1'b1}});
  wire last_stage = (stage == (SW+1)'(AW - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      stage   <= '0;
      bfly    <= '0;
      inv_q   <= 1'b0;
      dif_q   <= 1'b0;
      scale_q <= 1'b0;
      ovf_q   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          stage   <= '0;
          bfly    <= '0;
          inv_q   <= inverse;
          dif_q   <= dif;
          scale_q <= scale;
          ovf_q   <= 1'b0;
        end
      end else begin
        ovf_q <= ovf_q | (|o);
        bfly  <= bfly + 1'b1;
        if (last_bfly) begin
          stage <= stage + 1'b1;
          if (last_stage) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assign ovf = ovf_q;

  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
