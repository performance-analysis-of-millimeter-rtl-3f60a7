// mf_core: matched-filtering core for ISAC radar signal processing.
//
// Range estimation for one pulse repetition interval (PRI): the N received
// complex samples of the PRI arrive on an AXI-Stream (fed by a DMA engine
// from processor memory), are transformed with an FFT, multiplied bin by bin
// with the conjugate spectrum of the transmitted waveform, and transformed
// back with an IFFT. The N output words, streamed back to the DMA, are the
// matched-filter (cross-correlation) output over the N range bins; their
// magnitude peaks at the range bin of each target. The core stores the
// reference spectra of four waveforms -- FMCW, PMCW, standard 802.11ad
// Golay and Doppler-resilient Golay -- and the processor selects one at run
// time over AXI-Lite, so switching waveform costs one register write.
//
// Structure:
//   axil_regs     AXI4-Lite registers: waveform select, reference loading,
//                 status (register map in axil_regs.sv)
//   corr_seq_mem  four banks of N reference words
//   sample_buf    N-word working memory, shared in place by all phases
//   fft_engine    radix-2 FFT / IFFT, one butterfly per cycle
//   spec_mult     conjugate multiply, one bin per cycle
//   mf_ctrl       phase sequencer and buffer multiplexer
//
// Interface: 48-bit stream words carry {imag[47:24], real[23:0]}, each a
// <24,1> fixed-point number. One input frame is exactly N beats, tlast on
// the last; one output frame is N beats, tlast on the last. A frame is
// accepted only while the previous one is not in progress (s_axis_tready is
// low meanwhile). Output bin r is (1/N) * sum_n x[n] * conj(s[n - r]) with n
// and n - r taken modulo N, when bank b holds S[k]/N, S the N-point DFT of
// the reference sequence s. Latency and throughput: 3*N + log2(N)*N + 6
// cycles per frame with free-flowing streams (6150 cycles at N = 512).
// rst_n is an active-low reset, synchronous to clk.
//
// From the paper: the FFT / conjugate-multiply / IFFT matched filter, the
// four stored correlation sequences and run-time waveform switching from
// the processor, the AXI-Lite control path and DMA data path, and the
// <24,1> fixed-point word. This design's choices: N = 512 (derived from the
// paper's range resolution and maximum range), the in-place radix-2
// architecture, the scaling plan, the register map and the stream framing.
module mf_core
  import mf_pkg::*;
#(
  parameter int unsigned N      = 512,
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave (processor control)
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // AXI-Stream in: received samples of one PRI (from the DMA)
  input  logic [2*DW-1:0]   s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  // AXI-Stream out: matched-filter output, one word per range bin (to the DMA)
  output logic [2*DW-1:0]   m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast
);

  localparam int unsigned AW = $clog2(N);

  // configuration / status
  waveform_e     wf_sel, wf_active, ref_bank;
  logic          ref_we;
  logic [AW-1:0] ref_wr_idx;
  cplx_t         ref_wr_data;
  logic          busy, ovf_evt, len_err_evt, frame_done;
  logic [31:0]   frame_cycles;

  // FFT engine
  logic          fft_start, fft_inverse, fft_dif, fft_scale;
  logic          fft_busy, fft_done, fft_ovf, fft_we;
  logic [AW-1:0] fft_rd_addr_a, fft_rd_addr_b, fft_wr_addr_a, fft_wr_addr_b;
  cplx_t         fft_wr_data_a, fft_wr_data_b;

  // spectral multiplier
  logic          mul_start, mul_busy, mul_done, mul_ovf, mul_we;
  logic [AW-1:0] mul_rd_addr, mul_wr_addr, ref_rd_idx;
  cplx_t         mul_wr_data, ref_rd_data;

  // sample buffer
  logic [AW-1:0] buf_rd_addr_a, buf_rd_addr_b, buf_wr_addr_a, buf_wr_addr_b;
  cplx_t         buf_rd_data_a, buf_rd_data_b, buf_wr_data_a, buf_wr_data_b;
  logic          buf_we_a, buf_we_b;

  cplx_t         s_data, m_data;
  assign s_data       = cplx_t'(s_axis_tdata);
  assign m_axis_tdata = m_data;

  axil_regs #(.N(N), .ADDR_W(ADDR_W)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .wf_sel,
    .ref_we,
    .ref_bank,
    .ref_idx      (ref_wr_idx),
    .ref_data     (ref_wr_data),
    .core_busy    (busy),
    .ovf_evt,
    .len_err_evt,
    .frame_done,
    .frame_cycles
  );

  corr_seq_mem #(.N(N)) u_ref (
    .clk,
    .we      (ref_we),
    .wr_bank (ref_bank),
    .wr_idx  (ref_wr_idx),
    .wr_data (ref_wr_data),
    .rd_bank (wf_active),
    .rd_idx  (ref_rd_idx),
    .rd_data (ref_rd_data)
  );

  sample_buf #(.N(N)) u_buf (
    .clk,
    .rd_addr_a (buf_rd_addr_a),
    .rd_data_a (buf_rd_data_a),
    .rd_addr_b (buf_rd_addr_b),
    .rd_data_b (buf_rd_data_b),
    .we_a      (buf_we_a),
    .wr_addr_a (buf_wr_addr_a),
    .wr_data_a (buf_wr_data_a),
    .we_b      (buf_we_b),
    .wr_addr_b (buf_wr_addr_b),
    .wr_data_b (buf_wr_data_b)
  );

  fft_engine #(.N(N)) u_fft (
    .clk, .rst_n,
    .start     (fft_start),
    .inverse   (fft_inverse),
    .dif       (fft_dif),
    .scale     (fft_scale),
    .busy      (fft_busy),
    .done      (fft_done),
    .ovf       (fft_ovf),
    .rd_addr_a (fft_rd_addr_a),
    .rd_addr_b (fft_rd_addr_b),
    .rd_data_a (buf_rd_data_a),
    .rd_data_b (buf_rd_data_b),
    .we        (fft_we),
    .wr_addr_a (fft_wr_addr_a),
    .wr_addr_b (fft_wr_addr_b),
    .wr_data_a (fft_wr_data_a),
    .wr_data_b (fft_wr_data_b)
  );

  spec_mult #(.N(N)) u_mul (
    .clk, .rst_n,
    .start    (mul_start),
    .busy     (mul_busy),
    .done     (mul_done),
    .ovf      (mul_ovf),
    .rd_addr  (mul_rd_addr),
    .rd_data  (buf_rd_data_a),
    .we       (mul_we),
    .wr_addr  (mul_wr_addr),
    .wr_data  (mul_wr_data),
    .ref_idx  (ref_rd_idx),
    .ref_data (ref_rd_data)
  );

  mf_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .s_axis_tdata  (s_data),
    .s_axis_tvalid,
    .s_axis_tready,
    .s_axis_tlast,
    .m_axis_tdata  (m_data),
    .m_axis_tvalid,
    .m_axis_tready,
    .m_axis_tlast,
    .wf_sel,
    .wf_active,
    .busy,
    .ovf_evt,
    .len_err_evt,
    .frame_done,
    .frame_cycles,
    .fft_start, .fft_inverse, .fft_dif, .fft_scale,
    .fft_done, .fft_ovf,
    .fft_rd_addr_a, .fft_rd_addr_b, .fft_we,
    .fft_wr_addr_a, .fft_wr_addr_b, .fft_wr_data_a, .fft_wr_data_b,
    .mul_start, .mul_done, .mul_ovf,
    .mul_rd_addr, .mul_we, .mul_wr_addr, .mul_wr_data,
    .buf_rd_addr_a, .buf_rd_addr_b, .buf_rd_data_a,
    .buf_we_a, .buf_wr_addr_a, .buf_wr_data_a,
    .buf_we_b, .buf_wr_addr_b, .buf_wr_data_b
  );

  // The sequencer never starts an engine that is still running, and the two
  // engines never own the buffer at the same time.
  a_engines_exclusive : assert property (@(posedge clk) disable iff (!rst_n)
    !(fft_busy && mul_busy));

endmodule
