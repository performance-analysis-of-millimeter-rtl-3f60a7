// corr_seq_mem: store of the correlation sequences of the four waveforms.
//
// The core keeps one reference per ISAC waveform (FMCW, PMCW, standard
// 802.11ad Golay, Doppler-resilient Golay) so that the processor can switch
// waveforms between PRIs by changing one register instead of reloading a
// sequence. Each bank holds the N-point spectrum S[k]/N of the transmitted
// sequence s_tx, in the <24,1> format; the matched filter multiplies by its
// conjugate. Storing the spectrum rather than the time-domain sequence saves
// one FFT per PRI.
//
// Interface: the write port (bank, index, data) is written by the register
// file at the rising edge when we is high. The read port is combinational
// and is addressed by the spectral multiplier. Contents are not reset; the
// processor loads every bank it uses before selecting it.
//
// The four sequences and the fact that the processor configures the core at
// run time come from the paper; the spectral storage, the size and the
// loading path are this design's choices.
module corr_seq_mem
  import mf_pkg::*;
#(
  parameter int unsigned N   = 512,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  waveform_e     wr_bank,
  input  logic [AW-1:0] wr_idx,
  input  cplx_t         wr_data,
  input  waveform_e     rd_bank,
  input  logic [AW-1:0] rd_idx,
  output cplx_t         rd_data
);

  cplx_t mem [NWF*N];

  always_ff @(posedge clk) begin
    if (we) mem[{wr_bank, wr_idx}] <= wr_data;
  end

  assign rd_data = mem[{rd_bank, rd_idx}];

endmodule
