// sample_buf: working memory for one pulse repetition interval (PRI).
//
// Holds the N complex fast-time samples of one PRI. The FFT, the spectral
// multiply and the IFFT all work on it in place, so it offers two read ports
// and two write ports: a radix-2 butterfly reads a pair of words and writes
// the pair back in the same cycle.
//
// Timing: reads are combinational (address to data in the same cycle, as in
// distributed RAM); writes take effect at the rising clock edge. A read in
// the cycle after a write returns the new value. If both write ports hit the
// same address in one cycle, port B wins. Contents are not reset.
//
// The paper gives the number of samples per PRI only through its radar
// parameters (0.085 m range bins up to 44 m, a 512-chip Golay sequence); the
// default N = 512 follows from them. The port structure is this design's own.
module sample_buf
  import mf_pkg::*;
#(
  parameter int unsigned N    = 512,
  localparam int unsigned AW  = $clog2(N)
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr_a,
  output cplx_t         rd_data_a,
  input  logic [AW-1:0] rd_addr_b,
  output cplx_t         rd_data_b,
  input  logic          we_a,
  input  logic [AW-1:0] wr_addr_a,
  input  cplx_t         wr_data_a,
  input  logic          we_b,
  input  logic [AW-1:0] wr_addr_b,
  input  cplx_t         wr_data_b
);

  cplx_t mem [N];

  assign rd_data_a = mem[rd_addr_a];
  assign rd_data_b = mem[rd_addr_b];

  always_ff @(posedge clk) begin
    if (we_a) mem[wr_addr_a] <= wr_data_a;
    if (we_b) mem[wr_addr_b] <= wr_data_b;
  end

endmodule
