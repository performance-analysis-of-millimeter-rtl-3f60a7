// mf_ctrl: sequencer of the matched-filtering core.
//
// Runs the matched filter on one PRI at a time, in five phases:
//   LOAD    accepts N complex samples from the input AXI-Stream and writes
//           them to sample_buf in natural order;
//   FFT     forward transform, decimation in frequency, scaled by 1/N;
//   MULT    multiply by the conjugate reference spectrum of the waveform
//           selected when the frame began;
//   IFFT    inverse transform, decimation in time, unscaled, which brings the
//           bit-reversed spectrum back to natural-order range bins;
//   UNLOAD  sends the N range bins of the matched-filter output on the output
//           AXI-Stream, with tlast on the last one.
// With a reference stored as S[k]/N and the input scaled by the forward FFT,
// output bin r equals (1/N) * sum_n x[n] * conj(s[n - r]) (circular), the
// normalised cross-correlation of the PRI with the transmitted sequence.
//
// The controller also multiplexes the two-port sample buffer between its own
// load / unload logic, the FFT engine and the spectral multiplier.
//
// Timing: with an input that never stalls and an output that is always
// ready, a frame takes 3*N + 2*K + 6 cycles, K = log2(N)*N/2 butterflies
// per transform, counted from the cycle of the first accepted input beat to
// the cycle of the last output beat, both included (6150 cycles for
// N = 512): N load, K FFT, N multiply, K IFFT, N unload and six cycles of
// hand-over between the phases. frame_cycles reports the count measured for
// each frame, so stalls on either stream show up in it. Input beats are not accepted outside LOAD. A
// frame is always N beats long; a tlast that does not fall on beat N raises
// len_err_evt. rst_n is an active-low synchronous reset.
//
// The processing order (FFT, multiply by the conjugate reference, IFFT) is
// the paper's; the single-buffer schedule, the stream framing and the
// scaling plan are this design's choices.
module mf_ctrl
  import mf_pkg::*;
#(
  parameter int unsigned N   = 512,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // input stream (received samples of one PRI)
  input  cplx_t         s_axis_tdata,
  input  logic          s_axis_tvalid,
  output logic          s_axis_tready,
  input  logic          s_axis_tlast,
  // output stream (matched-filter output, one word per range bin)
  output cplx_t         m_axis_tdata,
  output logic          m_axis_tvalid,
  input  logic          m_axis_tready,
  output logic          m_axis_tlast,
  // configuration and status
  input  waveform_e     wf_sel,
  output waveform_e     wf_active,
  output logic          busy,
  output logic          ovf_evt,
  output logic          len_err_evt,
  output logic          frame_done,
  output logic [31:0]   frame_cycles,
  // FFT engine
  output logic          fft_start,
  output logic          fft_inverse,
  output logic          fft_dif,
  output logic          fft_scale,
  input  logic          fft_done,
  input  logic          fft_ovf,
  input  logic [AW-1:0] fft_rd_addr_a,
  input  logic [AW-1:0] fft_rd_addr_b,
  input  logic          fft_we,
  input  logic [AW-1:0] fft_wr_addr_a,
  input  logic [AW-1:0] fft_wr_addr_b,
  input  cplx_t         fft_wr_data_a,
  input  cplx_t         fft_wr_data_b,
  // spectral multiplier
  output logic          mul_start,
  input  logic          mul_done,
  input  logic          mul_ovf,
  input  logic [AW-1:0] mul_rd_addr,
  input  logic          mul_we,
  input  logic [AW-1:0] mul_wr_addr,
  input  cplx_t         mul_wr_data,
  // sample buffer
  output logic [AW-1:0] buf_rd_addr_a,
  output logic [AW-1:0] buf_rd_addr_b,
  input  cplx_t         buf_rd_data_a,
  output logic          buf_we_a,
  output logic [AW-1:0] buf_wr_addr_a,
  output cplx_t         buf_wr_data_a,
  output logic          buf_we_b,
  output logic [AW-1:0] buf_wr_addr_b,
  output cplx_t         buf_wr_data_b
);

  typedef enum logic [2:0] {
    S_LOAD   = 3'd0,
    S_FFT    = 3'd1,
    S_MULT   = 3'd2,
    S_IFFT   = 3'd3,
    S_UNLOAD = 3'd4
  } state_e;

  state_e        state;
  logic [AW-1:0] cnt;
  logic [31:0]   cyc;
  logic          in_frame;

  wire in_hs  = s_axis_tvalid && s_axis_tready;
  wire out_hs = m_axis_tvalid && m_axis_tready;
  wire last_n = (cnt == {AW{1'b1}});

  // ------------------------------------------------------------------
  // Stream interfaces
  // ------------------------------------------------------------------
  assign s_axis_tready = (state == S_LOAD);
  assign m_axis_tvalid = (state == S_UNLOAD);
  assign m_axis_tdata  = buf_rd_data_a;
  assign m_axis_tlast  = (state == S_UNLOAD) && last_n;

  assign fft_dif     = (state == S_FFT);
  assign fft_scale   = (state == S_FFT);
  assign fft_inverse = (state == S_IFFT);

  assign busy = (state != S_LOAD) || in_frame;

  // ------------------------------------------------------------------
  // Sample buffer multiplexer
  // ------------------------------------------------------------------
  always_comb begin
    buf_rd_addr_a = cnt;
    buf_rd_addr_b = cnt;
    buf_we_a      = 1'b0;
    buf_wr_addr_a = cnt;
    buf_wr_data_a = s_axis_tdata;
    buf_we_b      = 1'b0;
    buf_wr_addr_b = cnt;
    buf_wr_data_b = s_axis_tdata;
    unique case (state)
      S_LOAD: buf_we_a = in_hs;
      S_FFT, S_IFFT: begin
        buf_rd_addr_a = fft_rd_addr_a;
        buf_rd_addr_b = fft_rd_addr_b;
        buf_we_a      = fft_we;
        buf_wr_addr_a = fft_wr_addr_a;
        buf_wr_data_a = fft_wr_data_a;
        buf_we_b      = fft_we;
        buf_wr_addr_b = fft_wr_addr_b;
        buf_wr_data_b = fft_wr_data_b;
      end
      S_MULT: begin
        buf_rd_addr_a = mul_rd_addr;
        buf_we_a      = mul_we;
        buf_wr_addr_a = mul_wr_addr;
        buf_wr_data_a = mul_wr_data;
      end
      S_UNLOAD: ;
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // Phase sequencing
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_LOAD;
      cnt          <= '0;
      cyc          <= '0;
      in_frame     <= 1'b0;
      wf_active    <= WF_FMCW;
      fft_start    <= 1'b0;
      mul_start    <= 1'b0;
      ovf_evt      <= 1'b0;
      len_err_evt  <= 1'b0;
      frame_done   <= 1'b0;
      frame_cycles <= '0;
    end else begin
      fft_start   <= 1'b0;
      mul_start   <= 1'b0;
      ovf_evt     <= 1'b0;
      len_err_evt <= 1'b0;
      frame_done  <= 1'b0;
      if (in_frame || in_hs) cyc <= cyc + 1'b1;

      unique case (state)
        S_LOAD: if (in_hs) begin
          if (!in_frame) begin
            in_frame  <= 1'b1;
            wf_active <= wf_sel;
            cyc       <= 32'd1;
          end
          cnt <= cnt + 1'b1;
          if (s_axis_tlast != last_n) len_err_evt <= 1'b1;
          if (last_n) begin
            state     <= S_FFT;
            fft_start <= 1'b1;
          end
        end
        S_FFT: if (fft_done) begin
          state     <= S_MULT;
          mul_start <= 1'b1;
          ovf_evt   <= fft_ovf;
        end
        S_MULT: if (mul_done) begin
          state     <= S_IFFT;
          fft_start <= 1'b1;
          ovf_evt   <= mul_ovf;
        end
        S_IFFT: if (fft_done) begin
          state   <= S_UNLOAD;
          ovf_evt <= fft_ovf;
        end
        S_UNLOAD: if (out_hs) begin
          cnt <= cnt + 1'b1;
          if (last_n) begin
            state        <= S_LOAD;
            in_frame     <= 1'b0;
            frame_done   <= 1'b1;
            frame_cycles <= cyc + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // AXI-Stream rule: output data and last stay stable while not accepted.
  a_out_stable : assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast));

endmodule
