// tb_mf_ctrl: self-checking test of the matched-filter sequencer.
//
// The FFT engine, the spectral multiplier and the sample buffer are replaced
// by small models in this testbench, so that the sequencer's own work can be
// seen: each model pass alters every buffer word in a known way through the
// sequencer's buffer multiplexer (forward FFT: real + 1 via port A;
// multiply: real + 2; inverse FFT: imaginary + 3 via port B). Checked:
//   - the phase order and the mode bits given with each start;
//   - every output word equals its input word altered by the three passes,
//     with tlast on word N and nowhere else;
//   - the waveform is latched at the first input beat of a frame;
//   - frame_cycles equals 3*N + 2*FK + 6 for free-flowing streams (FK being
//     the model FFT's pass length) and equals the count measured here when
//     both streams stall at random;
//   - len_err_evt for a frame whose tlast is misplaced, ovf_evt when the FFT
//     reports saturation, frame_done once per frame.
module tb_mf_ctrl;
  import mf_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned FK = 3 * N / 2;   // model FFT pass length

  logic clk = 1'b0, rst_n = 1'b0;

  cplx_t         s_axis_tdata = '0, m_axis_tdata;
  logic          s_axis_tvalid = 1'b0, s_axis_tready, s_axis_tlast = 1'b0;
  logic          m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  waveform_e     wf_sel = WF_FMCW, wf_active;
  logic          busy, ovf_evt, len_err_evt, frame_done;
  logic [31:0]   frame_cycles;
  logic          fft_start, fft_inverse, fft_dif, fft_scale, fft_done = 1'b0, fft_ovf = 1'b0;
  logic [AW-1:0] fft_rd_addr_a = '0, fft_rd_addr_b = '0, fft_wr_addr_a = '0, fft_wr_addr_b = '0;
  logic          fft_we = 1'b0;
  cplx_t         fft_wr_data_a = '0, fft_wr_data_b = '0;
  logic          mul_start, mul_done = 1'b0, mul_ovf = 1'b0, mul_we = 1'b0;
  logic [AW-1:0] mul_rd_addr = '0, mul_wr_addr = '0;
  cplx_t         mul_wr_data;
  logic [AW-1:0] buf_rd_addr_a, buf_rd_addr_b, buf_wr_addr_a, buf_wr_addr_b;
  cplx_t         buf_rd_data_a, buf_wr_data_a, buf_wr_data_b;
  logic          buf_we_a, buf_we_b;

  mf_ctrl #(.N(N)) dut (.*);

  // sample buffer model
  cplx_t mem [N];
  assign buf_rd_data_a = mem[buf_rd_addr_a];
  always_ff @(posedge clk) begin
    if (buf_we_a) mem[buf_wr_addr_a] <= buf_wr_data_a;
    if (buf_we_b) mem[buf_wr_addr_b] <= buf_wr_data_b;
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------
  // Engine models
  // ---------------------------------------------------------------
  int   phase_log [$];       // 1 forward FFT, 2 multiply, 3 inverse FFT
  logic inject_ovf = 1'b0;

  initial begin : fft_model
    forever begin
      @(posedge clk);
      if (fft_start && rst_n) begin
        automatic logic inv = fft_inverse;
        phase_log.push_back(inv ? 3 : 1);
        check({61'd0, fft_inverse, fft_dif, fft_scale}, inv ? 64'b100 : 64'b011, "FFT mode bits");
        for (int c = 0; c < int'(FK); c++) begin
          @(negedge clk);
          fft_we = (c < int'(N));
          fft_wr_addr_a = AW'(c); fft_wr_addr_b = AW'(c);
          fft_rd_addr_a = AW'(c); fft_rd_addr_b = AW'(c);
          if (inv) begin
            fft_wr_data_a = '{re: mem[c % N].re, im: mem[c % N].im};
            fft_wr_data_b = '{re: mem[c % N].re, im: mem[c % N].im + fx_t'(3)};
          end else begin
            fft_wr_data_a = '{re: mem[c % N].re + fx_t'(1), im: mem[c % N].im};
            fft_wr_data_b = '{re: mem[c % N].re + fx_t'(1), im: mem[c % N].im};
          end
          @(posedge clk);
        end
        @(negedge clk);
        fft_we = 0; fft_done = 1; fft_ovf = inject_ovf;
        @(negedge clk);
        fft_done = 0; fft_ovf = 0;
      end
    end
  end

  assign mul_wr_data = '{re: buf_rd_data_a.re + fx_t'(2), im: buf_rd_data_a.im};

  initial begin : mul_model
    forever begin
      @(posedge clk);
      if (mul_start && rst_n) begin
        phase_log.push_back(2);
        for (int c = 0; c < int'(N); c++) begin
          @(negedge clk);
          mul_we = 1; mul_rd_addr = AW'(c); mul_wr_addr = AW'(c);
          @(posedge clk);
        end
        @(negedge clk);
        mul_we = 0; mul_done = 1;
        @(negedge clk);
        mul_done = 0;
      end
    end
  end

  // ---------------------------------------------------------------
  // Streams
  // ---------------------------------------------------------------
  cplx_t sent [$];
  int    frames_done = 0, len_errs = 0, ovfs = 0;
  always @(posedge clk) if (rst_n) begin
    if (frame_done) frames_done++;
    if (len_err_evt) len_errs++;
    if (ovf_evt) ovfs++;
  end

  task automatic send_frame(input int gap_pct, input int bad_last_at, input waveform_e wf);
    for (int n = 0; n < int'(N); n++) begin
      automatic cplx_t w = cplx_t'({$urandom, $urandom});
      w.re = w.re >>> 2; w.im = w.im >>> 2;
      @(negedge clk);
      while ($urandom_range(99) < gap_pct) begin
        s_axis_tvalid = 0;
        @(negedge clk);
      end
      s_axis_tvalid = 1; s_axis_tdata = w;
      s_axis_tlast = (bad_last_at >= 0) ? (n == bad_last_at) : (n == int'(N) - 1);
      do @(posedge clk); while (!s_axis_tready);
      sent.push_back(w);
      if (n == 0) begin
        fork
          begin
            @(negedge clk);
            check(64'(wf_active), 64'(wf), "waveform latched at first beat");
            wf_sel = waveform_e'(wf + 1'b1);   // change mid-frame: must not matter
          end
        join_none
      end
    end
    @(negedge clk) s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  task automatic recv_frame(input int stall_pct, output int first_to_last);
    for (int n = 0; n < int'(N); n++) begin
      automatic cplx_t exp = sent.pop_front();
      automatic cplx_t want;
      want.re = exp.re + fx_t'(3);
      want.im = exp.im + fx_t'(3);
      @(negedge clk);
      while ($urandom_range(99) < stall_pct) begin
        m_axis_tready = 0;
        @(negedge clk);
      end
      m_axis_tready = 1;
      do @(posedge clk); while (!m_axis_tvalid);
      check(64'(m_axis_tdata), 64'(want), "output word");
      check(64'(m_axis_tlast), 64'(n == int'(N) - 1), "tlast");
    end
    @(negedge clk) m_axis_tready = 0;
    first_to_last = 0;
  endtask

  // cycle count from first input beat to last output beat, inclusive
  int cyc_meas = 0;
  logic counting = 1'b0;
  always @(posedge clk) begin
    if (s_axis_tvalid && s_axis_tready && !counting && !busy) begin
      counting <= 1'b1; cyc_meas <= 1;
    end else if (counting) begin
      cyc_meas <= cyc_meas + 1;
      if (m_axis_tvalid && m_axis_tready && m_axis_tlast) counting <= 1'b0;
    end
  end

  initial begin
    int dummy;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(64'(busy), 64'd0, "idle after reset");

    // frame 1: free-flowing
    wf_sel = WF_GOLAY;
    fork
      send_frame(0, -1, WF_GOLAY);
      begin
        @(negedge clk);
        m_axis_tready = 0;
      end
    join
    check(64'(busy), 64'd1, "busy during processing");
    recv_frame(0, dummy);
    @(negedge clk);
    check(64'(frame_cycles), 64'(3 * N + 2 * FK + 6), "frame cycles, free-flowing");
    check(64'(cyc_meas), 64'(3 * N + 2 * FK + 6), "measured cycles, free-flowing");
    check(64'(phase_log.size()), 64'd3, "three phases");
    if (phase_log.size() == 3) begin
      check(64'(phase_log[0]), 64'd1, "phase 1 forward FFT");
      check(64'(phase_log[1]), 64'd2, "phase 2 multiply");
      check(64'(phase_log[2]), 64'd3, "phase 3 inverse FFT");
    end

    // frame 2: both streams stall, FFT reports saturation
    wf_sel = WF_PMCW;
    inject_ovf = 1;
    send_frame(40, -1, WF_PMCW);
    recv_frame(40, dummy);
    inject_ovf = 0;
    @(negedge clk);
    check(64'(frame_cycles), 64'(cyc_meas), "frame cycles with stalls");
    check(64'(ovfs), 64'd2, "ovf events from two FFT passes");

    // frame 3: tlast misplaced
    wf_sel = WF_DR_GOLAY;
    send_frame(0, 5, WF_DR_GOLAY);
    recv_frame(0, dummy);
    @(negedge clk);
    check(64'(len_errs), 64'd2, "length errors (early tlast, missing last tlast)");
    check(64'(frames_done), 64'd3, "frame_done count");
    check(64'(busy), 64'd0, "idle at end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
