// tb_mf_core: end-to-end test of the matched-filtering core at full size.
//
// The core is instantiated with its default parameters (N = 512 samples per
// PRI). The testbench plays the processor and the DMA engine:
//   1. It builds the four reference sequences of length N -- an FMCW chirp
//      exp(j*pi*n^2/N), a PMCW code whose phase flips by pi on each 1 of a
//      15-bit LFSR (differential phase shift keying), and the two members
//      Ga, Gb of a binary Golay complementary pair (Ga for the standard Golay
//      bank, Gb for the Doppler-resilient bank) -- takes their DFT in floating
//      point, and loads S[k]/N, rounded to <24,1>, into the four banks over
//      AXI4-Lite.
//   2. For each waveform it sends one PRI of echoes, x[n] = sum_t a_t *
//      s[(n - d_t) mod N], selecting the waveform first by a register write,
//      and compares every output bin with the circular cross-correlation
//      (1/N) * sum_n x[n] * conj(s[n - r]) computed directly in the time
//      domain, and checks that the largest output lies at the target delay.
//   3. It checks the frame time (3*N + log2(N)*N + 6 = 6150 cycles) through
//      the CYCLES register, with free-flowing streams.
// Mechanisms exercised and counted: waveform switches, input stream gaps,
// output back-pressure, saturation (a reference and input chosen to exceed
// the <24,1> range, seen in the sticky STATUS bit and a clipped output) and
// a frame-length error (misplaced tlast). Each must occur at least once.
module tb_mf_core;
  import mf_pkg::*;

  localparam int unsigned N   = 512;            // the core's default
  localparam int unsigned AW  = $clog2(N);
  localparam real         PI  = 3.14159265358979323846;
  localparam real         LSB = 1.0 / real'(1 << FRAC);
  localparam real         TOL = 1.0e-4;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  s_axil_awaddr = '0, s_axil_araddr = '0;
  logic        s_axil_awvalid = 1'b0, s_axil_wvalid = 1'b0, s_axil_bready = 1'b0;
  logic        s_axil_arvalid = 1'b0, s_axil_rready = 1'b0;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [47:0] s_axis_tdata = '0, m_axis_tdata;
  logic        s_axis_tvalid = 1'b0, s_axis_tready, s_axis_tlast = 1'b0;
  logic        m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;

  mf_core dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  int n_switch = 0, n_in_gap = 0, n_out_stall = 0, n_sat = 0, n_len_err = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------
  // Fixed point helpers
  // ---------------------------------------------------------------
  function automatic real fx2r(input fx_t v);
    return real'(v) * LSB;
  endfunction

  function automatic fx_t r2fx(input real v);
    real s = v * real'(1 << FRAC);
    s = (s >= 0.0) ? $floor(s + 0.5) : -$floor(-s + 0.5);
    if (s > real'(FX_MAX)) s = real'(FX_MAX);
    if (s < real'(FX_MIN)) s = real'(FX_MIN);
    return fx_t'($rtoi(s));
  endfunction

  // ---------------------------------------------------------------
  // AXI4-Lite master
  // ---------------------------------------------------------------
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    s_axil_bready = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    check(s_axil_bresp == 2'b00, "write response OKAY");
    @(negedge clk) s_axil_bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1; s_axil_rready = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk) s_axil_rready = 0;
  endtask

  // ---------------------------------------------------------------
  // Reference sequences
  // ---------------------------------------------------------------
  real seq_re [NWF][N], seq_im [NWF][N];

  task automatic make_sequences();
    real ga [N], gb [N], ta [N], tb [N];
    int  len;
    logic [14:0] lfsr = 15'h1;
    real ph;
    // FMCW: linear chirp across the band
    for (int n = 0; n < int'(N); n++) begin
      ph = PI * real'(n) * real'(n) / real'(N);
      seq_re[0][n] = $cos(ph); seq_im[0][n] = $sin(ph);
    end
    // PMCW: differential BPSK of a 15-bit LFSR (x^15 + x^14 + 1)
    ph = 0.0;
    for (int n = 0; n < int'(N); n++) begin
      if (lfsr[0]) ph = (ph == 0.0) ? PI : 0.0;
      lfsr = {lfsr[0] ^ lfsr[1], lfsr[14:1]};
      seq_re[1][n] = $cos(ph); seq_im[1][n] = 0.0;
    end
    // Golay complementary pair by concatenation: a' = [a b], b' = [a -b]
    ga[0] = 1.0; gb[0] = 1.0; len = 1;
    while (len < int'(N)) begin
      for (int i = 0; i < len; i++) begin ta[i] = ga[i]; tb[i] = gb[i]; end
      for (int i = 0; i < len; i++) begin
        ga[i] = ta[i]; ga[len + i] =  tb[i];
        gb[i] = ta[i]; gb[len + i] = -tb[i];
      end
      len *= 2;
    end
    for (int n = 0; n < int'(N); n++) begin
      seq_re[2][n] = ga[n]; seq_im[2][n] = 0.0;
      seq_re[3][n] = gb[n]; seq_im[3][n] = 0.0;
    end
  endtask

  // Load S[k]/N of sequence b into bank b.
  task automatic load_bank(input int b);
    axil_write(8'h08, 32'(b) << 16);
    for (int k = 0; k < int'(N); k++) begin
      real sr = 0.0, si = 0.0, a;
      for (int n = 0; n < int'(N); n++) begin
        a = -2.0 * PI * real'((k * n) % N) / real'(N);
        sr += seq_re[b][n] * $cos(a) - seq_im[b][n] * $sin(a);
        si += seq_re[b][n] * $sin(a) + seq_im[b][n] * $cos(a);
      end
      axil_write(8'h0C, 32'(r2fx(sr / real'(N))));
      axil_write(8'h10, 32'(r2fx(si / real'(N))));
    end
  endtask

  // Fill bank b with one constant word.
  task automatic fill_bank(input int b, input real re, input real im);
    axil_write(8'h08, 32'(b) << 16);
    for (int k = 0; k < int'(N); k++) begin
      axil_write(8'h0C, 32'(r2fx(re)));
      axil_write(8'h10, 32'(r2fx(im)));
    end
  endtask

  // ---------------------------------------------------------------
  // Streams
  // ---------------------------------------------------------------
  cplx_t xin [N];
  cplx_t yout [N];
  int    last_pos;

  task automatic send_frame(input int gap_pct, input int tlast_at);
    for (int n = 0; n < int'(N); n++) begin
      @(negedge clk);
      while ($urandom_range(99) < gap_pct) begin
        s_axis_tvalid = 0;
        n_in_gap++;
        @(negedge clk);
      end
      s_axis_tvalid = 1;
      s_axis_tdata  = 48'(xin[n]);
      s_axis_tlast  = (n == tlast_at);
      do @(posedge clk); while (!s_axis_tready);
    end
    @(negedge clk) s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  task automatic recv_frame(input int stall_pct);
    last_pos = -1;
    for (int n = 0; n < int'(N); n++) begin
      @(negedge clk);
      while ($urandom_range(99) < stall_pct) begin
        m_axis_tready = 0;
        if (m_axis_tvalid) n_out_stall++;
        @(negedge clk);
      end
      m_axis_tready = 1;
      do @(posedge clk); while (!m_axis_tvalid);
      yout[n] = cplx_t'(m_axis_tdata);
      if (m_axis_tlast) last_pos = (last_pos < 0) ? n : -2;
    end
    @(negedge clk) m_axis_tready = 0;
    check(last_pos == int'(N) - 1, "tlast on the last output word only");
  endtask

  task automatic run_frame(input int gap_pct, input int stall_pct, input int tlast_at);
    fork
      send_frame(gap_pct, tlast_at);
      recv_frame(stall_pct);
    join
  endtask

  // Echo of waveform b from targets at delays d with amplitudes amp.
  task automatic make_echo(input int b, input int d [], input real amp []);
    for (int n = 0; n < int'(N); n++) begin
      real xr = 0.0, xi = 0.0;
      for (int t = 0; t < d.size(); t++) begin
        int m = (n - d[t] + int'(N)) % int'(N);
        xr += amp[t] * seq_re[b][m];
        xi += amp[t] * seq_im[b][m];
      end
      xin[n] = '{re: r2fx(xr), im: r2fx(xi)};
    end
  endtask

  // Compare the output with the direct circular cross-correlation.
  task automatic check_output(input int b, input int peak_at, input string what);
    real maxerr = 0.0, best = -1.0;
    int  best_r = -1;
    for (int r = 0; r < int'(N); r++) begin
      real er = 0.0, ei = 0.0, dr, di, mag;
      for (int n = 0; n < int'(N); n++) begin
        int  m  = (n - r + int'(N)) % int'(N);
        real xr = fx2r(xin[n].re), xi = fx2r(xin[n].im);
        er += xr * seq_re[b][m] + xi * seq_im[b][m];
        ei += xi * seq_re[b][m] - xr * seq_im[b][m];
      end
      er /= real'(N); ei /= real'(N);
      dr = fx2r(yout[r].re) - er; if (dr < 0.0) dr = -dr;
      di = fx2r(yout[r].im) - ei; if (di < 0.0) di = -di;
      if (dr > maxerr) maxerr = dr;
      if (di > maxerr) maxerr = di;
      mag = fx2r(yout[r].re) ** 2 + fx2r(yout[r].im) ** 2;
      if (mag > best) begin best = mag; best_r = r; end
    end
    check(maxerr < TOL, $sformatf("%s: output within %e of correlation", what, TOL));
    check(best_r == peak_at, $sformatf("%s: peak at bin %0d, expected %0d", what, best_r, peak_at));
    $display("%s: max error %e, peak bin %0d, peak |y| %f", what, maxerr, best_r, $sqrt(best));
  endtask

  // ---------------------------------------------------------------
  // Test
  // ---------------------------------------------------------------
  initial begin
    logic [31:0] d;
    int          frames;
    repeat (4) @(posedge clk);
    rst_n = 1;
    frames = 0;

    make_sequences();
    for (int b = 0; b < int'(NWF); b++) load_bank(b);

    // one frame per waveform, the first two with free-flowing streams
    for (int b = 0; b < int'(NWF); b++) begin
      automatic int  dl [] = '{37 + 131 * b, 250 + 40 * b};
      automatic real am [] = '{0.5, 0.15};
      if (b != 0) n_switch++;
      axil_write(8'h00, 32'(b));
      make_echo(b, dl, am);
      run_frame(b >= 2 ? 30 : 0, b >= 1 ? 30 : 0, int'(N) - 1);
      frames++;
      check_output(b, dl[0], $sformatf("waveform %0d", b));
      axil_read(8'h14, d);
      if (b == 0)
        check(d == 32'(3 * N + AW * N + 6), $sformatf("frame time %0d cycles, expected %0d", d, 3 * N + AW * N + 6));
      else
        check(d >= 32'(3 * N + AW * N + 6), "frame time with stalls not below the minimum");
    end
    axil_read(8'h04, d);
    check(d == {16'(frames), 16'h0000}, $sformatf("STATUS after clean frames: %h", d));

    // saturation: a reference and an input that exceed the range
    fill_bank(0, 0.99, 0.99);
    axil_write(8'h00, 32'd0);
    n_switch++;
    for (int n = 0; n < int'(N); n++) xin[n] = '0;
    xin[0] = '{re: r2fx(0.9), im: r2fx(0.9)};
    run_frame(0, 0, int'(N) - 1);
    frames++;
    axil_read(8'h04, d);
    if (d[1]) n_sat++;
    check(d[1] == 1'b1, "saturation flagged in STATUS");
    check(yout[0].re == FX_MAX, "saturated output clipped to full scale");
    axil_write(8'h04, 32'h2);

    // frame-length error: tlast on word 10
    axil_write(8'h00, 32'd3);
    n_switch++;
    make_echo(3, '{5}, '{0.3});
    run_frame(0, 0, 10);
    frames++;
    axil_read(8'h04, d);
    if (d[2]) n_len_err++;
    check(d[2] == 1'b1, "frame length error flagged in STATUS");
    check(d[1] == 1'b0, "saturation flag cleared");
    check(d[31:16] == 16'(frames), "frame counter");
    check_output(3, 5, "waveform 3 after length error");

    $display("mechanisms: waveform switches %0d, input gaps %0d, output stalls %0d, saturations %0d, length errors %0d",
             n_switch, n_in_gap, n_out_stall, n_sat, n_len_err);
    check(n_switch > 0,    "waveform switch exercised");
    check(n_in_gap > 0,    "input gap exercised");
    check(n_out_stall > 0, "output back-pressure exercised");
    check(n_sat > 0,       "saturation exercised");
    check(n_len_err > 0,   "frame length error exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
