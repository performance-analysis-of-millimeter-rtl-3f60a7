// tb_point_target: range estimation of a single moving point scatterer.
//
// Workload: an isotropic point target at (12, 9, 0) m from the radar, i.e.
// 15 m range, moving at 2 m/s, with a 60 GHz carrier, 1.76 GHz bandwidth and
// 2 us PRI. With range bins of c / (2 * 1.76 GHz) = 0.0852 m the echo delay is
// bin 176; the Doppler shift 2 v / lambda = 800 Hz turns the echo phase by
// 2*pi * 800 Hz * 2 us = 0.01 rad from one PRI to the next.
//
// The core runs at its default size (N = 512) with the four banks loaded as
// in tb_mf_core (FMCW chirp, PMCW code, Golay pair members Ga and Gb). For
// FMCW and PMCW one PRI is filtered and the peak must be at bin 176. For the
// Golay waveforms four PRIs are filtered, the processor selecting the bank of
// each PRI, and the four outputs are summed coherently (the slow-time DC
// term): the standard order Ga Gb Ga Gb leaves a first-order Doppler residue
// in the range sidelobes, the Prouhet-Thue-Morse order Ga Gb Gb Ga cancels it
// to second order. Checked: all peaks at bin 176, and the peak-to-sidelobe
// ratio (PSLR) of the Thue-Morse sum at least 6 dB above that of the
// standard sum. All PSLRs are printed.
module tb_point_target;
  import mf_pkg::*;

  localparam int unsigned N      = 512;          // the core's default
  localparam real         PI     = 3.14159265358979323846;
  localparam real         LSB    = 1.0 / real'(1 << FRAC);
  localparam int          DELAY  = 176;          // 15 m / 0.0852 m
  localparam real         DPHASE = 2.0 * PI * 800.0 * 2.0e-6;

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

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    s_axil_bready = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk) s_axil_bready = 0;
  endtask

  real seq_re [NWF][N], seq_im [NWF][N];

  task automatic make_sequences();
    real ga [N], gb [N], ta [N], tb [N];
    int  len;
    logic [14:0] lfsr = 15'h1;
    real ph;
    for (int n = 0; n < int'(N); n++) begin
      ph = PI * real'(n) * real'(n) / real'(N);
      seq_re[0][n] = $cos(ph); seq_im[0][n] = $sin(ph);
    end
    ph = 0.0;
    for (int n = 0; n < int'(N); n++) begin
      if (lfsr[0]) ph = (ph == 0.0) ? PI : 0.0;
      lfsr = {lfsr[0] ^ lfsr[1], lfsr[14:1]};
      seq_re[1][n] = $cos(ph); seq_im[1][n] = 0.0;
    end
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

  // One PRI of waveform b, echo delayed by DELAY with slow-time phase p*DPHASE.
  real yr [N], yi [N];

  task automatic run_pri(input int b, input int p);
    real c = 0.5 * $cos(-DPHASE * real'(p)), s = 0.5 * $sin(-DPHASE * real'(p));
    axil_write(8'h00, 32'(b));
    fork
      for (int n = 0; n < int'(N); n++) begin
        automatic int m = (n - DELAY + int'(N)) % int'(N);
        automatic cplx_t w;
        w.re = r2fx(c * seq_re[b][m] - s * seq_im[b][m]);
        w.im = r2fx(c * seq_im[b][m] + s * seq_re[b][m]);
        @(negedge clk);
        s_axis_tvalid = 1; s_axis_tdata = 48'(w); s_axis_tlast = (n == int'(N) - 1);
        do @(posedge clk); while (!s_axis_tready);
      end
      for (int r = 0; r < int'(N); r++) begin
        automatic cplx_t y;
        @(negedge clk);
        m_axis_tready = 1;
        do @(posedge clk); while (!m_axis_tvalid);
        y = cplx_t'(m_axis_tdata);
        yr[r] += fx2r(y.re);
        yi[r] += fx2r(y.im);
      end
    join
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0; m_axis_tready = 0;
  endtask

  task automatic clear_acc();
    for (int r = 0; r < int'(N); r++) begin yr[r] = 0.0; yi[r] = 0.0; end
  endtask

  // Peak bin and PSLR (dB) of the accumulated output; sidelobes exclude the peak bin.
  task automatic analyse(input string what, output real pslr);
    real pk = -1.0, sl = 0.0, mag;
    int  pk_r = -1;
    for (int r = 0; r < int'(N); r++) begin
      mag = yr[r] * yr[r] + yi[r] * yi[r];
      if (mag > pk) begin pk = mag; pk_r = r; end
    end
    for (int r = 0; r < int'(N); r++) begin
      mag = yr[r] * yr[r] + yi[r] * yi[r];
      if (r != pk_r && mag > sl) sl = mag;
    end
    if (sl < 1.0e-30) sl = 1.0e-30;
    pslr = 10.0 * $log10(pk / sl);
    check(pk_r == DELAY, $sformatf("%s: peak at bin %0d, expected %0d", what, pk_r, DELAY));
    $display("%s: peak bin %0d (%0.2f m), |peak| %f, PSLR %0.1f dB",
             what, pk_r, real'(pk_r) * 0.0852, $sqrt(pk), pslr);
  endtask

  initial begin
    real p_fmcw, p_pmcw, p_std, p_dr;
    repeat (4) @(posedge clk);
    rst_n = 1;
    make_sequences();
    for (int b = 0; b < int'(NWF); b++) load_bank(b);

    clear_acc(); run_pri(0, 0); analyse("FMCW, one PRI", p_fmcw);
    clear_acc(); run_pri(1, 0); analyse("PMCW, one PRI", p_pmcw);

    // standard Golay: Ga Gb Ga Gb
    clear_acc();
    run_pri(2, 0); run_pri(3, 1); run_pri(2, 2); run_pri(3, 3);
    analyse("Golay, standard order, 4 PRIs", p_std);

    // Doppler-resilient Golay: Prouhet-Thue-Morse order Ga Gb Gb Ga
    clear_acc();
    run_pri(2, 0); run_pri(3, 1); run_pri(3, 2); run_pri(2, 3);
    analyse("Golay, Thue-Morse order, 4 PRIs", p_dr);

    check(p_dr >= p_std + 6.0,
          $sformatf("Thue-Morse PSLR %0.1f dB not 6 dB above standard %0.1f dB", p_dr, p_std));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
