// tb_fft_engine: self-checking test of the radix-2 FFT / IFFT engine.
//
// The engine works on a memory model held in this testbench (combinational
// reads, writes at the clock edge, like sample_buf). Three passes are run on
// random input and compared with a direct DFT computed here in floating
// point:
//   1. forward, decimation in frequency, scaled: natural-order input, output
//      in bit-reversed order equal to DFT(x)/N;
//   2. inverse, decimation in time, unscaled: bit-reversed input, natural
//      output equal to the inverse DFT sum_k X[k] exp(+j 2 pi k n / N);
//   3. forward, unscaled, on a large constant input, which must saturate and
//      raise ovf.
// Each pass must take log2(N) * N/2 cycles from start to done.
module tb_fft_engine;
  import mf_pkg::*;

  localparam int unsigned N   = 32;
  localparam int unsigned AW  = $clog2(N);
  localparam real         PI  = 3.14159265358979323846;
  localparam real         LSB = 1.0 / real'(1 << FRAC);
  localparam real         TOL = 16.0 * LSB * real'(AW);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          start = 1'b0, inverse = 1'b0, dif = 1'b0, scale = 1'b0;
  logic          busy, done, ovf, we;
  logic [AW-1:0] rd_addr_a, rd_addr_b, wr_addr_a, wr_addr_b;
  cplx_t         rd_data_a, rd_data_b, wr_data_a, wr_data_b;

  cplx_t mem [N];
  assign rd_data_a = mem[rd_addr_a];
  assign rd_data_b = mem[rd_addr_b];
  always_ff @(posedge clk) if (we) begin
    mem[wr_addr_a] <= wr_data_a;
    mem[wr_addr_b] <= wr_data_b;
  end

  fft_engine #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real xr [N], xi [N], er [N], ei [N];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fx2r(input fx_t v);
    return real'(v) * LSB;
  endfunction

  function automatic fx_t r2fx(input real v);
    return fx_t'($rtoi(v * real'(1 << FRAC)));
  endfunction

  function automatic int bitrev(input int v);
    int r = 0;
    for (int i = 0; i < int'(AW); i++) if (((v >> i) & 1) != 0) r |= 1 << (AW - 1 - i);
    return r;
  endfunction

  // e = sum_n x[n] exp(sgn * j 2 pi k n / N) * gain
  task automatic dft(input real sgn, input real gain);
    for (int k = 0; k < int'(N); k++) begin
      er[k] = 0.0; ei[k] = 0.0;
      for (int n = 0; n < int'(N); n++) begin
        automatic real a = sgn * 2.0 * PI * real'(k * n) / real'(N);
        er[k] += xr[n] * $cos(a) - xi[n] * $sin(a);
        ei[k] += xr[n] * $sin(a) + xi[n] * $cos(a);
      end
      er[k] *= gain; ei[k] *= gain;
    end
  endtask

  task automatic run(input logic inv, input logic d, input logic s, output int cycles);
    @(negedge clk);
    start = 1; inverse = inv; dif = d; scale = s;
    @(posedge clk);
    @(negedge clk) start = 0;
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
      @(negedge clk);
    end while (!done);
    checks++;
    if (cycles != int'(AW * N / 2)) begin
      failures++;
      $display("FAIL pass took %0d cycles, expected %0d", cycles, AW * N / 2);
    end
  endtask

  task automatic compare(input bit out_bitrev, input string what);
    real maxerr = 0.0;
    for (int k = 0; k < int'(N); k++) begin
      automatic int a = out_bitrev ? bitrev(k) : k;
      automatic real dr = fx2r(mem[a].re) - er[k];
      automatic real di = fx2r(mem[a].im) - ei[k];
      if (dr < 0) dr = -dr;
      if (di < 0) di = -di;
      if (dr > maxerr) maxerr = dr;
      if (di > maxerr) maxerr = di;
      checks++;
      if (dr > TOL || di > TOL) begin
        failures++;
        $display("FAIL %s bin %0d: got (%f,%f) expected (%f,%f)", what, k,
                 fx2r(mem[a].re), fx2r(mem[a].im), er[k], ei[k]);
      end
    end
    $display("%s: max error %e (tolerance %e)", what, maxerr, TOL);
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. forward DIF, scaled
    for (int n = 0; n < int'(N); n++) begin
      xr[n] = (real'($urandom_range(2000)) - 1000.0) / 1100.0;
      xi[n] = (real'($urandom_range(2000)) - 1000.0) / 1100.0;
      mem[n] = '{re: r2fx(xr[n]), im: r2fx(xi[n])};
      xr[n] = fx2r(mem[n].re); xi[n] = fx2r(mem[n].im);
    end
    dft(-1.0, 1.0 / real'(N));
    run(1'b0, 1'b1, 1'b1, cyc);
    compare(1'b1, "forward DIF scaled");
    checks++;
    if (ovf) begin failures++; $display("FAIL unexpected ovf in scaled pass"); end

    // 2. inverse DIT, unscaled, on a small spectrum placed in bit-reversed order
    for (int k = 0; k < int'(N); k++) begin
      xr[k] = (real'($urandom_range(2000)) - 1000.0) / (1100.0 * real'(N));
      xi[k] = (real'($urandom_range(2000)) - 1000.0) / (1100.0 * real'(N));
      mem[bitrev(k)] = '{re: r2fx(xr[k]), im: r2fx(xi[k])};
      xr[k] = fx2r(mem[bitrev(k)].re); xi[k] = fx2r(mem[bitrev(k)].im);
    end
    dft(1.0, 1.0);
    run(1'b1, 1'b0, 1'b0, cyc);
    compare(1'b0, "inverse DIT unscaled");
    checks++;
    if (ovf) begin failures++; $display("FAIL unexpected ovf in inverse pass"); end

    // 3. unscaled forward on a large constant: DC bin = N * 0.5 saturates
    for (int n = 0; n < int'(N); n++) mem[n] = '{re: r2fx(0.5), im: r2fx(0.0)};
    run(1'b0, 1'b1, 1'b0, cyc);
    checks++;
    if (!ovf || mem[0].re != FX_MAX) begin
      failures++;
      $display("FAIL saturation: ovf=%0b dc=%h", ovf, mem[0].re);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
