// tb_spec_mult: self-checking test of the conjugate spectral multiplier.
//
// Holds a buffer model and a reference table in the testbench. After one
// pass, buffer word m must equal X[m] * conj(R[bitrev(m)]) within rounding,
// computed here in floating point; the pass must take N cycles from start to
// done. A second pass with words at the negative full-scale corner must
// saturate and raise ovf.
module tb_spec_mult;
  import mf_pkg::*;

  localparam int unsigned N   = 32;
  localparam int unsigned AW  = $clog2(N);
  localparam real         LSB = 1.0 / real'(1 << FRAC);

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic          busy, done, ovf, we;
  logic [AW-1:0] rd_addr, wr_addr, ref_idx;
  cplx_t         rd_data, wr_data, ref_data;

  cplx_t mem [N];
  cplx_t rtab [N];
  assign rd_data  = mem[rd_addr];
  assign ref_data = rtab[ref_idx];
  always_ff @(posedge clk) if (we) mem[wr_addr] <= wr_data;

  spec_mult #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real er [N], ei [N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fx2r(input fx_t v);
    return real'(v) * LSB;
  endfunction

  function automatic int bitrev(input int v);
    int r = 0;
    for (int i = 0; i < int'(AW); i++) if (((v >> i) & 1) != 0) r |= 1 << (AW - 1 - i);
    return r;
  endfunction

  task automatic run();
    int cycles;
    @(negedge clk) start = 1;
    @(posedge clk);
    @(negedge clk) start = 0;
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
      @(negedge clk);
    end while (!done);
    checks++;
    if (cycles != int'(N)) begin
      failures++;
      $display("FAIL pass took %0d cycles, expected %0d", cycles, N);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < int'(N); m++) begin
      mem[m]  = cplx_t'({$urandom, $urandom});
      rtab[m] = cplx_t'({$urandom, $urandom});
    end
    for (int m = 0; m < int'(N); m++) begin
      automatic real xr = fx2r(mem[m].re), xi = fx2r(mem[m].im);
      automatic real rr = fx2r(rtab[bitrev(m)].re), ri = fx2r(rtab[bitrev(m)].im);
      er[m] = xr * rr + xi * ri;
      ei[m] = xi * rr - xr * ri;
      if (er[m] >  1.0 - LSB) er[m] =  1.0 - LSB;
      if (er[m] < -1.0)       er[m] = -1.0;
      if (ei[m] >  1.0 - LSB) ei[m] =  1.0 - LSB;
      if (ei[m] < -1.0)       ei[m] = -1.0;
    end
    run();
    for (int m = 0; m < int'(N); m++) begin
      automatic real dr = fx2r(mem[m].re) - er[m], di = fx2r(mem[m].im) - ei[m];
      checks++;
      if (dr > 2.0 * LSB || dr < -2.0 * LSB || di > 2.0 * LSB || di < -2.0 * LSB) begin
        failures++;
        $display("FAIL bin %0d: got (%f,%f) expected (%f,%f)", m,
                 fx2r(mem[m].re), fx2r(mem[m].im), er[m], ei[m]);
      end
    end

    // (-1 - j) * conj(-1 + j) = 2j: the imaginary part saturates
    for (int m = 0; m < int'(N); m++) begin
      mem[m]  = '{re: FX_MIN, im: FX_MIN};
      rtab[m] = '{re: FX_MIN, im: FX_MAX};
    end
    run();
    checks++;
    if (!ovf || mem[0].im != FX_MAX) begin
      failures++;
      $display("FAIL saturation: ovf=%0b im=%h", ovf, mem[0].im);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
