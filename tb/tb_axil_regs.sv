// tb_axil_regs: self-checking test of the AXI4-Lite register file.
//
// Drives the slave with a simple AXI4-Lite master (address and data offered
// together, random delays before taking responses) and checks: waveform
// select write and read-back, reference loading through REF_ADDR / REF_RE /
// REF_IM with the auto-incrementing bin index and the bank, the sticky
// status bits and their write-1-to-clear, the frame counter and CYCLES
// register, and SLVERR for an unmapped address.
module tb_axil_regs;
  import mf_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned AW = $clog2(N);

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  s_axil_awaddr = '0, s_axil_araddr = '0;
  logic        s_axil_awvalid = 1'b0, s_axil_wvalid = 1'b0, s_axil_bready = 1'b0;
  logic        s_axil_arvalid = 1'b0, s_axil_rready = 1'b0;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;

  waveform_e     wf_sel, ref_bank;
  logic          ref_we;
  logic [AW-1:0] ref_idx;
  cplx_t         ref_data;
  logic          core_busy = 1'b0, ovf_evt = 1'b0, len_err_evt = 1'b0, frame_done = 1'b0;
  logic [31:0]   frame_cycles = '0;

  axil_regs #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // captured reference writes
  int            nref = 0;
  waveform_e     cap_bank [$];
  logic [AW-1:0] cap_idx  [$];
  cplx_t         cap_data [$];
  always @(posedge clk) if (ref_we) begin
    cap_bank.push_back(ref_bank);
    cap_idx.push_back(ref_idx);
    cap_data.push_back(ref_data);
    nref++;
  end

  task automatic axil_write(input logic [7:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    s_axil_bready = 1;
    do @(posedge clk); while (!s_axil_bvalid);
    resp = s_axil_bresp;
    @(negedge clk) s_axil_bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    s_axil_rready = 1;
    do @(posedge clk); while (!s_axil_rvalid);
    d = s_axil_rdata; resp = s_axil_rresp;
    @(negedge clk) s_axil_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0]  r;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // waveform select
    axil_read(8'h00, d, r);  check(d, 32'd0, "CTRL after reset");
    axil_write(8'h00, 32'd3, r); check(32'(r), 32'd0, "CTRL write resp");
    check(32'(wf_sel), 32'd3, "wf_sel output");
    axil_read(8'h00, d, r);  check(d, 32'd3, "CTRL read back");
    axil_write(8'h00, 32'd1, r);
    check(32'(wf_sel), 32'd1, "wf_sel switched");

    // reference load: bank 2, starting at bin N-2, three words (wraps)
    axil_write(8'h08, (32'd2 << 16) | 32'(N - 2), r);
    axil_read(8'h08, d, r); check(d, (32'd2 << 16) | 32'(N - 2), "REF_ADDR read back");
    for (int i = 0; i < 3; i++) begin
      axil_write(8'h0C, 32'h00100000 + 32'(i), r);
      axil_write(8'h10, 32'h00A00000 + 32'(i), r);
    end
    check(32'(nref), 32'd3, "reference writes");
    for (int i = 0; i < 3 && i < nref; i++) begin
      check(32'(cap_bank[i]), 32'd2, "reference bank");
      check(32'(cap_idx[i]), 32'((N - 2 + i) % N), "reference index");
      check({8'd0, cap_data[i].re}, 32'h100000 + 32'(i), "reference real");
      check({8'd0, cap_data[i].im}, 32'hA00000 + 32'(i), "reference imag");
    end
    axil_read(8'h08, d, r); check(d, (32'd2 << 16) | 32'd1, "REF_ADDR advanced");

    // status: busy, sticky flags, frame counter, cycles
    @(negedge clk) core_busy = 1;
    axil_read(8'h04, d, r); check(d, 32'h1, "STATUS busy");
    @(negedge clk) ovf_evt = 1;
    @(negedge clk) ovf_evt = 0; len_err_evt = 1;
    @(negedge clk) len_err_evt = 0; frame_done = 1; frame_cycles = 32'd1234; core_busy = 0;
    @(negedge clk) frame_done = 0;
    @(negedge clk) frame_done = 1; frame_cycles = 32'd777;
    @(negedge clk) frame_done = 0;
    axil_read(8'h04, d, r); check(d, 32'h0002_0006, "STATUS sticky and count");
    axil_read(8'h14, d, r); check(d, 32'd777, "CYCLES");
    axil_write(8'h04, 32'h2, r);
    axil_read(8'h04, d, r); check(d, 32'h0002_0004, "STATUS ovf cleared");
    axil_write(8'h04, 32'h4, r);
    axil_read(8'h04, d, r); check(d, 32'h0002_0000, "STATUS len cleared");

    // unmapped address
    axil_write(8'h40, 32'h5, r); check(32'(r), 32'd2, "SLVERR on write");
    axil_read(8'h40, d, r);     check(32'(r), 32'd2, "SLVERR on read");
    axil_read(8'h10, d, r);     check(32'(r), 32'd2, "REF_IM is write-only");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
