// tb_sample_buf: self-checking test of the PRI working memory.
//
// Fills the buffer through both write ports with random words, keeps a
// model array, and checks both combinational read ports against it, the
// read-after-write behaviour in the cycle after a write, and that port B
// wins when both ports write one address in the same cycle.
module tb_sample_buf;
  import mf_pkg::*;

  localparam int unsigned N  = 64;
  localparam int unsigned AW = $clog2(N);

  logic          clk = 1'b0;
  logic [AW-1:0] rd_addr_a, rd_addr_b, wr_addr_a, wr_addr_b;
  cplx_t         rd_data_a, rd_data_b, wr_data_a, wr_data_b;
  logic          we_a, we_b;

  int checks = 0, failures = 0;
  cplx_t model [N];

  sample_buf #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input cplx_t got, input cplx_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    we_a = 0; we_b = 0;
    rd_addr_a = '0; rd_addr_b = '0; wr_addr_a = '0; wr_addr_b = '0;
    wr_data_a = '0; wr_data_b = '0;
    // fill: even words through port A, odd through port B, same cycle
    for (int i = 0; i < int'(N); i += 2) begin
      @(negedge clk);
      we_a = 1; we_b = 1;
      wr_addr_a = AW'(i);     wr_data_a = cplx_t'({$urandom, $urandom});
      wr_addr_b = AW'(i + 1); wr_data_b = cplx_t'({$urandom, $urandom});
      model[i] = wr_data_a; model[i+1] = wr_data_b;
    end
    @(negedge clk); we_a = 0; we_b = 0;
    // read everything back on both ports
    for (int i = 0; i < int'(N); i++) begin
      rd_addr_a = AW'(i); rd_addr_b = AW'(N - 1 - i);
      #1;
      check(rd_data_a, model[i], "port A read");
      check(rd_data_b, model[N-1-i], "port B read");
    end
    // read after write, random traffic
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      we_a = 1'($urandom); we_b = 1'($urandom);
      wr_addr_a = AW'($urandom); wr_data_a = cplx_t'({$urandom, $urandom});
      wr_addr_b = AW'($urandom); wr_data_b = cplx_t'({$urandom, $urandom});
      @(posedge clk);
      if (we_a) model[wr_addr_a] = wr_data_a;
      if (we_b) model[wr_addr_b] = wr_data_b;
      #1;
      rd_addr_a = wr_addr_a; rd_addr_b = wr_addr_b;
      #1;
      check(rd_data_a, model[rd_addr_a], "read after write A");
      check(rd_data_b, model[rd_addr_b], "read after write B");
    end
    // collision: port B wins
    @(negedge clk);
    we_a = 1; we_b = 1; wr_addr_a = AW'(5); wr_addr_b = AW'(5);
    wr_data_a = cplx_t'(48'h111111_222222); wr_data_b = cplx_t'(48'h333333_444444);
    @(negedge clk); we_a = 0; we_b = 0; rd_addr_a = AW'(5);
    #1 check(rd_data_a, cplx_t'(48'h333333_444444), "collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
