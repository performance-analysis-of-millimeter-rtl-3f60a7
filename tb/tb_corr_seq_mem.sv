// tb_corr_seq_mem: self-checking test of the four-bank reference store.
//
// Writes a distinct random word to every bin of every bank, then reads all
// of them back by (bank, bin) and compares with a model, which shows that the
// banks do not alias; finally rewrites one word and checks that only it
// changed.
module tb_corr_seq_mem;
  import mf_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned AW = $clog2(N);

  logic          clk = 1'b0;
  logic          we;
  waveform_e     wr_bank, rd_bank;
  logic [AW-1:0] wr_idx, rd_idx;
  cplx_t         wr_data, rd_data;

  int checks = 0, failures = 0;
  cplx_t model [NWF][N];

  corr_seq_mem #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(input string what);
    for (int b = 0; b < int'(NWF); b++)
      for (int i = 0; i < int'(N); i++) begin
        rd_bank = waveform_e'(b); rd_idx = AW'(i);
        #1;
        checks++;
        if (rd_data !== model[b][i]) begin
          failures++;
          $display("FAIL %s bank %0d bin %0d: got %h expected %h", what, b, i, rd_data, model[b][i]);
        end
      end
  endtask

  initial begin
    we = 0; wr_bank = WF_FMCW; wr_idx = '0; wr_data = '0; rd_bank = WF_FMCW; rd_idx = '0;
    for (int b = 0; b < int'(NWF); b++)
      for (int i = 0; i < int'(N); i++) begin
        @(negedge clk);
        we = 1; wr_bank = waveform_e'(b); wr_idx = AW'(i);
        wr_data = cplx_t'({$urandom, $urandom});
        model[b][i] = wr_data;
      end
    @(negedge clk); we = 0;
    read_all("initial");
    @(negedge clk);
    we = 1; wr_bank = WF_GOLAY; wr_idx = AW'(7); wr_data = cplx_t'(48'hABCDEF_123456);
    model[2][7] = wr_data;
    @(negedge clk); we = 0;
    read_all("after rewrite");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
