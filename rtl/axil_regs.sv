// axil_regs: AXI4-Lite register file of the matched-filtering core.
//
// The processor configures the core at run time through this port: it
// selects which ISAC waveform the matched filter correlates against, loads
// the reference spectra of the four waveforms, and reads status.
//
// Register map (32-bit registers, byte addresses):
//   0x00 CTRL     RW  [1:0] waveform select (0 FMCW, 1 PMCW, 2 standard
//                     Golay, 3 Doppler-resilient Golay); taken by the core
//                     at the start of each PRI frame.
//   0x04 STATUS   R   [0] busy, [1] saturation seen (sticky), [2] frame
//                     length error seen (sticky), [31:16] frames processed.
//                 W   writing 1 to bit 1 or 2 clears that sticky bit.
//   0x08 REF_ADDR RW  [AW-1:0] bin index, [17:16] bank (waveform code).
//   0x0C REF_RE   RW  [23:0] real part of the next reference word.
//   0x10 REF_IM   W   [23:0] imaginary part; the write stores {REF_IM,
//                     REF_RE} into bank/bin REF_ADDR and advances the bin
//                     index by one (wrapping within the bank), so a bank
//                     is loaded with N pairs of writes after one REF_ADDR.
//   0x14 CYCLES   R   clock cycles the last frame took from its first
//                     input sample to its last output sample.
// Other addresses read as 0 and answer SLVERR.
//
// Handshake: a write is accepted, with awready and wready high together,
// in a cycle where both awvalid and wvalid are high and no write response
// is pending; bvalid follows one cycle later and is held until bready. A
// read is accepted when arvalid is high and no read data is pending; rvalid
// follows one cycle later and is held until rready. wstrb is ignored
// (registers are written whole). rst_n is an active-low synchronous reset.
//
// The paper shows an AXI-Lite link from the processor to the core and says
// the processor switches the waveform at run time; the register map is this
// design's own.
module axil_regs
  import mf_pkg::*;
#(
  parameter int unsigned N      = 512,
  parameter int unsigned ADDR_W = 8,
  localparam int unsigned AW    = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // configuration
  output waveform_e         wf_sel,
  output logic              ref_we,
  output waveform_e         ref_bank,
  output logic [AW-1:0]     ref_idx,
  output cplx_t             ref_data,
  // status from the core
  input  logic              core_busy,
  input  logic              ovf_evt,
  input  logic              len_err_evt,
  input  logic              frame_done,
  input  logic [31:0]       frame_cycles
);

  localparam logic [ADDR_W-1:0] A_CTRL     = ADDR_W'('h00);
  localparam logic [ADDR_W-1:0] A_STATUS   = ADDR_W'('h04);
  localparam logic [ADDR_W-1:0] A_REF_ADDR = ADDR_W'('h08);
  localparam logic [ADDR_W-1:0] A_REF_RE   = ADDR_W'('h0C);
  localparam logic [ADDR_W-1:0] A_REF_IM   = ADDR_W'('h10);
  localparam logic [ADDR_W-1:0] A_CYCLES   = ADDR_W'('h14);

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  fx_t         ref_re_q;
  logic        ovf_sticky, len_sticky;
  logic [15:0] frame_cnt;
  logic [31:0] cycles_q;

  // ------------------------------------------------------------------
  // Write channel
  // ------------------------------------------------------------------
  logic wr_go;
  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;

  assign ref_data = '{im: fx_t'(s_axil_wdata[DW-1:0]), re: ref_re_q};
  assign ref_we   = wr_go && (s_axil_awaddr == A_REF_IM);

  function automatic logic known(input logic [ADDR_W-1:0] a, input logic rd);
    case (a)
      A_CTRL, A_STATUS, A_REF_ADDR, A_REF_RE: return 1'b1;
      A_REF_IM: return !rd;
      A_CYCLES: return rd;
      default:  return 1'b0;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
      wf_sel        <= WF_FMCW;
      ref_bank      <= WF_FMCW;
      ref_idx       <= '0;
      ref_re_q      <= '0;
      ovf_sticky    <= 1'b0;
      len_sticky    <= 1'b0;
      frame_cnt     <= '0;
      cycles_q      <= '0;
    end else begin
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;

      if (ovf_evt)     ovf_sticky <= 1'b1;
      if (len_err_evt) len_sticky <= 1'b1;
      if (frame_done) begin
        frame_cnt <= frame_cnt + 1'b1;
        cycles_q  <= frame_cycles;
      end

      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= known(s_axil_awaddr, 1'b0) ? RESP_OKAY : RESP_SLVERR;
        case (s_axil_awaddr)
          A_CTRL:     wf_sel <= waveform_e'(s_axil_wdata[1:0]);
          A_STATUS: begin
            if (s_axil_wdata[1]) ovf_sticky <= 1'b0;
            if (s_axil_wdata[2]) len_sticky <= 1'b0;
          end
          A_REF_ADDR: begin
            ref_idx  <= s_axil_wdata[AW-1:0];
            ref_bank <= waveform_e'(s_axil_wdata[17:16]);
          end
          A_REF_RE:   ref_re_q <= fx_t'(s_axil_wdata[DW-1:0]);
          A_REF_IM:   ref_idx  <= ref_idx + 1'b1;
          default: ;
        endcase
      end
    end
  end

  // ------------------------------------------------------------------
  // Read channel
  // ------------------------------------------------------------------
  assign s_axil_arready = !s_axil_rvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      s_axil_rresp  <= RESP_OKAY;
    end else begin
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rresp  <= known(s_axil_araddr, 1'b1) ? RESP_OKAY : RESP_SLVERR;
        case (s_axil_araddr)
          A_CTRL:     s_axil_rdata <= {30'd0, wf_sel};
          A_STATUS:   s_axil_rdata <= {frame_cnt, 13'd0, len_sticky, ovf_sticky, core_busy};
          A_REF_ADDR: s_axil_rdata <= {14'd0, ref_bank, 16'(ref_idx)};
          A_REF_RE:   s_axil_rdata <= 32'(signed'(ref_re_q));
          A_CYCLES:   s_axil_rdata <= cycles_q;
          default:    s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // wstrb is accepted for protocol completeness; registers are written whole.
  logic unused_ok;
  assign unused_ok = ^{s_axil_wstrb, s_axil_wdata[31:DW]};

  // AXI4-Lite rules: a response, once valid, stays until it is taken.
  a_bvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
