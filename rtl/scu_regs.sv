// scu_regs: control registers of the SCU behind its PLB slave interface.
//
// One write to START launches any subset of the 24 DMA channels at once
// (channels 0..11 send on links 0..11, channels 12..23 receive on them), as
// one write instruction from the CPU can start many transfers in the
// original.  Map (byte offsets in the SCU window, 64-bit registers, the
// half of the 128-bit beat chosen by address bit 3):
//   0x0000 START    W  bit c starts channel c
//   0x0008 BUSY     R  bit c: channel c running
//   0x0010 DONE     RW bit c: channel c finished; write 1 to clear
//   0x0018 ERRCNT   R  [31:0] parity errors seen, [63:32] resends done
//   0x0100+8c CHCFG RW [3:0] first instruction, [8:4] instruction count
//   0x0200+8l ROUTE RW passthru of receive link l: [0] on, [1] keep, [7:4] dst
//   0x1000+0x80c+8i W  instruction i of channel c (scu_instr_t)
// Writes are granted at once; reads are granted at once and answer one
// cycle later.  The map is this design's choice.
module scu_regs
  import qcdoc_pkg::*;
#(
  parameter int NL     = 12,
  parameter int NINSTR = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    s_req,
  output bus_rsp_t    s_rsp,
  // DMA channels
  output logic        iw_en   [2*NL],
  output logic [$clog2(NINSTR)-1:0] iw_idx,
  output scu_instr_t  iw_data,
  output logic        start   [2*NL],
  output logic [$clog2(NINSTR)-1:0] start_idx [2*NL],
  output logic [$clog2(NINSTR):0]   start_cnt [2*NL],
  input  logic        busy    [2*NL],
  input  logic        done    [2*NL],
  // passthru routes
  output logic        pt_en   [NL],
  output logic        pt_keep [NL],
  output logic [3:0]  pt_dst  [NL],
  // error events
  input  logic        ev_parity,
  input  logic        ev_resend,
  output logic        irq
);
  localparam int NC = 2 * NL;
  localparam int XW = $clog2(NINSTR);

  logic [NC-1:0]  done_q;
  logic [31:0]    perr_q, resend_q;
  logic [8:0]     chcfg [NC];
  logic [7:0]     route [NL];
  logic [63:0]    wd, rd;
  logic [15:0]    off;
  logic           wr, rdv_q;
  logic [63:0]    rdata_q;
  logic           half_q;

  assign off   = s_req.addr[15:0];
  assign wd    = s_req.addr[3] ? s_req.wdata[127:64] : s_req.wdata[63:0];
  assign wr    = s_req.req && !s_req.rnw;
  assign s_rsp.gnt    = s_req.req;
  assign s_rsp.rvalid = rdv_q;
  assign s_rsp.rdata  = half_q ? {rdata_q, 64'd0} : {64'd0, rdata_q};
  assign irq   = |done_q;

  assign iw_idx  = XW'(off[6:3]);
  assign iw_data = scu_instr_t'(wd);

  always_comb
    for (int c = 0; c < NC; c++) begin
      iw_en[c]     = wr && off[15:12] == 4'h1 && int'(off[11:7]) == c;
      start[c]     = wr && off == 16'h0000 && wd[c];
      start_idx[c] = XW'(chcfg[c][3:0]);
      start_cnt[c] = (XW+1)'(chcfg[c][8:4]);
    end
  always_comb
    for (int l = 0; l < NL; l++) begin
      pt_en[l]   = route[l][0];
      pt_keep[l] = route[l][1];
      pt_dst[l]  = route[l][7:4];
    end

  always_comb begin
    rd = '0;
    if (off == 16'h0008) for (int c = 0; c < NC; c++) rd[c] = busy[c];
    if (off == 16'h0010) rd[NC-1:0] = done_q;
    if (off == 16'h0018) rd = {resend_q, perr_q};
    for (int c = 0; c < NC; c++) if (off == 16'h0100 + 16'(8*c)) rd[8:0] = chcfg[c];
    for (int l = 0; l < NL; l++) if (off == 16'h0200 + 16'(8*l)) rd[7:0] = route[l];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      done_q <= '0; perr_q <= '0; resend_q <= '0;
      rdv_q <= 1'b0; rdata_q <= '0; half_q <= 1'b0;
      for (int c = 0; c < NC; c++) chcfg[c] <= 9'h010;   // 1 instruction at 0
      for (int l = 0; l < NL; l++) route[l] <= '0;
    end else begin
      rdv_q <= s_req.req && s_req.rnw;
      if (s_req.req && s_req.rnw) begin
        rdata_q <= rd;
        half_q  <= s_req.addr[3];
      end
      for (int c = 0; c < NC; c++) begin
        if (done[c]) done_q[c] <= 1'b1;
        else if (wr && off == 16'h0010 && wd[c]) done_q[c] <= 1'b0;
        if (wr && off == 16'h0100 + 16'(8*c)) chcfg[c] <= wd[8:0];
      end
      for (int l = 0; l < NL; l++)
        if (wr && off == 16'h0200 + 16'(8*l)) route[l] <= wd[7:0];
      if (ev_parity) perr_q   <= perr_q + 1'b1;
      if (ev_resend) resend_q <= resend_q + 1'b1;
    end
endmodule
