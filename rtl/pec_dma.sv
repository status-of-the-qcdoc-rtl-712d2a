// pec_dma: DMA engine of the PEC (DMABLK), moving data between the eDRAM
// and external DDR memory (or any other PLB address).
//
// It is programmed through registers in the PEC window (byte offsets):
//   0x00 SRC  source byte address (16-byte aligned)
//   0x08 DST  destination byte address (16-byte aligned)
//   0x10 LEN  bytes to move, a multiple of 16
//   0x18 GO   any write starts the transfer
//   0x20 STAT [0] busy, [1] done (a write clears done)
//   0x28 ECCC corrected eDRAM ECC errors      (read only)
//   0x30 ECCU uncorrectable eDRAM ECC errors  (read only)
//   0x38 RFSH refresh operations done         (read only)
// Each 16-byte beat is read, then written.  An eDRAM address goes through
// the DMA port of the PEC (with its own prefetch and write buffers); any
// other address goes out on the PEC's PLB master port.  One beat is in
// flight at a time.  The register map and the beat-by-beat copy are this
// design's choices; the original gives the engine's purpose.
module pec_dma
  import qcdoc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // register slave
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp,
  // eDRAM side (DMA port of the PEC)
  output bus_req_t e_req,
  input  bus_rsp_t e_rsp,
  // PLB master side
  output bus_req_t m_req,
  input  bus_rsp_t m_rsp,
  // statistics to show in the registers
  input  logic [31:0] ecc_corr_cnt,
  input  logic [31:0] ecc_unc_cnt,
  input  logic [31:0] refresh_cnt,
  output logic     irq
);
  typedef enum logic [1:0] {IDLE, RD, RWAIT, WR} st_e;
  st_e st;
  logic [31:0] src, dst, len, rs, rd_a, left;
  logic        done_q;
  logic [127:0] beat;
  logic        rdv_q, half_q;
  logic [63:0] rdata_q, wd, rv;
  logic [7:0]  off;
  logic        wr;

  assign off = s_req.addr[7:0];
  assign wd  = s_req.addr[3] ? s_req.wdata[127:64] : s_req.wdata[63:0];
  assign wr  = s_req.req && !s_req.rnw;
  assign s_rsp.gnt    = s_req.req;
  assign s_rsp.rvalid = rdv_q;
  assign s_rsp.rdata  = half_q ? {rdata_q, 64'd0} : {64'd0, rdata_q};
  assign irq = done_q;

  always_comb begin
    case (off)
      8'h00:   rv = {32'd0, src};
      8'h08:   rv = {32'd0, dst};
      8'h10:   rv = {32'd0, len};
      8'h20:   rv = {62'd0, done_q, st != IDLE};
      8'h28:   rv = {32'd0, ecc_corr_cnt};
      8'h30:   rv = {32'd0, ecc_unc_cnt};
      8'h38:   rv = {32'd0, refresh_cnt};
      default: rv = '0;
    endcase
  end

  // the beat request, routed by address
  bus_req_t r;
  bus_rsp_t p;
  logic     to_e;
  always_comb begin
    r = BUS_REQ_IDLE;
    if (st == RD) begin
      r.req = 1'b1; r.rnw = 1'b1; r.addr = rs;
    end else if (st == WR) begin
      r.req = 1'b1; r.rnw = 1'b0; r.addr = rd_a; r.be = '1; r.wdata = beat;
    end
    to_e  = is_edram(r.addr);
    e_req = to_e ? r : BUS_REQ_IDLE;
    m_req = to_e ? BUS_REQ_IDLE : r;
  end
  // responses: only the addressed side is active
  assign p.gnt    = e_rsp.gnt | m_rsp.gnt;
  assign p.rvalid = e_rsp.rvalid | m_rsp.rvalid;
  assign p.rdata  = e_rsp.rvalid ? e_rsp.rdata : m_rsp.rdata;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= IDLE; src <= '0; dst <= '0; len <= '0; rs <= '0; rd_a <= '0;
      left <= '0; done_q <= 1'b0; beat <= '0; rdv_q <= 1'b0; half_q <= 1'b0;
      rdata_q <= '0;
    end else begin
      rdv_q <= s_req.req && s_req.rnw;
      if (s_req.req && s_req.rnw) begin rdata_q <= rv; half_q <= s_req.addr[3]; end
      if (wr && st == IDLE) begin
        case (off)
          8'h00: src <= wd[31:0];
          8'h08: dst <= wd[31:0];
          8'h10: len <= wd[31:0];
          8'h18: if (len >= 16) begin
                   st <= RD; rs <= src; rd_a <= dst; left <= len >> 4; done_q <= 1'b0;
                 end
          8'h20: done_q <= 1'b0;
          default: ;
        endcase
      end
      case (st)
        RD:    if (p.gnt) st <= RWAIT;
        RWAIT: if (p.rvalid) begin beat <= p.rdata; st <= WR; end
        WR:    if (p.gnt) begin
                 rs <= rs + 32'd16; rd_a <= rd_a + 32'd16;
                 left <= left - 1'b1;
                 if (left == 1) begin st <= IDLE; done_q <= 1'b1; end
                 else st <= RD;
               end
        default: ;
      endcase
    end
endmodule
