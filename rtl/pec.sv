// pec: prefetching eDRAM controller.
//
// Gives the processor fast access to the 4 MB eDRAM and lets PLB masters
// and a DMA engine share it.  Three ports reach the eDRAM, each through a
// pec_port with four 1024-bit read prefetch registers (two sets of two) and
// two 1024-bit write buffers:
//   port 0  PDB, the processor direct bus from the 440's data read/write
//           busses, running at the CPU clock;
//   port 1  PLB slave, for any PLB master;
//   port 2  DMA engine (pec_dma).
// pec_edram_ctrl arbitrates them and the refresh timer for the eDRAM,
// adds and checks the ECC and keeps the ports coherent.
// PDB accesses outside the eDRAM leave on a PLB master port (the PDB's
// "PLB data master"), so the processor reaches the rest of the node through
// the PEC.  PLB slave accesses to the PEC register window go to the DMA
// registers.  The DMA engine has its own PLB master port.
// Timing: a PDB read that hits a prefetch register returns data the cycle
// after the request; the eDRAM delivers a 128-byte line every CYCLE
// (default 8) clocks, 16 bytes per clock.  All of it runs on one clock.
module pec
  import qcdoc_pkg::*;
#(
  parameter int LINES       = EDRAM_BYTES / LINE_BYTES,
  parameter int EDRAM_CYCLE = 8,
  parameter int REFRESH_INT = 976
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t pdb_req,      // from the 440 data busses
  output bus_rsp_t pdb_rsp,
  output bus_req_t pdbm_req,     // PDB accesses outside the eDRAM, to PLB
  input  bus_rsp_t pdbm_rsp,
  input  bus_req_t s_req,        // PLB slave
  output bus_rsp_t s_rsp,
  output bus_req_t dma_m_req,    // DMA engine's PLB master
  input  bus_rsp_t dma_m_rsp,
  output logic     irq_dma,
  output logic     irq_ecc,      // an uncorrectable error was seen
  // events for statistics
  output logic     ev_ecc_corr,
  output logic     ev_refresh,
  output logic     ev_prefetch,
  output logic     ev_coh_flush,
  output logic     ev_rmw
);
  localparam int NP  = 3;
  localparam int LAW = $clog2(LINES);

  bus_req_t p_req [NP];
  bus_rsp_t p_rsp [NP];
  bus_req_t reg_req;
  bus_rsp_t reg_rsp;

  // ---------------- PDB decode ----------------
  logic pdb_sel_e;
  assign pdb_sel_e = is_edram(pdb_req.addr);
  always_comb begin
    p_req[0] = pdb_sel_e ? pdb_req : BUS_REQ_IDLE;
    pdbm_req = pdb_sel_e ? BUS_REQ_IDLE : pdb_req;
  end
  assign pdb_rsp.gnt    = pdb_sel_e ? p_rsp[0].gnt : pdbm_rsp.gnt;
  assign pdb_rsp.rvalid = p_rsp[0].rvalid | pdbm_rsp.rvalid;
  assign pdb_rsp.rdata  = p_rsp[0].rvalid ? p_rsp[0].rdata : pdbm_rsp.rdata;

  // ---------------- PLB slave decode ----------------
  logic s_sel_reg;
  assign s_sel_reg = is_pec_reg(s_req.addr);
  always_comb begin
    p_req[1] = s_sel_reg ? BUS_REQ_IDLE : s_req;
    reg_req  = s_sel_reg ? s_req : BUS_REQ_IDLE;
  end
  assign s_rsp.gnt    = s_sel_reg ? reg_rsp.gnt : p_rsp[1].gnt;
  assign s_rsp.rvalid = reg_rsp.rvalid | p_rsp[1].rvalid;
  assign s_rsp.rdata  = reg_rsp.rvalid ? reg_rsp.rdata : p_rsp[1].rdata;

  // ---------------- statistics ----------------
  logic [31:0] ecc_corr_cnt, ecc_unc_cnt, refresh_cnt;
  logic        ecc_unc;

  // ---------------- DMA ----------------
  pec_dma u_dma (
    .clk, .rst_n, .s_req(reg_req), .s_rsp(reg_rsp), .e_req(p_req[2]),
    .e_rsp(p_rsp[2]), .m_req(dma_m_req), .m_rsp(dma_m_rsp),
    .ecc_corr_cnt, .ecc_unc_cnt, .refresh_cnt, .irq(irq_dma)
  );

  // ---------------- ports ----------------
  logic                  rd_req  [NP], rd_ack [NP], wr_req [NP], wr_ack [NP];
  logic [LAW-1:0]        rd_line [NP], wr_line [NP];
  logic [LINE_BITS-1:0]  rd_data;
  logic [LINE_BITS-1:0]  wr_data [NP];
  logic [LINE_BYTES-1:0] wr_mask [NP];
  logic [1:0]            wb_valid [NP];
  logic [LAW-1:0]        wb_tag [NP][2];
  logic                  flush_req [NP];
  logic [LAW-1:0]        flush_line;
  logic                  inv [NP];
  logic [LAW-1:0]        inv_line [NP];
  logic [NP-1:0]         pf, rmw_n;

  for (genvar i = 0; i < NP; i++) begin : g_port
    pec_port #(.NP(NP), .LAW(LAW)) u_port (
      .clk, .rst_n, .req(p_req[i]), .rsp(p_rsp[i]),
      .rd_req(rd_req[i]), .rd_line(rd_line[i]), .rd_ack(rd_ack[i]), .rd_data,
      .wr_req(wr_req[i]), .wr_line(wr_line[i]), .wr_data(wr_data[i]),
      .wr_mask(wr_mask[i]), .wr_ack(wr_ack[i]),
      .wb_valid(wb_valid[i]), .wb_tag(wb_tag[i]),
      .flush_req(flush_req[i]), .flush_line,
      .inv_out(inv[i]), .inv_out_line(inv_line[i]),
      .inv_in(inv), .inv_in_line(inv_line),
      .ev_hit(), .ev_miss(), .ev_prefetch(pf[i]), .ev_wmerge()
    );
    assign rmw_n[i] = wr_ack[i] && !(&wr_mask[i]);
  end
  assign ev_prefetch = |pf;
  assign ev_rmw      = |rmw_n;

  // ---------------- eDRAM control, refresh, array ----------------
  logic           ref_req, ref_ack;
  logic [LAW-1:0] ref_row;
  logic           e_ready, e_rd, e_wr, e_ref, e_rvalid;
  logic [LAW-1:0] e_addr;
  logic [EDRAM_W-1:0] e_wdata, e_rdata;
  logic           ecc_corr;

  pec_refresh #(.ROWS(LINES), .INTERVAL(REFRESH_INT)) u_ref (
    .clk, .rst_n, .req(ref_req), .row(ref_row), .ack(ref_ack)
  );

  pec_edram_ctrl #(.NP(NP), .LAW(LAW)) u_ctrl (
    .clk, .rst_n, .rd_req, .rd_line, .rd_ack, .rd_data, .wr_req, .wr_line,
    .wr_data, .wr_mask, .wr_ack, .wb_valid, .wb_tag, .flush_req, .flush_line,
    .ref_req, .ref_row, .ref_ack, .ecc_corrected(ecc_corr),
    .ecc_uncorrectable(ecc_unc), .e_ready, .e_rd, .e_wr, .e_ref, .e_addr,
    .e_wdata, .e_rvalid, .e_rdata
  );

  edram #(.DEPTH(LINES), .CYCLE(EDRAM_CYCLE)) u_edram (
    .clk, .rst_n, .ready(e_ready), .cmd_rd(e_rd), .cmd_wr(e_wr),
    .cmd_ref(e_ref), .addr(e_addr), .wdata(e_wdata), .rvalid(e_rvalid),
    .rdata(e_rdata)
  );

  logic coh;
  always_comb begin
    coh = 1'b0;
    for (int i = 0; i < NP; i++) coh |= flush_req[i];
  end

  assign ev_ecc_corr  = ecc_corr;
  assign ev_refresh   = ref_ack;
  assign ev_coh_flush = coh;

  logic unc_seen;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ecc_corr_cnt <= '0; ecc_unc_cnt <= '0; refresh_cnt <= '0; unc_seen <= 1'b0;
    end else begin
      if (ecc_corr) ecc_corr_cnt <= ecc_corr_cnt + 1'b1;
      if (ecc_unc)  begin ecc_unc_cnt <= ecc_unc_cnt + 1'b1; unc_seen <= 1'b1; end
      if (ref_ack)  refresh_cnt <= refresh_cnt + 1'b1;
    end
  assign irq_ecc = unc_seen;
endmodule
