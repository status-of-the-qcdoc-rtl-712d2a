// qcdoc_asic: the custom logic of a QCDOC node chip, wired as in the
// chip's block diagram.
//
// Inside: the prefetching eDRAM controller with its 4 MB eDRAM (pec), the
// serial communications unit for the 12 torus links (scu) and the
// processor local bus that joins them (plb_bus).  Parts that come from a
// vendor library are outside and meet this module at its ports:
//   pdb_*     the PowerPC 440's data read/write busses (processor direct
//             bus); all processor data accesses enter here, eDRAM ones are
//             served by the PEC, the rest go out on the PLB;
//   plb_m_*   one more PLB master (the 440's instruction side, the
//             Ethernet DMA layer, ...);
//   plb_s_*   the PLB slaves outside: DDR controller, OPB bridge, ...;
//   tx_*/rx_* the byte-wide side of the HSSL serializers, one per link;
//   irq_*     interrupt lines for the interrupt controller.
// PLB masters, in arbitration order: PEC's PDB data master, PEC DMA, SCU
// send, SCU receive, external.  Slaves by address: eDRAM and PEC registers
// (PEC), SCU registers, everything else (external).  Everything runs on a
// single clock here; the original runs the PLB at 1/3 of the CPU clock.
module qcdoc_asic
  import qcdoc_pkg::*;
#(
  parameter int NL          = 12,
  parameter int LINES       = EDRAM_BYTES / LINE_BYTES,
  parameter int EDRAM_CYCLE = 8,
  parameter int REFRESH_INT = 976,
  parameter int SCU_NINSTR  = 16,
  parameter int SCU_TIMEOUT = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bus_req_t   pdb_req,
  output bus_rsp_t   pdb_rsp,
  input  bus_req_t   plb_m_req,
  output bus_rsp_t   plb_m_rsp,
  output bus_req_t   plb_s_req,
  input  bus_rsp_t   plb_s_rsp,
  output logic       tx_valid [NL],
  output logic [7:0] tx_byte  [NL],
  input  logic       rx_valid [NL],
  input  logic [7:0] rx_byte  [NL],
  output logic       irq_scu,
  output logic       irq_dma,
  output logic       irq_ecc
);
  bus_req_t m_req [5];
  bus_rsp_t m_rsp [5];
  bus_req_t s_req [3];
  bus_rsp_t s_rsp [3];

  logic ev_ecc_corr, ev_refresh, ev_prefetch, ev_coh_flush, ev_rmw;
  logic ev_parity, ev_resend, ev_duplicate, ev_forward;

  pec #(.LINES(LINES), .EDRAM_CYCLE(EDRAM_CYCLE), .REFRESH_INT(REFRESH_INT)) u_pec (
    .clk, .rst_n, .pdb_req, .pdb_rsp,
    .pdbm_req(m_req[0]), .pdbm_rsp(m_rsp[0]),
    .s_req(s_req[0]), .s_rsp(s_rsp[0]),
    .dma_m_req(m_req[1]), .dma_m_rsp(m_rsp[1]),
    .irq_dma, .irq_ecc,
    .ev_ecc_corr, .ev_refresh, .ev_prefetch, .ev_coh_flush, .ev_rmw
  );

  scu #(.NL(NL), .NINSTR(SCU_NINSTR), .TIMEOUT(SCU_TIMEOUT)) u_scu (
    .clk, .rst_n, .tx_valid, .tx_byte, .rx_valid, .rx_byte,
    .snd_m_req(m_req[2]), .snd_m_rsp(m_rsp[2]),
    .rcv_m_req(m_req[3]), .rcv_m_rsp(m_rsp[3]),
    .s_req(s_req[1]), .s_rsp(s_rsp[1]), .irq(irq_scu),
    .ev_parity, .ev_resend, .ev_duplicate, .ev_forward
  );

  assign m_req[4]  = plb_m_req;
  assign plb_m_rsp = m_rsp[4];
  assign plb_s_req = s_req[2];
  assign s_rsp[2]  = plb_s_rsp;

  plb_bus #(.NM(5)) u_plb (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );
endmodule
