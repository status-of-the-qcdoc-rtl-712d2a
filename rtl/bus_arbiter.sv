// bus_arbiter: connects N bus masters to one bus port.
//
// Round-robin among requesting masters.  The winner owns the port until
// its transfer completes: a write at gnt, a read at rvalid.  Only the owner
// sees gnt/rvalid; the others see an idle response.  One transfer is in
// flight at a time.  The SCU uses one of these for its send DMA engines and
// one for its receive DMA engines (the arbiter and mux in front of each PLB
// master interface); the node's PLB uses one for all its masters.
module bus_arbiter
  import qcdoc_pkg::*;
#(
  parameter int N = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [N],
  output bus_rsp_t m_rsp [N],
  output bus_req_t s_req,
  input  bus_rsp_t s_rsp,
  output logic [$clog2(N > 1 ? N : 2)-1:0] owner_o
);
  localparam int IW = $clog2(N > 1 ? N : 2);

  typedef enum logic [1:0] {IDLE, ADDR, RDATA} st_e;
  st_e st;
  logic [IW-1:0] owner;
  logic [N-1:0]  reqv;
  logic [IW-1:0] gi;

  always_comb for (int i = 0; i < N; i++) reqv[i] = m_req[i].req;

  rr_arbiter #(.N(N)) u_rr (
    .clk, .rst_n, .req(reqv), .advance(st == IDLE), .gnt(), .gnt_idx(gi)
  );

  assign owner_o = owner;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st    <= IDLE;
      owner <= '0;
    end else begin
      case (st)
        IDLE:  if (|reqv) begin owner <= gi; st <= ADDR; end
        ADDR:  if (s_rsp.gnt) st <= m_req[owner].rnw ? RDATA : IDLE;
        RDATA: if (s_rsp.rvalid) st <= IDLE;
        default: st <= IDLE;
      endcase
    end

  always_comb begin
    s_req = BUS_REQ_IDLE;
    if (st == ADDR) s_req = m_req[owner];
    for (int i = 0; i < N; i++) begin
      m_rsp[i] = BUS_RSP_IDLE;
      if (st != IDLE && owner == IW'(i)) m_rsp[i] = s_rsp;
    end
  end
endmodule
