// plb_bus: the node's processor local bus, reduced to what this design
// needs.  A bus_arbiter picks one of NM masters; the address of the
// transfer selects one of three slaves:
//   slave 0  PEC PLB slave   (eDRAM window and PEC registers)
//   slave 1  SCU registers
//   slave 2  external port   (DDR controller and everything else)
// A transfer to no slave cannot happen: slave 2 takes all other addresses.
// Timing is that of the slaves plus one cycle of arbitration.
module plb_bus
  import qcdoc_pkg::*;
#(
  parameter int NM = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [3],
  input  bus_rsp_t s_rsp [3]
);
  bus_req_t r;
  bus_rsp_t p;
  logic [1:0] sel, sel_q;

  bus_arbiter #(.N(NM)) u_arb (
    .clk, .rst_n, .m_req, .m_rsp, .s_req(r), .s_rsp(p), .owner_o()
  );

  always_comb begin
    if (is_edram(r.addr) || is_pec_reg(r.addr)) sel = 2'd0;
    else if (is_scu_reg(r.addr))               sel = 2'd1;
    else                                       sel = 2'd2;
  end

  // remember the slave of an accepted read so its rvalid is routed back
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sel_q <= '0;
    else if (r.req && p.gnt) sel_q <= sel;

  always_comb begin
    for (int s = 0; s < 3; s++) begin
      s_req[s] = BUS_REQ_IDLE;
      if (r.req && sel == 2'(s)) s_req[s] = r;
    end
    p.gnt    = r.req ? s_rsp[sel].gnt : 1'b0;
    p.rvalid = s_rsp[sel_q].rvalid;
    p.rdata  = s_rsp[sel_q].rdata;
  end
endmodule
