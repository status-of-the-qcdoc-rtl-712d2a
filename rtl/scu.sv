// scu: serial communications unit of the QCDOC node.
//
// NL links (12 in the six-dimensional torus: two per dimension), each with
// a send unit and a receive unit on the byte-wide side of an HSSL macro.
// Per link: send DMA -> send register -> send unit -> HSSL bytes out, and
// HSSL bytes in -> receive unit -> (passthru) -> receive register ->
// receive DMA.  The 12 send engines share one bus master port through an
// arbiter, the 12 receive engines another (the original has one PLB master
// interface each for send and receive).  Control registers sit behind a
// bus slave port.  A send unit takes forwarded passthru words before words
// from its own send register.
// The receive unit of link l pairs with the send unit of the same link:
// acknowledgements for words received on link l leave on link l's transmit
// side, so link l must connect to the same link of the neighbour in the
// opposite direction.
module scu
  import qcdoc_pkg::*;
#(
  parameter int NL      = 12,
  parameter int NINSTR  = 16,
  parameter int TIMEOUT = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  // HSSL byte side
  output logic       tx_valid [NL],
  output logic [7:0] tx_byte  [NL],
  input  logic       rx_valid [NL],
  input  logic [7:0] rx_byte  [NL],
  // PLB
  output bus_req_t snd_m_req,
  input  bus_rsp_t snd_m_rsp,
  output bus_req_t rcv_m_req,
  input  bus_rsp_t rcv_m_rsp,
  input  bus_req_t s_req,
  output bus_rsp_t s_rsp,
  output logic     irq,
  // event pulses for statistics
  output logic     ev_parity,
  output logic     ev_resend,
  output logic     ev_duplicate,
  output logic     ev_forward
);
  localparam int NC = 2 * NL;
  localparam int XW = $clog2(NINSTR);

  logic        iw_en [NC];
  logic [XW-1:0] iw_idx;
  scu_instr_t  iw_data;
  logic        start [NC];
  logic [XW-1:0] start_idx [NC];
  logic [XW:0]   start_cnt [NC];
  logic        busy [NC], done [NC];
  logic        pt_en [NL], pt_keep [NL];
  logic [3:0]  pt_dst [NL];

  bus_req_t sm_req [NL], rm_req [NL];
  bus_rsp_t sm_rsp [NL], rm_rsp [NL];

  // link-side signals
  logic        sr_valid [NL], sr_ready [NL];   // send register -> send unit
  logic [63:0] sr_data  [NL];
  logic        su_valid [NL], su_ready [NL];   // into send unit
  logic [63:0] su_data  [NL];
  logic        ru_valid [NL], ru_ready [NL];   // out of receive unit
  logic [63:0] ru_data  [NL];
  logic        rr_valid [NL], rr_ready [NL];   // into receive register
  logic        fw_valid [NL], fw_ready [NL];
  logic [63:0] fw_data  [NL];
  logic [NL-1:0] perr, rsnd, dupl;

  scu_regs #(.NL(NL), .NINSTR(NINSTR)) u_regs (
    .clk, .rst_n, .s_req, .s_rsp, .iw_en, .iw_idx, .iw_data, .start,
    .start_idx, .start_cnt, .busy, .done, .pt_en, .pt_keep, .pt_dst,
    .ev_parity, .ev_resend, .irq
  );

  assign ev_parity    = |perr;
  assign ev_resend    = |rsnd;
  assign ev_duplicate = |dupl;

  scu_passthru #(.N(NL)) u_pt (
    .en(pt_en), .keep(pt_keep), .dst(pt_dst),
    .rx_valid(ru_valid), .rx_ready(ru_ready), .rx_data(ru_data),
    .rr_valid, .rr_ready, .fw_valid, .fw_ready, .fw_data, .ev_forward
  );

  for (genvar l = 0; l < NL; l++) begin : g_link
    logic        s_push_v, s_push_r;
    logic [63:0] s_push_d;
    logic        r_pop_v, r_pop_r;
    logic [63:0] r_pop_d;
    logic        ack_send, nack_send, rx_ack, rx_nack;
    logic [1:0]  ack_seq, rx_ack_seq;

    // send path
    scu_dma #(.IS_SEND(1'b1), .NINSTR(NINSTR)) u_sdma (
      .clk, .rst_n, .iw_en(iw_en[l]), .iw_idx, .iw_data, .start(start[l]),
      .start_idx(start_idx[l]), .start_cnt(start_cnt[l]), .busy(busy[l]),
      .done(done[l]), .m_req(sm_req[l]), .m_rsp(sm_rsp[l]),
      .push_valid(s_push_v), .push_ready(s_push_r), .push_data(s_push_d),
      .pop_valid(1'b0), .pop_ready(), .pop_data(64'd0)
    );
    scu_word_fifo u_sreg (
      .clk, .rst_n, .in_valid(s_push_v), .in_ready(s_push_r), .in_data(s_push_d),
      .out_valid(sr_valid[l]), .out_ready(sr_ready[l]), .out_data(sr_data[l])
    );
    // forwarded words first
    always_comb begin
      su_valid[l] = fw_valid[l] || sr_valid[l];
      su_data[l]  = fw_valid[l] ? fw_data[l] : sr_data[l];
      fw_ready[l] = su_ready[l];
      sr_ready[l] = su_ready[l] && !fw_valid[l];
    end
    scu_send_unit #(.TIMEOUT(TIMEOUT)) u_snd (
      .clk, .rst_n, .in_valid(su_valid[l]), .in_ready(su_ready[l]),
      .in_data(su_data[l]), .ack_send, .ack_seq, .nack_send, .rx_ack,
      .rx_ack_seq, .rx_nack, .tx_valid(tx_valid[l]), .tx_byte(tx_byte[l]),
      .ev_resend(rsnd[l]), .idle()
    );

    // receive path
    scu_recv_unit u_rcv (
      .clk, .rst_n, .rx_valid(rx_valid[l]), .rx_byte(rx_byte[l]),
      .out_valid(ru_valid[l]), .out_ready(ru_ready[l]), .out_data(ru_data[l]),
      .ack_send, .ack_seq, .nack_send, .rx_ack, .rx_ack_seq, .rx_nack,
      .ev_parity_err(perr[l]), .ev_duplicate(dupl[l])
    );
    scu_word_fifo u_rreg (
      .clk, .rst_n, .in_valid(rr_valid[l]), .in_ready(rr_ready[l]),
      .in_data(ru_data[l]), .out_valid(r_pop_v), .out_ready(r_pop_r),
      .out_data(r_pop_d)
    );
    scu_dma #(.IS_SEND(1'b0), .NINSTR(NINSTR)) u_rdma (
      .clk, .rst_n, .iw_en(iw_en[NL+l]), .iw_idx, .iw_data,
      .start(start[NL+l]), .start_idx(start_idx[NL+l]),
      .start_cnt(start_cnt[NL+l]), .busy(busy[NL+l]), .done(done[NL+l]),
      .m_req(rm_req[l]), .m_rsp(rm_rsp[l]),
      .push_valid(), .push_ready(1'b1), .push_data(),
      .pop_valid(r_pop_v), .pop_ready(r_pop_r), .pop_data(r_pop_d)
    );
  end

  bus_arbiter #(.N(NL)) u_snd_arb (
    .clk, .rst_n, .m_req(sm_req), .m_rsp(sm_rsp), .s_req(snd_m_req),
    .s_rsp(snd_m_rsp), .owner_o()
  );
  bus_arbiter #(.N(NL)) u_rcv_arb (
    .clk, .rst_n, .m_req(rm_req), .m_rsp(rm_rsp), .s_req(rcv_m_req),
    .s_rsp(rcv_m_rsp), .owner_o()
  );
endmodule
