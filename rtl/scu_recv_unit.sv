// scu_recv_unit: receive half of one SCU link.
//
// Reads the byte stream from the HSSL receive side, interprets each header,
// assembles the 8 data bytes of a DATA packet into a 64-bit word and checks
// the parity.  A good word with the expected sequence number goes into the
// receive buffer, 192 bits = three words, which is why the neighbour may
// send three words before it hears an acknowledgement.  A word whose parity
// fails is dropped and a NACK is requested from the paired send unit, which
// makes the neighbour resend.  A repeated word (sequence number already
// taken) is dropped and re-acknowledged.  Each word that leaves the buffer
// (to the receive register or the passthru path) is acknowledged with its
// sequence number, which returns one buffer slot to the neighbour.
// ACK and NACK packets from the neighbour go to the paired send unit;
// ones with bad parity are dropped (a later ACK or the send unit's
// timeout recovers).
// Words leave on out_valid/out_ready.  Packet format and buffer size follow
// the original; the sequence and acknowledgement scheme are this design's.
module scu_recv_unit
  import qcdoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // HSSL receive bytes
  input  logic        rx_valid,
  input  logic [7:0]  rx_byte,
  // received words
  output logic        out_valid,
  input  logic        out_ready,
  output logic [63:0] out_data,
  // to the paired send unit
  output logic        ack_send,
  output logic [1:0]  ack_seq,
  output logic        nack_send,
  output logic        rx_ack,
  output logic [1:0]  rx_ack_seq,
  output logic        rx_nack,
  // events
  output logic        ev_parity_err,
  output logic        ev_duplicate
);
  logic [63:0] buf_q [3];
  logic [1:0]  head, cnt;
  logic [1:0]  exp_seq;
  logic [7:0]  hdr;
  logic [3:0]  nbytes;      // data bytes received of current packet
  logic        in_pkt;
  logic [63:0] asm_q;

  function automatic logic [1:0] slot(input logic [1:0] h, input logic [1:0] o);
    logic [2:0] s;
    s = {1'b0, h} + {1'b0, o};
    return (s >= 3) ? 2'(s - 3) : s[1:0];
  endfunction

  // packet complete this cycle?
  logic        data_done;
  logic [63:0] word;
  assign word      = {rx_byte, asm_q[63:8]};
  assign data_done = in_pkt && rx_valid && nbytes == 4'd7;

  logic data_good, is_ctl;
  assign data_good = data_done && (pkt_parity(hdr[7:4], word) == hdr[3:0]);
  assign is_ctl    = rx_valid && !in_pkt &&
                     (rx_byte[7:6] == PKT_ACK || rx_byte[7:6] == PKT_NACK);

  logic ctl_good;
  assign ctl_good = is_ctl && (pkt_parity(rx_byte[7:4], 64'd0) == rx_byte[3:0]);

  assign rx_ack     = ctl_good && rx_byte[7:6] == PKT_ACK;
  assign rx_ack_seq = rx_byte[5:4];
  assign rx_nack    = ctl_good && rx_byte[7:6] == PKT_NACK;

  logic accept, dup;
  assign accept = data_good && hdr[5:4] == exp_seq && cnt < 2'd3;
  assign dup    = data_good && !accept;

  assign out_valid = cnt != 0;
  assign out_data  = buf_q[head];

  logic pop;
  assign pop = out_valid && out_ready;

  // sequence number of the word at the head of the buffer
  logic [1:0] head_seq;
  assign head_seq = exp_seq - cnt;

  assign ack_send  = pop || dup;
  assign ack_seq   = pop ? head_seq : head_seq - 2'd1;
  assign nack_send = data_done && !data_good;

  assign ev_parity_err = nack_send;
  assign ev_duplicate  = dup;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      head <= '0; cnt <= '0; exp_seq <= '0;
      hdr <= '0; nbytes <= '0; in_pkt <= 1'b0; asm_q <= '0;
    end else begin
      logic [1:0] c;
      c = cnt;
      if (rx_valid) begin
        if (!in_pkt) begin
          if (rx_byte[7:6] == PKT_DATA) begin
            in_pkt <= 1'b1;
            hdr    <= rx_byte;
            nbytes <= '0;
          end
        end else begin
          asm_q  <= word;
          nbytes <= nbytes + 1'b1;
          if (nbytes == 4'd7) in_pkt <= 1'b0;
        end
      end
      if (accept) begin
        buf_q[slot(head, cnt)] <= word;
        exp_seq <= exp_seq + 1'b1;
        c = c + 1'b1;
      end
      if (pop) begin
        head <= slot(head, 2'd1);
        c = c - 1'b1;
      end
      cnt <= c;
    end
endmodule
