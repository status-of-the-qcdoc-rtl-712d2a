// scu_send_unit: send half of one SCU link.
//
// Takes 64-bit words (valid/ready) and sends each as a 9-byte packet, an
// 8-bit header followed by the data bytes least significant first, one byte
// per clock on the byte-wide HSSL transmit side.  Words stay in the 192-bit
// send buffer (three words) until the neighbour acknowledges them, so up
// to three words are in flight, matching the three-word receive buffer at
// the other end.
//
// Header: type (DATA/ACK/NACK), 2-bit sequence number, 4 parity bits (see
// qcdoc_pkg).  The paired receive unit of this link hands over requests to
// send ACK/NACK packets (one header byte each, sent between data packets
// with priority) and the ACK/NACKs it received from the neighbour.
// An ACK carries the sequence number of the newest word the neighbour has
// taken out of its buffer and frees all words up to it.  A NACK (the
// neighbour saw a parity error) or TIMEOUT clocks without progress makes
// the unit resend every unacknowledged word, oldest first (go-back-N).
// The packet size, the 3-word window and resend on error follow the
// original; the header layout, sequence numbers, go-back-N and the timeout
// are this design's choices.
module scu_send_unit
  import qcdoc_pkg::*;
#(
  parameter int TIMEOUT = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // words to send
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [63:0] in_data,
  // from the paired receive unit
  input  logic        ack_send,      // send an ACK with ack_seq
  input  logic [1:0]  ack_seq,
  input  logic        nack_send,     // send a NACK
  input  logic        rx_ack,        // neighbour's ACK arrived
  input  logic [1:0]  rx_ack_seq,
  input  logic        rx_nack,       // neighbour's NACK arrived
  // HSSL transmit bytes
  output logic        tx_valid,
  output logic [7:0]  tx_byte,
  // events
  output logic        ev_resend,
  output logic        idle
);
  logic [63:0] buf_q [3];
  logic [1:0]  head, cnt, sent;     // oldest slot, words held, words sent
  logic [1:0]  base_seq;            // sequence number of the oldest word
  logic        ack_pend, nack_pend;
  logic [1:0]  ack_pend_seq;
  logic [3:0]  bytes_left;          // of the data packet being sent
  logic [63:0] shreg;
  logic [$clog2(TIMEOUT+1)-1:0] tmr;

  function automatic logic [1:0] slot(input logic [1:0] h, input logic [1:0] o);
    logic [2:0] s;
    s = {1'b0, h} + {1'b0, o};
    return (s >= 3) ? 2'(s - 3) : s[1:0];
  endfunction

  assign in_ready = cnt < 2'd3;
  assign idle     = cnt == 0 && bytes_left == 0 && !ack_pend && !nack_pend;

  // ack bookkeeping: how many words the incoming ACK frees
  logic [1:0] nfree;
  logic       ack_ok;
  assign nfree  = rx_ack_seq - base_seq + 2'd1;
  assign ack_ok = rx_ack && nfree != 0 && nfree <= sent;

  logic start_ctl, start_data;
  assign start_ctl  = bytes_left == 0 && (ack_pend || nack_pend);
  assign start_data = bytes_left == 0 && !start_ctl && sent < cnt;

  logic [63:0] nxt_word;
  logic [1:0]  nxt_seq;
  assign nxt_word = buf_q[slot(head, sent)];
  assign nxt_seq  = base_seq + sent;

  always_comb begin
    tx_valid = 1'b0;
    tx_byte  = '0;
    if (bytes_left != 0) begin
      tx_valid = 1'b1;
      tx_byte  = shreg[7:0];
    end else if (start_ctl) begin
      tx_valid = 1'b1;
      tx_byte  = nack_pend ? pkt_header(PKT_NACK, 2'd0, 64'd0)
                           : pkt_header(PKT_ACK, ack_pend_seq, 64'd0);
    end else if (start_data) begin
      tx_valid = 1'b1;
      tx_byte  = pkt_header(PKT_DATA, nxt_seq, nxt_word);
    end
  end

  logic go_back;
  assign go_back   = rx_nack || (sent != 0 && tmr == ($bits(tmr))'(TIMEOUT));
  assign ev_resend = go_back && sent != 0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      head <= '0; cnt <= '0; sent <= '0; base_seq <= '0;
      ack_pend <= 1'b0; nack_pend <= 1'b0; ack_pend_seq <= '0;
      bytes_left <= '0; shreg <= '0; tmr <= '0;
    end else begin
      logic [1:0] c, s;
      c = cnt; s = sent;
      // control packet requests (latest ACK wins: it is cumulative)
      if (ack_send) begin ack_pend <= 1'b1; ack_pend_seq <= ack_seq; end
      if (nack_send) nack_pend <= 1'b1;

      // byte serializer
      if (bytes_left != 0) begin
        bytes_left <= bytes_left - 1'b1;
        shreg      <= shreg >> 8;
      end else if (start_ctl) begin
        if (nack_pend) nack_pend <= nack_send;
        else           ack_pend  <= ack_send;
      end else if (start_data) begin
        bytes_left <= 4'd8;
        shreg      <= nxt_word;
        s = s + 1'b1;
      end

      // acknowledgements free the oldest words
      if (ack_ok) begin
        head     <= slot(head, nfree);
        base_seq <= base_seq + nfree;
        c = c - nfree;
        s = s - nfree;
      end
      if (go_back) s = '0;

      // new word into the send buffer
      if (in_valid && in_ready) begin
        buf_q[slot(head, cnt)] <= in_data;
        c = c + 1'b1;
      end
      cnt  <= c;
      sent <= s;

      if (ack_ok || s == 0 || go_back) tmr <= '0;
      else                             tmr <= tmr + 1'b1;
    end

  a_window: assert property (@(posedge clk) disable iff (!rst_n)
    cnt <= 2'd3 && sent <= cnt);
endmodule
