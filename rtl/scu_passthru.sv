// scu_passthru: store-and-forward path of the SCU for global operations.
//
// Each of the N receive links has a route: off (words go to the link's
// receive register), or forward to send link `dst`, optionally also keeping
// a copy in the receive register (`keep`).  A forwarded word enters the
// destination send unit with priority over that link's own DMA traffic,
// so a word moves on to the next node without passing through memory; this
// is what a shift-and-add global sum needs.  A word leaves its receive unit
// only when every place it goes to can take it.  If several receive links
// forward to the same send link in the same cycle, the lowest numbered one
// goes first.  Word-level forwarding and the route registers are this
// design's choices; the original describes the function and the block.
module scu_passthru #(
  parameter int N = 12
) (
  input  logic             en   [N],
  input  logic             keep [N],
  input  logic [3:0]       dst  [N],
  // from the receive units
  input  logic             rx_valid [N],
  output logic             rx_ready [N],
  input  logic [63:0]      rx_data  [N],
  // to the receive registers
  output logic             rr_valid [N],
  input  logic             rr_ready [N],
  // to the send units (forwarded words)
  output logic             fw_valid [N],
  input  logic             fw_ready [N],
  output logic [63:0]      fw_data  [N],
  output logic             ev_forward
);
  logic [N-1:0] win;    // receive link i wins its destination this cycle

  always_comb begin
    logic [N-1:0] taken;
    taken = '0;
    win   = '0;
    for (int d = 0; d < N; d++) begin
      fw_valid[d] = 1'b0;
      fw_data[d]  = '0;
    end
    for (int i = 0; i < N; i++)
      if (en[i] && rx_valid[i] && int'(dst[i]) < N && !taken[dst[i]]) begin
        taken[dst[i]] = 1'b1;
        win[i]        = 1'b1;
      end
    for (int i = 0; i < N; i++)
      if (win[i] && (!keep[i] || rr_ready[i])) begin
        fw_valid[dst[i]] = 1'b1;
        fw_data[dst[i]]  = rx_data[i];
      end
    ev_forward = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (!en[i]) begin
        rr_valid[i] = rx_valid[i];
        rx_ready[i] = rr_ready[i];
      end else begin
        rx_ready[i] = win[i] && fw_ready[dst[i]] && (!keep[i] || rr_ready[i]);
        rr_valid[i] = keep[i] && win[i] && fw_ready[dst[i]] && rx_valid[i];
        if (rx_ready[i] && rx_valid[i]) ev_forward = 1'b1;
      end
    end
  end
endmodule
