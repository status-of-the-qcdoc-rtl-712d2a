// tb_scu_link: two nodes' link logic back to back.  Node A's send unit
// feeds node B's receive unit and B's send unit feeds A's receive unit;
// each side's receive unit is paired with its own send unit, as in the SCU.
//   phase 1: 200 words A->B with no errors and the receiver always ready;
//            checks order and that a word takes 9 byte times (no gaps).
//   phase 2: 400 words in both directions with random bit flips on both
//            wires and a receiver that stalls at random; every word must
//            arrive exactly once and in order (parity error -> NACK ->
//            resend; lost ACK -> timeout).
`timescale 1ns/1ps
module tb_scu_link;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        a_iv, a_ir, b_iv, b_ir;
  logic [63:0] a_id, b_id;
  logic        a_ov, a_or, b_ov, b_or;
  logic [63:0] a_od, b_od;
  logic        a_txv, b_txv, a_rxv, b_rxv;
  logic [7:0]  a_txb, b_txb, a_rxb, b_rxb;
  logic a_acks, a_nacks, a_rack, a_rnack, b_acks, b_nacks, b_rack, b_rnack;
  logic [1:0] a_aseq, a_raseq, b_aseq, b_raseq;
  logic a_rs, b_rs, a_pe, b_pe, a_dup, b_dup;

  scu_send_unit #(.TIMEOUT(64)) sa (.clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .ack_send(a_acks), .ack_seq(a_aseq), .nack_send(a_nacks), .rx_ack(a_rack),
    .rx_ack_seq(a_raseq), .rx_nack(a_rnack), .tx_valid(a_txv), .tx_byte(a_txb),
    .ev_resend(a_rs), .idle());
  scu_recv_unit ra (.clk, .rst_n, .rx_valid(a_rxv), .rx_byte(a_rxb), .out_valid(a_ov),
    .out_ready(a_or), .out_data(a_od), .ack_send(a_acks), .ack_seq(a_aseq),
    .nack_send(a_nacks), .rx_ack(a_rack), .rx_ack_seq(a_raseq), .rx_nack(a_rnack),
    .ev_parity_err(a_pe), .ev_duplicate(a_dup));
  scu_send_unit #(.TIMEOUT(64)) sb (.clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .ack_send(b_acks), .ack_seq(b_aseq), .nack_send(b_nacks), .rx_ack(b_rack),
    .rx_ack_seq(b_raseq), .rx_nack(b_rnack), .tx_valid(b_txv), .tx_byte(b_txb),
    .ev_resend(b_rs), .idle());
  scu_recv_unit rb (.clk, .rst_n, .rx_valid(b_rxv), .rx_byte(b_rxb), .out_valid(b_ov),
    .out_ready(b_or), .out_data(b_od), .ack_send(b_acks), .ack_seq(b_aseq),
    .nack_send(b_nacks), .rx_ack(b_rack), .rx_ack_seq(b_raseq), .rx_nack(b_rnack),
    .ev_parity_err(b_pe), .ev_duplicate(b_dup));

  // wires with error injection: flip one bit of a byte with prob 1/err_rate
  int err_rate = 0;
  int n_flip = 0, n_pe = 0, n_rs = 0;
  always_ff @(posedge clk) begin
    logic [7:0] fa, fb;
    fa = '0; fb = '0;
    if (err_rate != 0 && a_txv && $urandom_range(err_rate - 1) == 0) fa = 8'h1 << $urandom_range(7);
    if (err_rate != 0 && b_txv && $urandom_range(err_rate - 1) == 0) fb = 8'h1 << $urandom_range(7);
    b_rxv <= a_txv; b_rxb <= a_txb ^ fa;
    a_rxv <= b_txv; a_rxb <= b_txb ^ fb;
    n_flip <= n_flip + int'(fa != 0) + int'(fb != 0);
    n_pe   <= n_pe + int'(a_pe) + int'(b_pe);
    n_rs   <= n_rs + int'(a_rs) + int'(b_rs);
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources and sinks, driven at falling edges
  int na_sent, nb_sent, na_got, nb_got, a_total, b_total;
  int stall;
  function automatic logic [63:0] wa(input int i); return {32'hAAAA_0000 + 32'(i), 32'(i) * 32'h9E37_79B9}; endfunction
  function automatic logic [63:0] wb(input int i); return {32'hBBBB_0000 + 32'(i), 32'(i) * 32'h85EB_CA6B}; endfunction

  // drive at the falling edge, then count what the next rising edge takes
  always @(negedge clk) if (rst_n) begin
    a_iv = na_sent < a_total; a_id = wa(na_sent);
    b_iv = nb_sent < b_total; b_id = wb(nb_sent);
    b_or = (stall == 0) || ($urandom_range(stall - 1) == 0);
    a_or = (stall == 0) || ($urandom_range(stall - 1) == 0);
    #0.1;
    if (b_ov && b_or) begin check(b_od == wa(nb_got), $sformatf("B got word %0d", nb_got)); nb_got++; end
    if (a_ov && a_or) begin check(a_od == wb(na_got), $sformatf("A got word %0d", na_got)); na_got++; end
    if (a_iv && a_ir) na_sent++;
    if (b_iv && b_ir) nb_sent++;
  end

  initial begin
    int t0;
    a_iv = 0; b_iv = 0; a_or = 1; b_or = 1; a_id = '0; b_id = '0;
    na_sent = 0; nb_sent = 0; na_got = 0; nb_got = 0; a_total = 0; b_total = 0; stall = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1
    a_total = 200;
    t0 = 0;
    while (nb_got < 200) begin @(negedge clk); t0++; end
    check(t0 <= 9 * 200 + 12, $sformatf("200 words in %0d cycles (9 per word)", t0));
    // phase 2
    err_rate = 200; stall = 3;
    a_total = 200 + 400; b_total = 400;
    while ((nb_got < 600 || na_got < 400)) @(negedge clk);
    check(nb_got == 600 && na_got == 400, "all words delivered once");
    check(n_flip > 0 && n_pe > 0 && n_rs > 0, $sformatf("errors injected %0d, detected %0d, resends %0d", n_flip, n_pe, n_rs));
    $display("flips=%0d parity errors=%0d resends=%0d", n_flip, n_pe, n_rs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
