// scu_word_fifo: the SCU's send and receive registers.  A small FIFO of
// 64-bit words between a link unit and its DMA engine (valid/ready on both
// sides, no combinational path from input to output).  It decouples the
// DMA engine's bus accesses from the byte-paced link.  DEPTH is this
// design's choice; the original only names the registers.
module scu_word_fifo #(
  parameter int DEPTH = 2,
  parameter int W     = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int AW = $clog2(DEPTH > 1 ? DEPTH : 2);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   n;

  assign in_ready  = n < (AW+1)'(DEPTH);
  assign out_valid = n != 0;
  assign out_data  = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) if (in_valid && in_ready) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rp <= '0; wp <= '0; n <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= inc(wp);
      if (out_valid && out_ready) rp <= inc(rp);
      n <= n + (in_valid && in_ready ? 1'b1 : 1'b0) - (out_valid && out_ready ? 1'b1 : 1'b0);
    end
endmodule
