// pec_refresh: eDRAM refresh timer of the PEC.  Every INTERVAL clocks it
// raises `req` for the next row (rows in order, wrapping) and holds it
// until the eDRAM controller answers with `ack`.  Requests that fall due
// while one is still waiting are counted and issued back to back, so no
// row is skipped.  The original only says that the PEC refreshes the
// eDRAM; the interval (64 ms over 32768 rows at 500 MHz, about 976
// clocks) and this scheme are this design's choices.
module pec_refresh #(
  parameter int ROWS     = 32768,
  parameter int INTERVAL = 976
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    req,
  output logic [$clog2(ROWS)-1:0] row,
  input  logic                    ack
);
  logic [$clog2(INTERVAL+1)-1:0] tmr;
  logic [7:0] owed;
  logic tick;

  assign tick = (tmr == ($bits(tmr))'(INTERVAL - 1));
  assign req  = owed != 0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      tmr  <= '0;
      owed <= '0;
      row  <= '0;
    end else begin
      tmr <= tick ? '0 : tmr + 1'b1;
      owed <= owed + (tick && owed != '1 ? 8'd1 : 8'd0) - (ack && req ? 8'd1 : 8'd0);
      if (ack && req) row <= row + 1'b1;
    end
endmodule
