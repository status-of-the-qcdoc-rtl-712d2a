// rr_arbiter: round-robin arbiter.  Combinational one-hot grant among the
// asserted request bits, starting the search one past the last winner.
// The pointer moves only when `advance` is high (the grant was used).
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int i = N; i >= 1; i--)
      if (req[(int'(last) + i) % N]) begin
        gnt                          = '0;
        gnt[(int'(last) + i) % N]    = 1'b1;
        gnt_idx                      = IW'((int'(last) + i) % N);
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                 last <= IW'(N - 1);
    else if (advance && |req)   last <= gnt_idx;
endmodule
