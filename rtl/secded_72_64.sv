// secded_72_64: one lane of the eDRAM ECC, a (72,64) extended Hamming code
// that corrects any 1-bit error and detects any 2-bit error, as the PEC's
// ECC is specified to do.  The 1152-bit eDRAM word is 16 such lanes
// (1024 data bits + 128 check bits); the split into 16 lanes is this
// design's choice, made because 16 x 72 = 1152.
//
// Code word layout: bit 0 is the overall parity; bits 1..71 are Hamming
// positions, check bits at positions 1,2,4,8,16,32,64 and data bits, in
// increasing order, at the other positions.
// Purely combinational: encode and decode paths are independent.
module secded_72_64 (
  input  logic [63:0] enc_data,
  output logic [71:0] enc_cw,
  input  logic [71:0] dec_cw,
  output logic [63:0] dec_data,
  output logic        dec_corrected,   // a single-bit error was fixed
  output logic        dec_uncorrectable // a double-bit error was seen
);
  function automatic logic is_pow2(input int i);
    return (i & (i - 1)) == 0;
  endfunction

  // encode
  always_comb begin
    int d;
    logic [6:0] syn;
    enc_cw = '0;
    d = 0;
    for (int i = 1; i < 72; i++)
      if (!is_pow2(i)) begin
        enc_cw[i] = enc_data[d];
        d++;
      end
    syn = '0;
    for (int i = 1; i < 72; i++)
      if (enc_cw[i]) syn ^= 7'(i);
    for (int b = 0; b < 7; b++) enc_cw[1 << b] = syn[b];
    enc_cw[0] = ^enc_cw[71:1];
  end

  // decode
  always_comb begin
    int d;
    logic [6:0] syn;
    logic       par;
    logic [71:0] fixed;
    syn = '0;
    for (int i = 1; i < 72; i++)
      if (dec_cw[i]) syn ^= 7'(i);
    par   = ^dec_cw;
    fixed = dec_cw;
    dec_corrected     = 1'b0;
    dec_uncorrectable = 1'b0;
    if (par) begin
      dec_corrected = 1'b1;
      if (int'(syn) < 72) fixed[syn] = ~fixed[syn];
      else dec_uncorrectable = 1'b1;   // odd number of errors, >1
    end else if (syn != 0) begin
      dec_uncorrectable = 1'b1;
    end
    dec_data = '0;
    d = 0;
    for (int i = 1; i < 72; i++)
      if (!is_pow2(i)) begin
        dec_data[d] = fixed[i];
        d++;
      end
  end
endmodule
