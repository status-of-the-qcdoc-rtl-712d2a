// tb_secded_72_64: checks the (72,64) SEC-DED lane.  For random data words
// it checks that an untouched code word decodes cleanly, that every
// single-bit error in all 72 positions is corrected, and that random
// double-bit errors are flagged uncorrectable.  The reference for the check
// bits is an independent recomputation: a code word is valid exactly when
// the XOR of the positions of its set bits is zero and its overall parity
// is even.
`timescale 1ns/1ps
module tb_secded_72_64;
  logic [63:0] ed, dd;
  logic [71:0] cw, dc;
  logic corr, unc;
  int checks = 0, failures = 0;

  secded_72_64 dut (.enc_data(ed), .enc_cw(cw), .dec_cw(dc), .dec_data(dd),
                    .dec_corrected(corr), .dec_uncorrectable(unc));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] syn;
    int a, b;
    for (int t = 0; t < 200; t++) begin
      ed = {$urandom, $urandom};
      if (t == 0) ed = '0;
      if (t == 1) ed = '1;
      #1;
      syn = '0;
      for (int i = 1; i < 72; i++) if (cw[i]) syn ^= 7'(i);
      check(syn == 0 && ^cw == 1'b0, "encoded word is a code word");
      dc = cw; #1;
      check(dd == ed && !corr && !unc, "clean decode");
      for (int i = 0; i < 72; i++) begin
        dc = cw; dc[i] = ~dc[i]; #1;
        check(dd == ed && corr && !unc, $sformatf("single error at %0d corrected", i));
      end
      for (int k = 0; k < 20; k++) begin
        a = $urandom_range(71); b = (a + 1 + $urandom_range(70)) % 72;
        dc = cw; dc[a] = ~dc[a]; dc[b] = ~dc[b]; #1;
        check(unc, $sformatf("double error %0d,%0d detected", a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
