// tb_secded: self-checking test of the SECDED (39,32) encoder and decoder.
//
// For random and corner-case words: a clean codeword decodes without error; every one
// of the 39 single-bit flips is reported as corrected and yields the original data
// and codeword; random double-bit flips are reported as uncorrectable. The reference
// is simply the word that was encoded. Purely combinational, so the "cycles" are
// 1 ns steps; a watchdog ends the run if it hangs.
module tb_secded;
  import rp_pkg::*;

  word_t      d;
  code_t      c, cin;
  word_t      dout;
  code_t      cout;
  logic       ce, ue;
  logic [5:0] syn;
  int checks = 0, failures = 0;

  secded_enc u_enc (.data_i(d), .code_o(c));
  secded_dec u_dec (.code_i(cin), .data_o(dout), .code_o(cout), .ce_o(ce), .ue_o(ue),
                    .syndrome_o(syn));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s d=%h cin=%h dout=%h ce=%b ue=%b", what, d, cin, dout, ce, ue);
    end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      d = (n == 0) ? 32'h0 : (n == 1) ? 32'hFFFF_FFFF : (n == 2) ? 32'h8000_0001 : $urandom;
      #1;
      cin = c; #1;
      check(!ce && !ue && dout == d && cout == c, "clean");
      check(c[31:0] == d, "systematic");
      for (int b = 0; b < ECC_W; b++) begin
        cin = c ^ (code_t'(1) << b); #1;
        check(ce && !ue && dout == d && cout == c, "single");
      end
      for (int k = 0; k < 20; k++) begin
        int b1, b2;
        b1 = $urandom_range(ECC_W - 1);
        b2 = (b1 + 1 + $urandom_range(ECC_W - 2)) % ECC_W;
        cin = c ^ (code_t'(1) << b1) ^ (code_t'(1) << b2); #1;
        check(ue && !ce, "double");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
