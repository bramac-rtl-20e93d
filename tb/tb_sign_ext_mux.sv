// tb_sign_ext_mux: self-checking test of the configurable sign-extension mux.
//
// For random 40-bit words and every precision, element e of the word
// (bits n*e + n-1 .. n*e for n = 2, 4, 8) must appear as a sign-extended
// value in lane e (bits L*e + L-1 .. L*e, L = 8, 16, 32) of the 160-bit
// output. The expected lanes are computed here from the element values, not
// from the bit-crossing pattern of the mux.
module tb_sign_ext_mux;
  import bramac_pkg::*;

  logic [WORD_W-1:0]   din;
  logic [ROW_BITS-1:0] dout;
  prec_e               prec;
  int checks = 0, failures = 0;

  sign_ext_mux dut (.din(din), .prec(prec), .dout(dout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      din = (t == 0) ? 40'h80_4020_1008 : (t == 1) ? 40'hff_ffff_ffff : 40'({$urandom, $urandom});
      for (int pi = 0; pi < 3; pi++) begin
        int n, L;
        prec = prec_e'(pi);
        n = prec_bits(prec);
        L = 4 * n;
        #1;
        for (int e = 0; e < WORD_W / n; e++) begin
          longint v, got;
          v = 0; got = 0;
          for (int j = 0; j < n; j++) v[j] = din[n*e + j];
          if (din[n*e + n - 1]) v = v - (longint'(1) << n);
          for (int j = 0; j < L; j++) got[j] = dout[L*e + j];
          if (got[L-1]) got = got - (longint'(1) << L);
          checks++;
          if (got != v) begin
            failures++;
            if (failures < 10) $display("prec %0d element %0d: expected %0d got %0d", n, e, v, got);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
