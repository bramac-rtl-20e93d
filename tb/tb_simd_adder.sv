// tb_simd_adder: self-checking test of the 160-bit precision-configurable
// SIMD adder.
//
// Drives random and corner-case operands (all-ones plus carry-in, alternating
// patterns) at each of the three lane widths and compares every lane with an
// independent per-lane sum a + b + cin modulo 2^L. A carry leaking across a
// lane boundary, or a lane width chosen wrongly, shows up as a lane mismatch.
// The adder is combinational; outputs are sampled 1 time unit after the
// inputs change.
module tb_simd_adder;
  import bramac_pkg::*;

  logic [ROW_BITS-1:0] a, b, s;
  logic                cin;
  prec_e               prec;
  int checks = 0, failures = 0;

  simd_adder dut (.a(a), .b(b), .cin(cin), .prec(prec), .s(s));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    int L = (prec == PREC_2) ? 8 : (prec == PREC_4) ? 16 : 32;
    #1;
    for (int e = 0; e < ROW_BITS / L; e++) begin
      longint unsigned x = 0, y = 0, z = 0, got = 0;
      for (int j = 0; j < L; j++) begin
        x[j] = a[L*e + j]; y[j] = b[L*e + j]; got[j] = s[L*e + j];
      end
      z = (x + y + longint'(cin)) & ((longint'(1) << L) - 1);
      checks++;
      if (got != z) begin
        failures++;
        if (failures < 10)
          $display("prec %0d lane %0d: %h + %h + %0d = %h, got %h", prec, e, x, y, cin, z, got);
      end
    end
  endtask

  function automatic logic [ROW_BITS-1:0] rnd160();
    return {$urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int pi = 0; pi < 3; pi++) begin
      prec = prec_e'(pi);
      // corner cases: every lane overflows
      a = '1; b = '0; cin = 1; check_now();
      a = '1; b = '1; cin = 1; check_now();
      a = {40{4'b1010}}; b = {40{4'b0101}}; cin = 1; check_now();
      a = {40{4'b1000}}; b = {40{4'b1000}}; cin = 0; check_now();
      for (int t = 0; t < 300; t++) begin
        a = rnd160(); b = rnd160(); cin = 1'($urandom); check_now();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
