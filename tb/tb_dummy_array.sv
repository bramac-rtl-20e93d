// tb_dummy_array: self-checking test of one dummy array with its demux,
// SIMD adder and write-back muxes, driven directly by per-cycle controls.
//
// First it replays the paper's worked 4-bit example (W1 = -5, 4;
// W2 = 7, -3; I1 = -7; I2 = 3) step by step and checks the P row after every
// step against the values printed in the example (10/-8, 20/-16, 54/-38,
// 56/-37), then the accumulator. Then it runs random MAC2s at all three
// precisions, with signed and unsigned inputs, copying W1 through write port A
// (mux M1 = ramA) and W2 through write port B (mux M2 = ramB), and compares
// after every MAC2 the P row and the W1+W2 row lane by lane, and all four
// 40-bit accumulator slices, with a reference computed here.
// One control word is applied per clock cycle.
module tb_dummy_array;
  import bramac_pkg::*;

  logic                clk = 0;
  dummy_ctrl_t         ctrl;
  logic [1:0]          in_bits;
  logic [ROW_BITS-1:0] ram_a, ram_b;
  logic [COL_AW-1:0]   acc_col;
  logic [WORD_W-1:0]   acc_dout;
  logic [ROW_BITS-1:0] acc_ref;
  int checks = 0, failures = 0;

  dummy_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lane_w(prec_e p);
    return (p == PREC_2) ? 8 : (p == PREC_4) ? 16 : 32;
  endfunction

  // apply one control word for one cycle
  task automatic step(dummy_ctrl_t c, logic [1:0] bits);
    @(negedge clk);
    ctrl = c; in_bits = bits;
    @(negedge clk);
    ctrl = DUMMY_IDLE;
  endtask

  function automatic dummy_ctrl_t rw(prec_e p, logic ra, logic ra_dm, row_e rar, logic rb, logic rb_dm,
      row_e rbr, logic wa, row_e war, m1_sel_e sa, logic wb, row_e wbr, m2_sel_e sb, logic ci);
    dummy_ctrl_t c;
    c.ren_a = ra; c.rd_a_demux = ra_dm; c.rd_a_row = rar;
    c.ren_b = rb; c.rd_b_demux = rb_dm; c.rd_b_row = rbr;
    c.wen_a = wa; c.wr_a_row = war; c.sel_a = sa;
    c.wen_b = wb; c.wr_b_row = wbr; c.sel_b = sb;
    c.cin = ci; c.prec = p;
    return c;
  endfunction

  // Builds rows from element lists: element e in lane e, sign-extended.
  function automatic logic [ROW_BITS-1:0] lanes_of(longint v [], prec_e p);
    logic [ROW_BITS-1:0] r = '0;
    int L = lane_w(p);
    for (int e = 0; e < v.size(); e++)
      for (int j = 0; j < L; j++) r[L*e + j] = v[e][j];
    return r;
  endfunction

  function automatic longint lane_val(logic [ROW_BITS-1:0] r, prec_e p, int e);
    int L = lane_w(p);
    longint v = 0;
    for (int j = 0; j < L; j++) v[j] = r[L*e + j];
    if (v[L-1]) v = v - (longint'(1) << L);
    return v;
  endfunction

  task automatic expect_p(prec_e p, int e, longint v, string what);
    checks++;
    if (lane_val(dut.rows[ROW_P], p, e) != v) begin
      failures++;
      $display("%s: P lane %0d = %0d, expected %0d", what, e, lane_val(dut.rows[ROW_P], p, e), v);
    end
  endtask

  // the MAC2 control sequence of the paper, n-bit inputs
  task automatic mac2(prec_e p, bit uns, logic [7:0] i1, logic [7:0] i2, bit worked);
    int n = prec_bits(p);
    step(rw(p, 1,0,ROW_W1, 1,0,ROW_W2, 1,ROW_W12,M1_SUM, 1,ROW_P,M2_ZERO, 0), 2'b00);
    if (!uns) begin
      step(rw(p, 0,0,ROW_ZERO, 1,1,ROW_ZERO, 0,ROW_ZERO,M1_SUM, 1,ROW_INV,M2_BBAR, 0), {i2[n-1], i1[n-1]});
      step(rw(p, 1,0,ROW_INV, 1,0,ROW_P, 1,ROW_P,M1_SRIGHT, 0,ROW_ZERO,M2_ZERO, 1), 2'b00);
      if (worked) begin expect_p(p, 0, 10, "after MSB"); expect_p(p, 1, -8, "after MSB"); end
    end
    for (int i = uns ? n - 1 : n - 2; i >= 0; i--) begin
      step(rw(p, 1,1,ROW_ZERO, 1,0,ROW_P, 1,ROW_P, (i == 0) ? M1_SUM : M1_SRIGHT, 0,ROW_ZERO,M2_ZERO, 0),
           {i2[i], i1[i]});
      if (worked && i == 2) begin expect_p(p, 0, 20, "bit 2"); expect_p(p, 1, -16, "bit 2"); end
      if (worked && i == 1) begin expect_p(p, 0, 54, "bit 1"); expect_p(p, 1, -38, "bit 1"); end
      if (worked && i == 0) begin expect_p(p, 0, 56, "bit 0"); expect_p(p, 1, -37, "bit 0"); end
    end
    step(rw(p, 1,0,ROW_ACC, 1,0,ROW_P, 1,ROW_ACC,M1_SUM, 0,ROW_ZERO,M2_ZERO, 0), 2'b00);
  endtask

  task automatic copy_weights(logic [ROW_BITS-1:0] w1, logic [ROW_BITS-1:0] w2);
    @(negedge clk);
    ram_a = w1; ram_b = w2;
    step(rw(PREC_8, 0,0,ROW_ZERO, 0,0,ROW_ZERO, 1,ROW_W1,M1_RAMA, 1,ROW_W2,M2_RAMB, 0), 2'b00);
    ram_a = {5{$urandom}}; ram_b = {5{$urandom}};
  endtask

  task automatic clear_acc();
    step(rw(PREC_8, 0,0,ROW_ZERO, 0,0,ROW_ZERO, 0,ROW_ZERO,M1_SUM, 1,ROW_ACC,M2_ZERO, 0), 2'b00);
    acc_ref = '0;
  endtask

  task automatic check_acc(string what);
    for (int c = 0; c < 4; c++) begin
      @(negedge clk);
      acc_col = 2'(c);
      #1;
      checks++;
      if (acc_dout !== acc_ref[WORD_W*c +: WORD_W]) begin
        failures++;
        $display("%s: accumulator slice %0d = %h, expected %h", what, c, acc_dout, acc_ref[WORD_W*c +: WORD_W]);
      end
    end
  endtask

  initial begin
    ctrl = DUMMY_IDLE; in_bits = 0; ram_a = '0; ram_b = '0; acc_col = 0;

    // worked example of the paper, 4-bit, two lanes used
    clear_acc();
    copy_weights(lanes_of('{-5, 4}, PREC_4), lanes_of('{7, -3}, PREC_4));
    mac2(PREC_4, 0, 8'b1001, 8'b0011, 1);
    acc_ref = lanes_of('{56, -37}, PREC_4);
    check_acc("worked example");

    // random MAC2s
    for (int pi = 0; pi < 3; pi++)
      for (int u = 0; u < 2; u++) begin
        prec_e p;
        int n, L;
        p = prec_e'(pi); n = prec_bits(p); L = lane_w(p);
        clear_acc();
        for (int k = 0; k < 12; k++) begin
          longint w1 [], w2 [];
          logic [7:0] i1, i2;
          longint v1, v2;
          w1 = new[ROW_BITS / L]; w2 = new[ROW_BITS / L];
          i1 = 8'($urandom); i2 = 8'($urandom);
          v1 = 0; v2 = 0;
          for (int j = 0; j < n; j++) begin v1[j] = i1[j]; v2[j] = i2[j]; end
          if (!u[0] && i1[n-1]) v1 -= longint'(1) << n;
          if (!u[0] && i2[n-1]) v2 -= longint'(1) << n;
          for (int e = 0; e < ROW_BITS / L; e++) begin
            w1[e] = longint'($urandom_range(0, (1 << n) - 1)) - (longint'(1) << (n - 1));
            w2[e] = longint'($urandom_range(0, (1 << n) - 1)) - (longint'(1) << (n - 1));
          end
          copy_weights(lanes_of(w1, p), lanes_of(w2, p));
          mac2(p, u[0], i1, i2, 0);
          for (int e = 0; e < ROW_BITS / L; e++) begin
            longint cur;
            // the MAC2 result and W1 + W2 fit their lane without wrapping
            expect_p(p, e, w1[e] * v1 + w2[e] * v2, "random MAC2");
            checks++;
            if (lane_val(dut.rows[ROW_W12], p, e) != w1[e] + w2[e]) begin
              failures++; $display("W1+W2 row lane %0d wrong", e);
            end
            cur = lane_val(acc_ref, p, e) + w1[e] * v1 + w2[e] * v2;
            for (int j = 0; j < L; j++) acc_ref[L*e + j] = cur[j];
          end
          check_acc($sformatf("random prec %0d-bit unsigned=%0d", n, u));
        end
      end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
