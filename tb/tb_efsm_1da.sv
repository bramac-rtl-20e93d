// tb_efsm_1da: cycle-exact self-checking test of the BRAMAC-1DA controller.
//
// The controller is driven with CIM instructions on the main clock, and its
// dummy-array control word, input bits, capture strobe and readout strobe
// are compared in the middle of every half cycle of the doubled clock with
// an expected schedule that the testbench builds from the step list:
//   instruction presented in main cycle c (registered at its end)
//   cycle c+1        cap_en (copy) or rd_acc + acc_col (done)
//   cycle c+2, 1st   copy: W1 <- ramA via write port A, W2 <- ramB via port B;
//                    reset: accumulator <- 0 through port B
//   then, one per half cycle: INIT, INVERT, ADDMSB (signed only),
//                    ADD i (i = n-2 .. 0, or n-1 .. 0 if unsigned), ACCUM
// Covered: single and back-to-back MAC2s at 2, 4 and 8 bit, signed and
// unsigned, issued every n/2 + 2 main cycles; a start without copy arriving
// while a MAC2 runs (held until ACCUM); done; reset; the precision sent to
// the sign-extension muxes during each copy.
module tb_efsm_1da;
  import bramac_pkg::*;

  logic        clk = 1'b0, clk2x = 1'b1, rst_n;
  logic        instr_valid;
  instr_1da_t  instr;
  dummy_ctrl_t ctrl;
  logic [1:0]  in_bits;
  logic        cap_en, rd_acc, busy;
  prec_e       copy_prec;
  logic [COL_AW-1:0] acc_col;

  efsm_1da dut (.*);

  always #10 clk = ~clk;
  always #5 clk2x = ~clk2x;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- expectations
  typedef enum int {E_IDLE, E_COPY, E_RESET, E_INIT, E_INVERT, E_ADDMSB, E_ADD, E_ACCUM} step_e;

  localparam int HMAX = 4096;
  step_e        exp_step [HMAX];
  int           exp_bit  [HMAX];      // input bit index for INVERT / ADD
  logic [IN_W-1:0] exp_i1 [HMAX], exp_i2 [HMAX];
  prec_e        exp_prec [HMAX];
  logic         exp_cap  [HMAX];
  logic         exp_rd   [HMAX];
  logic [1:0]   exp_col  [HMAX];
  int           n_seen   [step_e];

  // half-cycle counter (2m and 2m+1 are the halves of main cycle m) and
  // main-cycle counter; both reach 0 at the first rising edge
  int hc = -1, mcnt = -1;
  always @(posedge clk2x) hc <= hc + 1;
  always @(posedge clk) mcnt <= mcnt + 1;

  // expected control word of a step (fields that do not matter stay idle)
  function automatic dummy_ctrl_t model(step_e s, int i);
    dummy_ctrl_t c;
    c = DUMMY_IDLE;
    case (s)
      E_COPY: begin
        c.wen_a = 1; c.wr_a_row = ROW_W1; c.sel_a = M1_RAMA;
        c.wen_b = 1; c.wr_b_row = ROW_W2; c.sel_b = M2_RAMB;
      end
      E_RESET: begin
        c.wen_b = 1; c.wr_b_row = ROW_ACC; c.sel_b = M2_ZERO;
      end
      E_INIT: begin
        c.ren_a = 1; c.rd_a_row = ROW_W1; c.ren_b = 1; c.rd_b_row = ROW_W2;
        c.wen_a = 1; c.wr_a_row = ROW_W12; c.sel_a = M1_SUM;
        c.wen_b = 1; c.wr_b_row = ROW_P; c.sel_b = M2_ZERO;
      end
      E_INVERT: begin
        c.ren_b = 1; c.rd_b_demux = 1;
        c.wen_b = 1; c.wr_b_row = ROW_INV; c.sel_b = M2_BBAR;
      end
      E_ADDMSB: begin
        c.ren_a = 1; c.rd_a_row = ROW_INV; c.ren_b = 1; c.rd_b_row = ROW_P; c.cin = 1;
        c.wen_a = 1; c.wr_a_row = ROW_P; c.sel_a = M1_SRIGHT;
      end
      E_ADD: begin
        c.ren_a = 1; c.rd_a_demux = 1; c.ren_b = 1; c.rd_b_row = ROW_P;
        c.wen_a = 1; c.wr_a_row = ROW_P; c.sel_a = (i == 0) ? M1_SUM : M1_SRIGHT;
      end
      E_ACCUM: begin
        c.ren_a = 1; c.rd_a_row = ROW_ACC; c.ren_b = 1; c.rd_b_row = ROW_P;
        c.wen_a = 1; c.wr_a_row = ROW_ACC; c.sel_a = M1_SUM;
      end
      default: ;
    endcase
    return c;
  endfunction

  // compare only the fields that take effect
  function automatic bit same(dummy_ctrl_t a, dummy_ctrl_t b, bit chk_prec);
    if (a.ren_a != b.ren_a || a.ren_b != b.ren_b || a.wen_a != b.wen_a || a.wen_b != b.wen_b) return 0;
    if (a.ren_a && (a.rd_a_demux != b.rd_a_demux || (!a.rd_a_demux && a.rd_a_row != b.rd_a_row))) return 0;
    if (a.ren_b && (a.rd_b_demux != b.rd_b_demux || (!a.rd_b_demux && a.rd_b_row != b.rd_b_row))) return 0;
    if (a.wen_a && (a.wr_a_row != b.wr_a_row || a.sel_a != b.sel_a)) return 0;
    if (a.wen_b && (a.wr_b_row != b.wr_b_row || a.sel_b != b.sel_b)) return 0;
    if (a.cin != b.cin) return 0;
    if (chk_prec && a.prec != b.prec) return 0;
    return 1;
  endfunction

  // sample in the middle of every half cycle
  always @(negedge clk2x) if (rst_n && hc < HMAX) begin
    dummy_ctrl_t e;
    step_e s;
    s = exp_step[hc];
    e = model(s, exp_bit[hc]);
    e.prec = exp_prec[hc];
    checks++;
    if (!same(ctrl, e, s != E_IDLE && s != E_COPY && s != E_RESET)) begin
      failures++;
      $display("[h%0d] control word differs: expected step %s (bit %0d)", hc, s.name(), exp_bit[hc]);
    end
    if (s == E_INVERT || s == E_ADD) begin
      checks++;
      if (in_bits !== {exp_i2[hc][exp_bit[hc]], exp_i1[hc][exp_bit[hc]]}) begin
        failures++;
        $display("[h%0d] in_bits %b, expected bit %0d of I2/I1", hc, in_bits, exp_bit[hc]);
      end
    end
    if (s == E_COPY) begin
      checks++;
      if (copy_prec !== exp_prec[hc]) begin
        failures++; $display("[h%0d] copy_prec %0d, expected %0d", hc, copy_prec, exp_prec[hc]);
      end
    end
    checks++;
    if (busy !== (s inside {E_INIT, E_INVERT, E_ADDMSB, E_ADD, E_ACCUM})) begin
      failures++; $display("[h%0d] busy = %0d during step %s", hc, busy, s.name());
    end
    checks++;
    if (cap_en !== exp_cap[hc] || rd_acc !== exp_rd[hc] || (rd_acc && acc_col !== exp_col[hc])) begin
      failures++;
      $display("[h%0d] cap_en/rd_acc/acc_col = %0d/%0d/%0d, expected %0d/%0d/%0d",
               hc, cap_en, rd_acc, acc_col, exp_cap[hc], exp_rd[hc], exp_col[hc]);
    end
    n_seen[s]++;
  end

  // writes the step list of one MAC2 starting at half cycle h; returns the
  // half cycle of its ACCUM
  function automatic int plan_mac2(int h, prec_e p, bit uns, logic [IN_W-1:0] i1, logic [IN_W-1:0] i2);
    int n;
    n = prec_bits(p);
    for (int k = h; k < h + n + 3; k++) begin
      exp_prec[k] = p; exp_i1[k] = i1; exp_i2[k] = i2;
    end
    exp_step[h] = E_INIT; h++;
    if (!uns) begin
      exp_step[h] = E_INVERT; exp_bit[h] = n - 1; h++;
      exp_step[h] = E_ADDMSB; h++;
    end
    for (int i = uns ? n - 1 : n - 2; i >= 0; i--) begin
      exp_step[h] = E_ADD; exp_bit[h] = i; h++;
    end
    exp_step[h] = E_ACCUM;
    return h;
  endfunction

  // ---------------------------------------------------------------- driver
  // called at a falling edge of clk: presents t in the current main cycle
  task automatic present(instr_1da_t t);
    instr_valid = 1; instr = t;
    @(negedge clk);
    instr_valid = 0; instr = '0;
  endtask

  task automatic idle(int cycles);
    repeat (cycles) @(negedge clk);
  endtask

  function automatic instr_1da_t mac(prec_e p, bit uns, bit copy, logic [IN_W-1:0] i1, logic [IN_W-1:0] i2);
    instr_1da_t t;
    t = '0;
    t.prec = p; t.in_type = uns; t.copy = copy; t.start = 1;
    t.bram_row_1 = 7'd3; t.bram_row_2 = 7'd9; t.bram_col = 2'd1;
    t.input_1 = i1; t.input_2 = i2;
    return t;
  endfunction

  // plan and present a MAC2 with copy; returns the half cycle of its ACCUM
  task automatic issue_mac(prec_e p, bit uns, output int acc_h);
    logic [IN_W-1:0] i1, i2;
    int h0;
    i1 = 8'($urandom); i2 = 8'($urandom);
    // presented in main cycle m: capture in m+1, copy in the first half of m+2
    h0 = 2 * (mcnt + 2);
    exp_cap[h0 - 2] = 1; exp_cap[h0 - 1] = 1;
    exp_step[h0] = E_COPY; exp_prec[h0] = p;
    acc_h = plan_mac2(h0 + 1, p, uns, i1, i2);
    present(mac(p, uns, 1, i1, i2));
  endtask

  initial begin
    int a_h, n, T;
    instr_1da_t t;
    logic [IN_W-1:0] j1, j2;
    for (int k = 0; k < HMAX; k++) begin
      exp_step[k] = E_IDLE; exp_bit[k] = 0; exp_prec[k] = PREC_2;
      exp_cap[k] = 0; exp_rd[k] = 0; exp_col[k] = '0; exp_i1[k] = '0; exp_i2[k] = '0;
    end
    instr_valid = 0; instr = '0; rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    idle(2);

    for (int pi = 0; pi < 3; pi++)
      for (int u = 0; u < 2; u++) begin
        n = prec_bits(prec_e'(pi));
        T = n / 2 + 2;
        // single MAC2
        issue_mac(prec_e'(pi), u[0], a_h);
        idle(T + 2);
        // three back-to-back MAC2s at the nominal period
        for (int r = 0; r < 3; r++) begin
          issue_mac(prec_e'(pi), u[0], a_h);
          idle(T - 1);
        end
        idle(4);
      end

    // start without copy while a MAC2 runs: held and started after ACCUM
    issue_mac(PREC_4, 0, a_h);
    j1 = 8'($urandom); j2 = 8'($urandom);
    void'(plan_mac2(a_h + 1, PREC_4, 0, j1, j2));
    present(mac(PREC_4, 0, 0, j1, j2));
    idle(8);

    // done: readout strobe and slice in the next main cycle
    for (int c = 0; c < 4; c++) begin
      t = '0; t.done = 1; t.bram_col = 2'(c);
      exp_rd[2 * (mcnt + 1)] = 1; exp_rd[2 * (mcnt + 1) + 1] = 1;
      exp_col[2 * (mcnt + 1)] = 2'(c); exp_col[2 * (mcnt + 1) + 1] = 2'(c);
      present(t);
    end
    idle(2);

    // reset: clears the accumulator in the first half of its acting cycle
    t = '0; t.reset = 1;
    exp_step[2 * (mcnt + 2)] = E_RESET;
    present(t);
    idle(4);

    foreach (n_seen[s]) $display("step %-10s seen %0d half cycles", s.name(), n_seen[s]);
    checks++;
    if (n_seen.num() != 8) begin
      failures++; $display("not every step kind was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
