// tb_efsm_2sa: self-checking test of the BRAMAC-2SA embedded FSM.
//
// Issues CIM instructions directly and compares the dummy-array control word
// of every cycle with the step list of the MAC2 sequence, built here from
// the paper's description: copy W1 / copy W2 (write port B, mux M2 = ramB),
// INIT (W1+W2 into its row, P = 0), INVERT (signed only, selected row
// inverted into the inverter row), MSB add with carry-in 1 and shift, one add
// per remaining bit (shift except for bit 0), ACCUM. It checks the streamed
// input bits of both arrays in the demux cycles, that a second MAC2 issued
// one period later overlaps its copies with the ADD-0 and ACCUM cycles and
// starts right after ACCUM, the readout selects of a done instruction and
// the accumulator clear of a reset instruction. Instructions are presented
// in one cycle and act in the next.
module tb_efsm_2sa;
  import bramac_pkg::*;

  logic        clk = 0, rst_n;
  logic        instr_valid;
  instr_2sa_t  instr;
  dummy_ctrl_t ctrl;
  logic [1:0]  in_bits [2];
  prec_e       copy_prec;
  logic        rd_acc, acc_arr, busy;
  logic [1:0]  acc_col;
  int checks = 0, failures = 0;

  efsm_2sa dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef enum {K_IDLE, K_COPY1, K_COPY2, K_INIT, K_INV, K_ADDMSB, K_ADD, K_ACCUM, K_RESET} kind_e;
  typedef struct {
    kind_e k;
    int    bit_i;       // input bit for demux cycles
    bit    copy;        // a weight copy merged into this cycle
    bit    copy_w2;
  } step_t;

  step_t exp_q [$];
  logic [7:0] in1 [2], in2 [2];
  prec_e cur_p;

  function automatic dummy_ctrl_t exp_ctrl(step_t s, prec_e p);
    dummy_ctrl_t c = DUMMY_IDLE;
    c.prec = p;
    case (s.k)
      K_INIT:   begin c.ren_a=1; c.rd_a_row=ROW_W1; c.ren_b=1; c.rd_b_row=ROW_W2;
                      c.wen_a=1; c.wr_a_row=ROW_W12; c.sel_a=M1_SUM;
                      c.wen_b=1; c.wr_b_row=ROW_P; c.sel_b=M2_ZERO; end
      K_INV:    begin c.ren_b=1; c.rd_b_demux=1; c.wen_b=1; c.wr_b_row=ROW_INV; c.sel_b=M2_BBAR; end
      K_ADDMSB: begin c.ren_a=1; c.rd_a_row=ROW_INV; c.ren_b=1; c.rd_b_row=ROW_P; c.cin=1;
                      c.wen_a=1; c.wr_a_row=ROW_P; c.sel_a=M1_SRIGHT; end
      K_ADD:    begin c.ren_a=1; c.rd_a_demux=1; c.ren_b=1; c.rd_b_row=ROW_P;
                      c.wen_a=1; c.wr_a_row=ROW_P; c.sel_a=(s.bit_i == 0) ? M1_SUM : M1_SRIGHT; end
      K_ACCUM:  begin c.ren_a=1; c.rd_a_row=ROW_ACC; c.ren_b=1; c.rd_b_row=ROW_P;
                      c.wen_a=1; c.wr_a_row=ROW_ACC; c.sel_a=M1_SUM; end
      default: ;
    endcase
    if (s.copy) begin c.wen_b=1; c.wr_b_row=s.copy_w2 ? ROW_W2 : ROW_W1; c.sel_b=M2_RAMB; end
    if (s.k == K_RESET) begin c = DUMMY_IDLE; c.wen_b=1; c.wr_b_row=ROW_ACC; c.sel_b=M2_ZERO; end
    return c;
  endfunction

  // compare this cycle's outputs (called in the middle of the cycle)
  task automatic check_cycle(step_t s);
    dummy_ctrl_t e, g;
    e = exp_ctrl(s, cur_p);
    g = ctrl;
    if (!(g.ren_a || g.ren_b)) begin g.prec = e.prec; end
    if (!(e.ren_a || e.ren_b)) begin e.prec = g.prec; end
    checks++;
    if (g !== e) begin
      failures++;
      $display("[%0t] step %s bit %0d: ctrl %p expected %p", $time, s.k.name(), s.bit_i, g, e);
    end
    if (s.k == K_INV || s.k == K_ADD) begin
      for (int a = 0; a < 2; a++) begin
        checks++;
        if (in_bits[a] !== {in2[a][s.bit_i], in1[a][s.bit_i]}) begin
          failures++;
          $display("[%0t] array %0d bit %0d: in_bits %b expected %b", $time, a, s.bit_i, in_bits[a],
                   {in2[a][s.bit_i], in1[a][s.bit_i]});
        end
      end
    end
  endtask

  function automatic instr_2sa_t mk(prec_e p, bit uns, bit copy, bit w12, bit start, logic [7:0] i1, logic [7:0] i2);
    instr_2sa_t t = '0;
    t.prec = p; t.in_type = uns; t.copy = copy; t.w1_w2 = w12; t.start = start;
    t.bram_row = 7'($urandom); t.bram_col = 2'($urandom);
    t.input_1 = i1; t.input_2 = i2;
    return t;
  endfunction

  // Drive a list of (cycle, instruction) and check `ncyc` cycles of control
  // against the expected queue, which starts one cycle after the first issue.
  instr_2sa_t issue_at [int];

  task automatic run(int ncyc);
    for (int c = 0; c < ncyc; c++) begin
      @(negedge clk);
      if (c > 0) check_cycle(exp_q.size() > 0 ? exp_q.pop_front() : step_t'{K_IDLE, 0, 0, 0});
      instr_valid = issue_at.exists(c);
      instr = issue_at.exists(c) ? issue_at[c] : instr_2sa_t'($urandom);
    end
    issue_at.delete();
  endtask

  // expected steps of one MAC2 following its start; copies merged by caller
  task automatic push_mac2(int n, bit uns);
    exp_q.push_back('{K_INIT, 0, 0, 0});
    if (!uns) begin
      exp_q.push_back('{K_INV, n - 1, 0, 0});
      exp_q.push_back('{K_ADDMSB, n - 1, 0, 0});
    end
    for (int i = uns ? n - 1 : n - 2; i >= 0; i--) exp_q.push_back('{K_ADD, i, 0, 0});
    exp_q.push_back('{K_ACCUM, 0, 0, 0});
  endtask

  initial begin
    instr_valid = 0; instr = '0; rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // reset instruction clears the accumulator
    issue_at[0] = '0; issue_at[0].reset = 1;
    exp_q.push_back('{K_RESET, 0, 0, 0});
    run(4);

    // two pipelined MAC2s at each precision, signed and unsigned
    for (int pi = 0; pi < 3; pi++)
      for (int u = 0; u < 2; u++) begin
        int n, T, base;
        cur_p = prec_e'(pi);
        n = prec_bits(cur_p);
        T = (u != 0) ? n + 2 : n + 3;
        for (int a = 0; a < 2; a++) begin in1[a] = 8'($urandom); in2[a] = 8'($urandom); end
        issue_at[0] = mk(cur_p, u[0], 1, 0, 0, in1[0], in2[0]);
        issue_at[1] = mk(cur_p, u[0], 1, 1, 1, in1[1], in2[1]);
        exp_q.push_back('{K_COPY1, 0, 1, 0});
        exp_q.push_back('{K_COPY2, 0, 1, 1});
        push_mac2(n, u[0]);
        // second MAC2 issued one period later: its copies ride on ADD 0 and ACCUM
        begin
          logic [7:0] j1 [2], j2 [2];
          for (int a = 0; a < 2; a++) begin j1[a] = 8'($urandom); j2[a] = 8'($urandom); end
          issue_at[T]     = mk(cur_p, u[0], 1, 0, 0, j1[0], j2[0]);
          issue_at[T + 1] = mk(cur_p, u[0], 1, 1, 1, j1[1], j2[1]);
          exp_q[exp_q.size() - 2].copy = 1;
          exp_q[exp_q.size() - 1].copy = 1; exp_q[exp_q.size() - 1].copy_w2 = 1;
          base = exp_q.size();
          push_mac2(n, u[0]);
          // check the first MAC2 with its inputs, then switch to the second's
          for (int c = 0; c < base + 2; c++) begin
            @(negedge clk);
            if (c > 0) check_cycle(exp_q.pop_front());
            instr_valid = issue_at.exists(c);
            instr = issue_at.exists(c) ? issue_at[c] : instr_2sa_t'($urandom);
          end
          in1 = j1; in2 = j2;
          for (int c = base + 2; c < base + 2 + T + 3; c++) begin
            @(negedge clk);
            check_cycle(exp_q.size() > 0 ? exp_q.pop_front() : step_t'{K_IDLE, 0, 0, 0});
            instr_valid = 0;
            instr = instr_2sa_t'($urandom);
          end
          issue_at.delete();
        end
      end

    // readout selects of a done instruction
    for (int t = 0; t < 8; t++) begin
      instr_2sa_t d;
      d = '0; d.done = 1; d.bram_row = 7'(t / 4); d.bram_col = 2'(t % 4);
      @(negedge clk);
      instr_valid = 1; instr = d;
      @(negedge clk);
      instr_valid = 0;
      checks++;
      if (!rd_acc || acc_arr !== 1'(t / 4) || acc_col !== 2'(t % 4)) begin
        failures++; $display("done: rd_acc=%0d arr=%0d col=%0d for %0d", rd_acc, acc_arr, acc_col, t);
      end
      checks++;
      if (busy) begin failures++; $display("done instruction made the eFSM busy"); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
