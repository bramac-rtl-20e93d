// tb_bramac_1da: end-to-end self-checking test of the BRAMAC-1DA block at
// its default size.
//
// clk and clk2x are phase-aligned (every clk rising edge is also a clk2x
// rising edge). The testbench fills the main array in memory mode, then in
// compute mode runs batches of MAC2s at 2-, 4- and 8-bit precision with
// signed and unsigned inputs. Each MAC2 is one CIM instruction (copy W1 and W2
// from two rows with a shared column, start, inputs I1/I2). In pipelined
// batches an instruction is issued every 3 / 4 / 6 main cycles (2 / 4 / 8-bit),
// the MAC2 latency the paper gives for this variant; the results are only
// right if that period is enough, and the controller's busy half cycles are
// checked against n + 3 (signed) or n + 2 (unsigned) per MAC2. Memory traffic
// on free cycles is checked against a model, and the four 40-bit accumulator
// slices are read out with done instructions after every batch. Also covered:
// the paper's worked 4-bit example, a start without copy held pending during
// a running MAC2, reset, issue with idle gaps, and 0xfff as a plain address in
// memory mode. Every mechanism is counted; one that never happened fails.
module tb_bramac_1da;
  import bramac_pkg::*;

  logic               clk = 1'b0, clk2x = 1'b1;
  logic               rst_n;
  logic               mode;
  logic [PORT_AW-1:0] addr_a, addr_b;
  logic               we_a, we_b;
  logic [WORD_W-1:0]  din_a, din_b, dout_a, dout_b;

  bramac #(.VARIANT(VAR_1DA)) dut (.*);

  always #10 clk = ~clk;
  always #5 clk2x = ~clk2x;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ models
  logic [WORD_W-1:0] mem_ref [DEPTH];
  logic [ROW_BITS-1:0] acc_ref [1];
  logic [IN_W-1:0] st_in1, st_in2;

  // pending read checks for the cycle after an operation
  bit                exp_a, exp_b;
  logic [WORD_W-1:0] exp_a_val, exp_b_val;
  string             exp_b_what;

  // mechanism counters
  int n_pipe_copy = 0, n_pending = 0, n_unsigned = 0, n_signed = 0, n_readout = 0;
  int n_mem_during_mac = 0, n_reset = 0, n_mode_mem_fff = 0;
  int n_prec [3] = '{0, 0, 0};
  int busy_cycles = 0;

  always @(posedge clk2x) begin
    if (dut.g_1da.u_core.u_efsm.busy) busy_cycles++;
    if (dut.g_1da.u_core.u_efsm.pending_n && !dut.g_1da.u_core.u_efsm.pending) n_pending++;
  end
  // the next MAC2's weight read happens while the dummy array computes
  always @(posedge clk)
    if (dut.g_1da.u_core.u_efsm.iq1_v && dut.g_1da.u_core.u_efsm.iq1.copy && dut.g_1da.u_core.u_efsm.busy) n_pipe_copy++;

  function automatic int lane_w(prec_e p);
    return (p == PREC_2) ? 8 : (p == PREC_4) ? 16 : 32;
  endfunction

  // element e of a weight word, sign-extended
  function automatic longint welem(logic [WORD_W-1:0] w, prec_e p, int e);
    int n = prec_bits(p);
    longint v = 0;
    for (int b = 0; b < n; b++) v[b] = w[n*e + b];
    if (w[n*e + n - 1]) v = v - (longint'(1) << n);
    return v;
  endfunction

  function automatic longint ival(logic [IN_W-1:0] x, prec_e p, bit uns);
    int n = prec_bits(p);
    longint v = 0;
    for (int b = 0; b < n; b++) v[b] = x[b];
    if (!uns && x[n-1]) v = v - (longint'(1) << n);
    return v;
  endfunction

  // acc[arr] += W1*Ia + W2*Ib lane by lane, modulo the lane width
  task automatic ref_mac2(int arr, logic [WORD_W-1:0] w1, logic [WORD_W-1:0] w2,
                          logic [IN_W-1:0] ia, logic [IN_W-1:0] ib, prec_e p, bit uns);
    int L = lane_w(p);
    int lanes = ROW_BITS / L;
    for (int e = 0; e < lanes; e++) begin
      longint prod = welem(w1, p, e) * ival(ia, p, uns) + welem(w2, p, e) * ival(ib, p, uns);
      longint cur = 0;
      for (int b = 0; b < L; b++) cur[b] = acc_ref[arr][L*e + b];
      cur = cur + prod;
      for (int b = 0; b < L; b++) acc_ref[arr][L*e + b] = cur[b];
    end
  endtask

  // ---------------------------------------------------------------- stimulus
  // One clock cycle. Checks the reads of the previous cycle, then drives the
  // ports for this cycle: a CIM instruction on port A, or random memory
  // traffic (writes on port A into words 256..510, reads on port B).
  task automatic tick(bit is_instr, instr_1da_t ins, bit traffic);
    @(negedge clk);
    if (exp_a) begin
      checks++;
      if (dout_a !== exp_a_val) begin
        failures++;
        $display("[%0d] port A read: got %h expected %h", cyc, dout_a, exp_a_val);
      end
    end
    if (exp_b) begin
      checks++;
      if (dout_b !== exp_b_val) begin
        failures++;
        $display("[%0d] port B %s: got %h expected %h", cyc, exp_b_what, dout_b, exp_b_val);
      end
    end
    exp_a = 0; exp_b = 0;
    we_a = 0; we_b = 0;
    addr_a = 12'($urandom_range(0, 255)); addr_b = 12'($urandom_range(0, 255));
    din_a = 40'({$urandom, $urandom}); din_b = 40'({$urandom, $urandom});
    if (is_instr) begin
      addr_a = CIM_ADDR;
      din_a  = WORD_W'(ins);
      we_a   = 1'($urandom);
      we_b   = 1'($urandom);   // overridden by the instruction
      if (ins.done) begin
        exp_b = 1;
        exp_b_what = "accumulator readout";
        exp_b_val = acc_ref[0][WORD_W*ins.bram_col +: WORD_W];
      end
      if (ins.reset) acc_ref[0] = '0;
      if (ins.copy || ins.start) begin
        st_in1 = ins.input_1;
        st_in2 = ins.input_2;
      end
    end else if (traffic) begin
      if (dut.g_1da.u_core.u_efsm.busy) n_mem_during_mac++;
      // port B read (sees the old word if port A writes it this cycle)
      addr_b = 12'($urandom_range(0, 510));
      exp_b = 1; exp_b_what = "memory read"; exp_b_val = mem_ref[addr_b[8:0]];
      if ($urandom_range(0, 1) == 1) begin
        addr_a = 12'($urandom_range(256, 510));
        we_a = 1;
        mem_ref[addr_a[8:0]] = din_a;
      end else begin
        addr_a = 12'($urandom_range(0, 510));
        exp_a = 1; exp_a_val = mem_ref[addr_a[8:0]];
      end
    end
  endtask

  // W1 at {row1, col}, W2 at {row2, col}
  function automatic instr_1da_t mk(prec_e p, bit uns, bit copy, bit start, logic [6:0] row1,
                                    logic [6:0] row2, logic [1:0] col, logic [IN_W-1:0] i1, logic [IN_W-1:0] i2);
    instr_1da_t t = '0;
    t.prec = p; t.in_type = uns; t.copy = copy; t.start = start;
    t.bram_row_1 = row1; t.bram_row_2 = row2; t.bram_col = col;
    t.input_1 = i1; t.input_2 = i2;
    return t;
  endfunction

  instr_1da_t nop_i = '0;

  task automatic do_reset_instr();
    instr_1da_t t = '0;
    t.reset = 1;
    tick(1, t, 0);
    tick(0, nop_i, 0);   // the clear lands one cycle after a done would read
    n_reset++;
  endtask

  task automatic readout_all();
    for (int col = 0; col < 4; col++) begin
      instr_1da_t t = '0;
      t.done = 1; t.bram_col = 2'(col);
      tick(1, t, 0);
      n_readout++;
    end
    tick(0, nop_i, 0);
  endtask

  // K MAC2s. gap = extra idle main cycles between MAC2s (0 = fully pipelined).
  task automatic run_batch(prec_e p, bit uns, int K, int gap);
    int n = prec_bits(p);
    int T = n / 2 + 2;                       // main cycles per MAC2: 3 / 4 / 6
    int H = uns ? n + 2 : n + 3;             // busy half cycles per MAC2
    int b0;
    logic [6:0] r1, r2;
    logic [1:0] col;
    logic [IN_W-1:0] i1, i2;
    for (int s = 0; s < 4; s++) tick(0, nop_i, 0);
    b0 = busy_cycles;
    for (int k = 0; k < K; k++) begin
      r1 = 7'($urandom_range(0, 63)); r2 = 7'($urandom_range(0, 63)); col = 2'($urandom);
      i1 = 8'($urandom); i2 = 8'($urandom);
      tick(1, mk(p, uns, 1, 1, r1, r2, col, i1, i2), 1);
      ref_mac2(0, mem_ref[{r1, col}], mem_ref[{r2, col}], i1, i2, p, uns);
      for (int c = 0; c < T - 1 + ((gap > 0) ? T + gap : 0); c++) tick(0, nop_i, 1);
    end
    for (int c = 0; c < T + 4; c++) tick(0, nop_i, 1);
    checks++;
    if (busy_cycles - b0 != K * H) begin
      failures++;
      $display("[%0d] prec %0d-bit uns=%0d: %0d busy half cycles for %0d MAC2s, expected %0d",
               cyc, n, uns, busy_cycles - b0, K, K * H);
    end
    n_prec[p]++;
    if (uns) n_unsigned++; else n_signed++;
  endtask

  initial begin
    rst_n = 0; mode = 0; we_a = 0; we_b = 0; addr_a = '0; addr_b = '0; din_a = '0; din_b = '0;
    exp_a = 0; exp_b = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // memory mode: fill the array through both ports, 0xfff is a plain address
    for (int w = 0; w < DEPTH; w += 2) begin
      @(negedge clk);
      addr_a = 12'(w); we_a = 1; din_a = 40'({$urandom, $urandom}); mem_ref[w] = din_a;
      addr_b = 12'(w + 1); we_b = 1; din_b = 40'({$urandom, $urandom}); mem_ref[w+1] = din_b;
    end
    @(negedge clk);
    addr_a = CIM_ADDR; we_a = 1; din_a = 40'h5a_a5c3_3c0f; we_b = 0; mem_ref[511] = din_a;
    @(negedge clk);
    we_a = 0; addr_a = '0; addr_b = 12'd511;
    @(negedge clk);
    checks++;
    if (dout_b !== 40'h5a_a5c3_3c0f) begin
      failures++; $display("memory mode: address 0xfff did not act as word 511");
    end else n_mode_mem_fff++;
    for (int w = 0; w < 8; w++) begin
      @(negedge clk);
      addr_a = 12'(w); addr_b = 12'(w + 300);
      @(negedge clk);
      checks += 2;
      if (dout_a !== mem_ref[w] || dout_b !== mem_ref[w + 300]) begin
        failures++; $display("memory mode read-back mismatch at %0d", w);
      end
    end

    // compute mode
    @(negedge clk);
    mode = 1;
    do_reset_instr();
    readout_all();

    // worked example: 4-bit W1 = (-5, 4), W2 = (7, -3), I1 = -7, I2 = 3
    begin
      logic [WORD_W-1:0] w1, w2;
      w1 = {32'h0, 4'b0100, 4'b1011};
      w2 = {32'h0, 4'b1101, 4'b0111};
      @(negedge clk);
      addr_a = 12'd200; we_a = 1; din_a = w1; mem_ref[200] = w1;   // row 50, column 0
      addr_b = 12'd204; we_b = 1; din_b = w2; mem_ref[204] = w2;   // row 51, column 0
      do_reset_instr();
      tick(1, mk(PREC_4, 0, 1, 1, 7'd50, 7'd51, 2'd0, 8'b1001, 8'b0011), 0);
      ref_mac2(0, w1, w2, 8'b1001, 8'b0011, PREC_4, 0);
      repeat (8) tick(0, nop_i, 0);
      checks += 2;
      if (dut.g_1da.u_core.u_dummy.rows[ROW_ACC][15:0] !== 16'sd56 || dut.g_1da.u_core.u_dummy.rows[ROW_ACC][31:16] !== -16'sd37) begin
        failures++;
        $display("worked example: lanes %0d %0d, expected 56 -37",
                 $signed(dut.g_1da.u_core.u_dummy.rows[ROW_ACC][15:0]), $signed(dut.g_1da.u_core.u_dummy.rows[ROW_ACC][31:16]));
      end
      readout_all();
    end

    // pipelined batches at every precision, signed and unsigned
    for (int pi = 0; pi < 3; pi++)
      for (int u = 0; u < 2; u++) begin
        do_reset_instr();
        run_batch(prec_e'(pi), u[0], 6, 0);
        readout_all();
      end

    // non-pipelined issue with idle gaps, accumulating on top of a batch
    do_reset_instr();
    run_batch(PREC_8, 0, 3, 2);
    run_batch(PREC_8, 0, 4, 0);
    readout_all();

    // start without copy during a running MAC2: held pending, reuses weights
    begin
      logic [6:0] r1, r2;
      int b0;
      r1 = 7'd17; r2 = 7'd40;
      do_reset_instr();
      b0 = busy_cycles;
      tick(1, mk(PREC_2, 0, 1, 1, r1, r2, 2'd1, 8'h02, 8'h01), 0);
      ref_mac2(0, mem_ref[{r1, 2'd1}], mem_ref[{r2, 2'd1}], 8'h02, 8'h01, PREC_2, 0);
      tick(0, nop_i, 0);
      tick(1, mk(PREC_2, 0, 0, 1, r1, r2, 2'd1, 8'h01, 8'h03), 0);   // start only
      ref_mac2(0, mem_ref[{r1, 2'd1}], mem_ref[{r2, 2'd1}], 8'h01, 8'h03, PREC_2, 0);
      repeat (10) tick(0, nop_i, 1);
      checks++;
      if (busy_cycles - b0 != 10) begin
        failures++; $display("pending start: %0d busy half cycles, expected 10", busy_cycles - b0);
      end
      readout_all();
    end

    // reset clears the accumulator
    do_reset_instr();
    readout_all();

    // every mechanism must have happened
    begin
      int mech [string];
      mech["next weight read during a MAC2"] = n_pipe_copy;
      mech["pending start"] = n_pending;
      mech["signed inputs (inverting cycle)"] = n_signed;
      mech["unsigned inputs (no inverting cycle)"] = n_unsigned;
      mech["accumulator readout"] = n_readout;
      mech["memory access while a MAC2 runs"] = n_mem_during_mac;
      mech["reset instruction"] = n_reset;
      mech["0xfff as memory address in memory mode"] = n_mode_mem_fff;
      mech["2-bit precision"] = n_prec[0];
      mech["4-bit precision"] = n_prec[1];
      mech["8-bit precision"] = n_prec[2];
      foreach (mech[m]) begin
        $display("mechanism %-42s %0d", m, mech[m]);
        checks++;
        if (mech[m] == 0) begin
          failures++; $display("mechanism never exercised: %s", m);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
