// tb_bramac: end-to-end self-checking test of the top-level bramac block with
// every parameter at its default, i.e. built as BRAMAC-2SA at full size
// (512 x 40 main array, two 7 x 160 dummy arrays). clk2x is tied low; this
// build does not use it.
//
// The testbench fills the 512 x 40 main array in memory mode, switches to
// compute mode and runs batches of MAC2 operations at 2-, 4- and 8-bit
// precision with signed and unsigned inputs. Each MAC2 is issued as two CIM
// instructions (copy W1 with I1/I2, then copy W2 with I3/I4 and start). In
// pipelined batches the next pair is issued exactly one MAC2 period after the
// previous one, so that its copies land in the last two cycles of the running
// MAC2; the number of busy cycles of the controller is then checked against
// the period n + 3 (signed) or n + 2 (unsigned). While MAC2s run, the ports
// that are not carrying instructions perform random reads and writes that are
// checked against a memory model. At the end of a batch all eight 40-bit
// accumulator slices (2 arrays x 4 columns) are read out with done
// instructions and compared with a lane-by-lane reference accumulation.
//
// Also covered: the worked 4-bit example of the paper (56 and -37), a start
// without copy arriving mid-MAC2 (held pending and run with the same
// weights), reset clearing the accumulators, non-pipelined issue with gaps,
// and address 0xfff acting as a plain memory address in memory mode.
// Every mechanism is counted and a mechanism that never happened is a failure.
module tb_bramac;
  import bramac_pkg::*;

  logic               clk = 1'b0;
  logic               clk2x = 1'b0;
  logic               rst_n;
  logic               mode;
  logic [PORT_AW-1:0] addr_a, addr_b;
  logic               we_a, we_b;
  logic [WORD_W-1:0]  din_a, din_b, dout_a, dout_b;

  bramac dut (.*);   // default build: BRAMAC-2SA

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ models
  logic [WORD_W-1:0] mem_ref [DEPTH];
  logic [ROW_BITS-1:0] acc_ref [2];
  logic [IN_W-1:0] st_in1 [2], st_in2 [2];

  // pending read checks for the cycle after an operation
  bit                exp_a, exp_b;
  logic [WORD_W-1:0] exp_a_val, exp_b_val;
  string             exp_b_what;

  // mechanism counters
  int n_pipe_copy = 0, n_pending = 0, n_unsigned = 0, n_signed = 0, n_readout = 0;
  int n_mem_during_mac = 0, n_reset = 0, n_mode_mem_fff = 0;
  int n_prec [3] = '{0, 0, 0};
  int busy_cycles = 0;

  always @(posedge clk) begin
    if (dut.g_2sa.u_core.u_efsm.busy) busy_cycles++;
    if (dut.g_2sa.u_core.u_efsm.iq_valid && dut.g_2sa.u_core.u_efsm.iq.copy && dut.g_2sa.u_core.u_efsm.busy) n_pipe_copy++;
    if (dut.g_2sa.u_core.u_efsm.pending_n && !dut.g_2sa.u_core.u_efsm.pending) n_pending++;
  end

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
  task automatic tick(bit is_instr, instr_2sa_t ins, bit traffic);
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
        exp_b_val = acc_ref[ins.bram_row[0]][WORD_W*ins.bram_col +: WORD_W];
      end
      if (ins.reset) begin
        acc_ref[0] = '0;
        acc_ref[1] = '0;
      end
      if (ins.copy || ins.start) begin
        st_in1[ins.w1_w2] = ins.input_1;
        st_in2[ins.w1_w2] = ins.input_2;
      end
    end else if (traffic) begin
      if (dut.g_2sa.u_core.u_efsm.busy) n_mem_during_mac++;
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

  function automatic instr_2sa_t mk(prec_e p, bit uns, bit copy, bit w12, bit start,
                                    logic [8:0] waddr, logic [IN_W-1:0] i1, logic [IN_W-1:0] i2);
    instr_2sa_t t = '0;
    t.prec = p; t.in_type = uns; t.copy = copy; t.w1_w2 = w12; t.start = start;
    t.bram_row = waddr[8:2]; t.bram_col = waddr[1:0];
    t.input_1 = i1; t.input_2 = i2;
    return t;
  endfunction

  instr_2sa_t nop_i = '0;

  task automatic do_reset_instr();
    instr_2sa_t t = '0;
    t.reset = 1;
    tick(1, t, 0);
    n_reset++;
  endtask

  task automatic readout_all();
    for (int arr = 0; arr < 2; arr++)
      for (int col = 0; col < 4; col++) begin
        instr_2sa_t t = '0;
        t.done = 1; t.bram_row = 7'(arr); t.bram_col = 2'(col);
        tick(1, t, 0);
        n_readout++;
      end
    tick(0, nop_i, 0);
  endtask

  // K MAC2s. gap = extra idle cycles between MAC2s (0 = fully pipelined).
  task automatic run_batch(prec_e p, bit uns, int K, int gap);
    int n = prec_bits(p);
    int T = uns ? n + 2 : n + 3;
    int b0;
    logic [8:0] a1, a2;
    logic [IN_W-1:0] i1, i2, i3, i4;
    for (int s = 0; s < 4; s++) tick(0, nop_i, 0);
    b0 = busy_cycles;
    for (int k = 0; k < K; k++) begin
      a1 = 9'($urandom_range(0, 255)); a2 = 9'($urandom_range(0, 255));
      i1 = 8'($urandom); i2 = 8'($urandom); i3 = 8'($urandom); i4 = 8'($urandom);
      tick(1, mk(p, uns, 1, 0, 0, a1, i1, i2), 1);
      tick(1, mk(p, uns, 1, 1, 1, a2, i3, i4), 1);
      ref_mac2(0, mem_ref[a1], mem_ref[a2], i1, i2, p, uns);
      ref_mac2(1, mem_ref[a1], mem_ref[a2], i3, i4, p, uns);
      for (int c = 0; c < T - 2 + ((gap > 0) ? T + gap : 0); c++) tick(0, nop_i, 1);
    end
    for (int c = 0; c < T + 4; c++) tick(0, nop_i, 1);
    checks++;
    if (busy_cycles - b0 != K * T) begin
      failures++;
      $display("[%0d] prec %0d-bit uns=%0d: %0d busy cycles for %0d MAC2s, expected %0d",
               cyc, n, uns, busy_cycles - b0, K, K * T);
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
      addr_a = 12'd200; we_a = 1; din_a = w1; mem_ref[200] = w1;
      addr_b = 12'd201; we_b = 1; din_b = w2; mem_ref[201] = w2;
      do_reset_instr();
      tick(1, mk(PREC_4, 0, 1, 0, 0, 9'd200, 8'b1001, 8'b0011), 0);
      tick(1, mk(PREC_4, 0, 1, 1, 1, 9'd201, 8'b1001, 8'b0011), 0);
      ref_mac2(0, w1, w2, 8'b1001, 8'b0011, PREC_4, 0);
      ref_mac2(1, w1, w2, 8'b1001, 8'b0011, PREC_4, 0);
      repeat (12) tick(0, nop_i, 0);
      checks += 2;
      if (dut.g_2sa.u_core.u_dummy0.rows[ROW_ACC][15:0] !== 16'sd56 || dut.g_2sa.u_core.u_dummy0.rows[ROW_ACC][31:16] !== -16'sd37) begin
        failures++;
        $display("worked example: lanes %0d %0d, expected 56 -37",
                 $signed(dut.g_2sa.u_core.u_dummy0.rows[ROW_ACC][15:0]), $signed(dut.g_2sa.u_core.u_dummy0.rows[ROW_ACC][31:16]));
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
      logic [8:0] a1, a2;
      int b0;
      a1 = 9'd17; a2 = 9'd99;
      do_reset_instr();
      b0 = busy_cycles;
      tick(1, mk(PREC_2, 0, 1, 0, 0, a1, 8'h02, 8'h01), 0);
      tick(1, mk(PREC_2, 0, 1, 1, 1, a2, 8'h03, 8'h02), 0);
      ref_mac2(0, mem_ref[a1], mem_ref[a2], 8'h02, 8'h01, PREC_2, 0);
      ref_mac2(1, mem_ref[a1], mem_ref[a2], 8'h03, 8'h02, PREC_2, 0);
      tick(0, nop_i, 0);              // INIT
      tick(1, mk(PREC_2, 0, 0, 0, 1, a1, 8'h01, 8'h03), 0);   // start only
      ref_mac2(0, mem_ref[a1], mem_ref[a2], 8'h01, 8'h03, PREC_2, 0);
      ref_mac2(1, mem_ref[a1], mem_ref[a2], 8'h03, 8'h02, PREC_2, 0);
      repeat (14) tick(0, nop_i, 1);
      checks++;
      if (busy_cycles - b0 != 10) begin
        failures++; $display("pending start: %0d busy cycles, expected 10", busy_cycles - b0);
      end
      readout_all();
    end

    // reset clears both accumulators
    do_reset_instr();
    readout_all();

    // every mechanism must have happened
    begin
      int mech [string];
      mech["pipelined weight copy during a MAC2"] = n_pipe_copy;
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
