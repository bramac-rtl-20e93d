// tb_gemv_1da: matrix-vector product y = A x on one BRAMAC block built as
// BRAMAC-1DA, the workload the paper uses to compare the block with other
// compute-in-BRAM designs (a single block, matrices of 64-320 rows by
// 128-480 columns, 2-, 4- and 8-bit signed data).
//
// This testbench runs the smallest of those sizes, 64 x 128, at all three
// precisions, and checks every output exactly against y = A x computed here.
//
// Data layout (this testbench's own choice, following the paper's rule that
// the matrix is stored transposed so that a matrix column lies along a BRAM
// row): matrix column j lives in BRAM row j (128 rows), and the 64 elements
// of a column are split into passes of L = 20 / 10 / 5 elements (one 40-bit
// word, one SIMD lane each). Pass p uses the word at column slot p mod 4.
// A pass runs 64 MAC2s, one per column pair (j, j+1) with inputs x[j] and
// x[j+1], issued every 3 / 4 / 6 main cycles, then reads the accumulator and
// clears it.
//   2-bit: 4 passes fill exactly the four column slots, so the whole padded
//          matrix (512 words) is stored before the computation starts
//          ("persistent" case).
//   4-bit, 8-bit: 7 / 13 passes do not fit; the words of pass p+1 are
//          written through the two ports in the cycles between instructions
//          while pass p computes ("non-persistent" or tiled case). The test
//          counts a failure if the loading ever has to stall the computation.
// With 2-bit data an 8-bit accumulator lane holds at most 16 products safely
// (the paper: "it can process a maximum dot product size of 16/256/2048
// before being read out"), so in that case the accumulator is read every 8
// MAC2s and the testbench adds up the differences between readouts.
//
// Also checked: the controller's busy half cycles per pass equal 64 x (n + 3).
module tb_gemv_1da;
  import bramac_pkg::*;

  localparam int ROWS = 64;     // output vector length
  localparam int COLS = 128;    // input vector length

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
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int busy_half = 0;
  always @(posedge clk2x) if (dut.g_1da.u_core.u_efsm.busy) busy_half++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ workload data
  int a_mat [ROWS][COLS];
  int x_vec [COLS];
  longint y_hw [ROWS];

  // words waiting to be written into the main array
  logic [WORD_AW-1:0] q_addr [$];
  logic [WORD_W-1:0]  q_data [$];

  logic [WORD_W-1:0] cap_b;     // dout_b seen at the start of the current cycle
  int n_overlap_writes = 0, n_partial_readouts = 0, n_stall = 0;

  // word of pass p, matrix column j: elements A[p*L + e][j], e = 0 .. L-1
  function automatic logic [WORD_W-1:0] pack_word(int p, int j, int n);
    logic [WORD_W-1:0] w;
    int L;
    int r;
    L = WORD_W / n;
    w = '0;
    for (int e = 0; e < L; e++) begin
      r = p * L + e;
      if (r < ROWS)
        for (int b = 0; b < n; b++) w[n*e + b] = a_mat[r][j][b];
    end
    return w;
  endfunction

  function automatic logic [WORD_AW-1:0] waddr(int j, int p);
    return WORD_AW'(j * 4 + (p % 4));
  endfunction

  // One main cycle. At the falling edge the previous cycle's dout_b is
  // captured, then the ports are driven: an instruction on port A, or up to
  // two queued words, one per port.
  task automatic cycle(bit instr_v, instr_1da_t ins, bit cim);
    @(negedge clk);
    cap_b = dout_b;
    we_a = 0; we_b = 0;
    addr_a = '0; addr_b = '0;
    din_a = '0; din_b = '0;
    if (instr_v) begin
      addr_a = CIM_ADDR; din_a = WORD_W'(ins);
    end else if (q_addr.size() > 0) begin
      addr_a = PORT_AW'(q_addr.pop_front()); din_a = q_data.pop_front(); we_a = 1;
      if (cim) n_overlap_writes++;
    end
    if (!instr_v && q_addr.size() > 0) begin
      addr_b = PORT_AW'(q_addr.pop_front()); din_b = q_data.pop_front(); we_b = 1;
      if (cim) n_overlap_writes++;
    end
    @(posedge clk);
  endtask

  instr_1da_t nop_i = '0;

  // accumulator row, read with four done instructions
  task automatic read_acc(output logic [ROW_BITS-1:0] acc);
    instr_1da_t t;
    acc = '0;
    for (int c = 0; c < 5; c++) begin
      t = '0;
      t.done = 1; t.bram_col = 2'(c);
      cycle(c < 4, t, 1);
      if (c > 0) acc[WORD_W*(c-1) +: WORD_W] = cap_b;
    end
  endtask

  task automatic clear_acc();
    instr_1da_t t;
    t = '0;
    t.reset = 1;
    cycle(1, t, 1);
    cycle(0, nop_i, 1);
  endtask

  task automatic queue_pass(int p, int n);
    for (int j = 0; j < COLS; j++) begin
      q_addr.push_back(waddr(j, p));
      q_data.push_back(pack_word(p, j, n));
    end
  endtask

  // ------------------------------------------------------------- one GEMV
  task automatic run_gemv(prec_e prec);
    int n, L, passes, T, lw, readout_every, b0, t0;
    logic [ROW_BITS-1:0] acc, acc_prev;
    instr_1da_t t;
    longint y_ref;
    n = prec_bits(prec);
    L = WORD_W / n;
    lw = ROW_BITS / L;                      // accumulator lane width
    passes = (ROWS + L - 1) / L;
    T = n / 2 + 2;
    readout_every = (n == 2) ? 8 : COLS / 2;

    // random n-bit signed data
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) a_mat[r][j] = $urandom_range(0, (1 << n) - 1) - (1 << (n - 1));
    for (int j = 0; j < COLS; j++) x_vec[j] = $urandom_range(0, (1 << n) - 1) - (1 << (n - 1));
    for (int r = 0; r < ROWS; r++) y_hw[r] = 0;

    // load: all passes (persistent) or the first pass only (tiled),
    // in memory mode through both ports
    mode = 0;
    for (int p = 0; p < ((passes <= 4) ? passes : 1); p++) queue_pass(p, n);
    while (q_addr.size() > 0) cycle(0, nop_i, 0);
    mode = 1;
    cycle(0, nop_i, 1);
    clear_acc();

    t0 = cyc;
    for (int p = 0; p < passes; p++) begin
      if (passes > 4 && p + 1 < passes) queue_pass(p + 1, n);   // next tile
      acc_prev = '0;
      b0 = busy_half;
      for (int k = 0; k < COLS / 2; k++) begin
        t = '0;
        t.prec = prec; t.in_type = 1'b0; t.copy = 1; t.start = 1;
        t.bram_row_1 = 7'(2 * k); t.bram_row_2 = 7'(2 * k + 1); t.bram_col = 2'(p % 4);
        t.input_1 = 8'(x_vec[2 * k]); t.input_2 = 8'(x_vec[2 * k + 1]);
        cycle(1, t, 1);
        for (int c = 1; c < T; c++) cycle(0, nop_i, 1);
        if ((k + 1) % readout_every == 0) begin
          for (int c = 0; c < 3; c++) cycle(0, nop_i, 1);     // let ACCUM land
          read_acc(acc);
          for (int e = 0; e < L; e++) begin
            logic [ROW_BITS-1:0] cur, prv;
            logic [31:0] d;
            cur = acc >> (lw * e);
            prv = acc_prev >> (lw * e);
            d = cur[31:0] - prv[31:0];
            if (p * L + e < ROWS)
              y_hw[p * L + e] += (lw == 8) ? longint'($signed(d[7:0])) :
                                 (lw == 16) ? longint'($signed(d[15:0])) : longint'($signed(d));
          end
          acc_prev = acc;
          if (k + 1 < COLS / 2) n_partial_readouts++;
        end
      end
      checks++;
      if (busy_half - b0 != (COLS / 2) * (n + 3)) begin
        failures++;
        $display("%0d-bit pass %0d: %0d busy half cycles, expected %0d", n, p, busy_half - b0, (COLS / 2) * (n + 3));
      end
      // the next tile must already be in place
      if (q_addr.size() > 0) begin
        n_stall++;
        while (q_addr.size() > 0) cycle(0, nop_i, 1);
      end
      clear_acc();
    end
    $display("%0d-bit GEMV %0dx%0d: %0d passes, %0d main cycles in compute mode",
             n, ROWS, COLS, passes, cyc - t0);

    for (int r = 0; r < ROWS; r++) begin
      y_ref = 0;
      for (int j = 0; j < COLS; j++) y_ref += longint'(a_mat[r][j]) * longint'(x_vec[j]);
      checks++;
      if (y_hw[r] != y_ref) begin
        failures++;
        $display("%0d-bit y[%0d] = %0d, expected %0d", n, r, y_hw[r], y_ref);
      end
    end
  endtask

  initial begin
    rst_n = 0; mode = 0; we_a = 0; we_b = 0; addr_a = '0; addr_b = '0; din_a = '0; din_b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    run_gemv(PREC_2);
    run_gemv(PREC_4);
    run_gemv(PREC_8);

    checks += 3;
    if (n_overlap_writes == 0) begin
      failures++; $display("tile loading never overlapped the computation");
    end
    if (n_partial_readouts == 0) begin
      failures++; $display("no intermediate accumulator readout happened");
    end
    if (n_stall != 0) begin
      failures++; $display("tile loading stalled the computation %0d times", n_stall);
    end
    $display("words written while computing: %0d, intermediate readouts: %0d",
             n_overlap_writes, n_partial_readouts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
