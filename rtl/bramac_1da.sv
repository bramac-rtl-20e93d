// bramac_1da: BRAMAC-1DA, a compute-in-BRAM block with one dummy array that
// runs at twice the main-array clock.
//
// Memory mode (mode = 0): an ordinary dual-port 512 x 40-bit block RAM.
// Compute mode (mode = 1): a port-A access to address 0xfff is a CIM
// instruction (format bramac_pkg::instr_1da_t). Its copy reads two weight
// words in one main-clock cycle, {bramRow_1, bramCol} on port A and
// {bramRow_2, bramCol} on port B; at the end of that cycle the two words are
// captured, and in the first half of the next cycle both are sign-extended
// and written into the W1 and W2 rows of the single dummy array through its
// two write ports. The dummy array then computes P = W1*I1 + W2*I2 in 20 / 10
// / 5 SIMD lanes (2 / 4 / 8-bit weights) with one step per half cycle and adds
// it to its accumulator. A done instruction returns one 40-bit slice of the
// accumulator on dout_b in the cycle after it is presented. The ports are free
// for normal accesses in every cycle that does not carry an instruction.
//
// Clocks: clk for the main array and instruction registers; clk2x, at twice
// the frequency and phase-aligned with clk, for the dummy array and its
// sequencer (efsm_1da). The word capture registers sit in the clk domain, so
// the dummy array reads stable data during the whole copy half cycle.
//
// This variant follows the paper's description of BRAMAC-1DA; the capture
// registers, the readout on port B, the suppressed port writes in an
// instruction cycle and the aliasing of addresses above 511 are this
// design's own choices, as in bramac_2sa.
module bramac_1da
  import bramac_pkg::*;
(
  input  logic               clk,
  input  logic               clk2x,
  input  logic               rst_n,
  input  logic               mode,     // configuration bit: 0 = MEM, 1 = CIM
  input  logic [PORT_AW-1:0] addr_a,
  input  logic               we_a,
  input  logic [WORD_W-1:0]  din_a,
  output logic [WORD_W-1:0]  dout_a,
  input  logic [PORT_AW-1:0] addr_b,
  input  logic               we_b,
  input  logic [WORD_W-1:0]  din_b,
  output logic [WORD_W-1:0]  dout_b
);

  logic                is_instr;
  instr_1da_t          instr;
  logic [WORD_AW-1:0]  m_addr_a, m_addr_b;
  logic                m_we_a, m_we_b;
  logic [WORD_W-1:0]   main_dout_a, main_dout_b, cap_a, cap_b;
  logic [ROW_BITS-1:0] ext_a, ext_b;
  dummy_ctrl_t         ctrl;
  logic [1:0]          in_bits;
  logic                cap_en, rd_acc;
  prec_e               copy_prec;
  logic [COL_AW-1:0]   acc_col;
  logic [WORD_W-1:0]   acc_dout;

  assign is_instr = mode && (addr_a == CIM_ADDR);
  assign instr    = instr_1da_t'(din_a);

  // address muxes: two weight rows with a shared column
  assign m_addr_a = is_instr ? {instr.bram_row_1, instr.bram_col} : addr_a[WORD_AW-1:0];
  assign m_addr_b = is_instr ? {instr.bram_row_2, instr.bram_col} : addr_b[WORD_AW-1:0];
  assign m_we_a   = we_a && !is_instr;
  assign m_we_b   = we_b && !is_instr;

  main_bram u_main (
    .clk    (clk),
    .addr_a (m_addr_a), .we_a (m_we_a), .din_a (din_a), .dout_a (main_dout_a),
    .addr_b (m_addr_b), .we_b (m_we_b), .din_b (din_b), .dout_b (main_dout_b)
  );

  // capture of the two weight words at the end of the read cycle
  always_ff @(posedge clk)
    if (cap_en) begin
      cap_a <= main_dout_a;
      cap_b <= main_dout_b;
    end

  sign_ext_mux u_sext_a (.din(cap_a), .prec(copy_prec), .dout(ext_a));
  sign_ext_mux u_sext_b (.din(cap_b), .prec(copy_prec), .dout(ext_b));

  efsm_1da u_efsm (
    .clk         (clk),
    .clk2x       (clk2x),
    .rst_n       (rst_n),
    .instr_valid (is_instr),
    .instr       (instr),
    .ctrl        (ctrl),
    .in_bits     (in_bits),
    .cap_en      (cap_en),
    .copy_prec   (copy_prec),
    .rd_acc      (rd_acc),
    .acc_col     (acc_col),
    .busy        ()
  );

  dummy_array u_dummy (
    .clk (clk2x), .ctrl (ctrl), .in_bits (in_bits),
    .ram_a (ext_a), .ram_b (ext_b),
    .acc_col (acc_col), .acc_dout (acc_dout)
  );

  // 2:1 output mux: main-array data or accumulator readout
  assign dout_a = main_dout_a;
  assign dout_b = rd_acc ? acc_dout : main_dout_b;

endmodule
