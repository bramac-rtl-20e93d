// bramac_2sa: BRAMAC-2SA, a compute-in-BRAM block with two synchronous
// dummy arrays.
//
// Memory mode (mode = 0): an ordinary dual-port 512 x 40-bit block RAM.
// Compute mode (mode = 1): the same, except that a port-A access to address
// 0xfff is not a memory access but a CIM instruction carried on din_a
// (format: bramac_pkg::instr_2sa_t). The instruction takes over both ports'
// addresses for one cycle to read one weight word (both ports read
// {bramRow, bramCol}); the word is sign-extended and copied into dummy array 0
// (from port A) and dummy array 1 (from port B). Both arrays run the same
// MAC2 sequence on the same weights with different inputs:
//   array 0: P = W1*I1 + W2*I2       array 1: P = W1*I3 + W2*I4
// each in 20 / 10 / 5 SIMD lanes for 2 / 4 / 8-bit weights, and accumulate P
// into their accumulator rows. A done instruction returns one 40-bit slice
// of an accumulator on dout_b in the next cycle, in place of the main
// array's data. Between instructions both ports serve normal reads and
// writes, also while a MAC2 is running.
//
// Datapath, as drawn in the paper's top-level figure: address muxes selected
// by (mode AND port-A address == 0xfff), the main array, the configurable
// sign-extension muxes, the dummy arrays with their adders, the eFSM, and a
// 2:1 mux in front of the output. The input and output crossbars of the FPGA
// routing are outside this module.
//
// Own choices: the instruction also blocks the port-B write of that cycle
// (its address is taken over), the data written on port A with an instruction
// is not stored, addresses above 511 alias onto the 512 words, the readout
// appears on port B, and rst_n (synchronous, active low) resets only the
// controller; array contents are uninitialised, as in an SRAM.
module bramac_2sa
  import bramac_pkg::*;
(
  input  logic               clk,
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

  localparam int unsigned N_ARRAYS = 2;

  logic                is_instr;
  instr_2sa_t          instr;
  logic [WORD_AW-1:0]  op_addr, m_addr_a, m_addr_b;
  logic                m_we_a, m_we_b;
  logic [WORD_W-1:0]   main_dout_a, main_dout_b;
  logic [ROW_BITS-1:0] ext_a, ext_b;
  dummy_ctrl_t         ctrl;
  logic [1:0]          in_bits [N_ARRAYS];
  prec_e               copy_prec;
  logic                rd_acc, acc_arr;
  logic [COL_AW-1:0]   acc_col;
  logic [WORD_W-1:0]   acc_dout [N_ARRAYS];

  assign is_instr = mode && (addr_a == CIM_ADDR);
  assign instr    = instr_2sa_t'(din_a);
  assign op_addr  = {instr.bram_row, instr.bram_col};

  // address muxes in front of the row/column decoders
  assign m_addr_a = is_instr ? op_addr : addr_a[WORD_AW-1:0];
  assign m_addr_b = is_instr ? op_addr : addr_b[WORD_AW-1:0];
  assign m_we_a   = we_a && !is_instr;
  assign m_we_b   = we_b && !is_instr;

  main_bram u_main (
    .clk    (clk),
    .addr_a (m_addr_a), .we_a (m_we_a), .din_a (din_a), .dout_a (main_dout_a),
    .addr_b (m_addr_b), .we_b (m_we_b), .din_b (din_b), .dout_b (main_dout_b)
  );

  sign_ext_mux u_sext_a (.din(main_dout_a), .prec(copy_prec), .dout(ext_a));
  sign_ext_mux u_sext_b (.din(main_dout_b), .prec(copy_prec), .dout(ext_b));

  efsm_2sa #(.N_ARRAYS(N_ARRAYS)) u_efsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .instr_valid (is_instr),
    .instr       (instr),
    .ctrl        (ctrl),
    .in_bits     (in_bits),
    .copy_prec   (copy_prec),
    .rd_acc      (rd_acc),
    .acc_col     (acc_col),
    .acc_arr     (acc_arr),
    .busy        ()
  );

  dummy_array u_dummy0 (
    .clk (clk), .ctrl (ctrl), .in_bits (in_bits[0]),
    .ram_a (ext_a), .ram_b (ext_a),
    .acc_col (acc_col), .acc_dout (acc_dout[0])
  );

  dummy_array u_dummy1 (
    .clk (clk), .ctrl (ctrl), .in_bits (in_bits[1]),
    .ram_a (ext_b), .ram_b (ext_b),
    .acc_col (acc_col), .acc_dout (acc_dout[1])
  );

  // 2:1 output mux: main-array data or accumulator readout
  assign dout_a = main_dout_a;
  assign dout_b = rd_acc ? acc_dout[acc_arr] : main_dout_b;

endmodule
