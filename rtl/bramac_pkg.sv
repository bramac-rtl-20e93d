// bramac_pkg: types and constants shared by the BRAMAC blocks.
//
// BRAMAC is a block RAM that can also compute two multiply-accumulates at once
// (a "MAC2", P = W1*I1 + W2*I2) on vectors of 2-, 4- or 8-bit weights. The
// weights are copied from the main 512x40 array into a small 7x160 "dummy"
// array and the inputs are streamed in bit by bit through a CIM instruction.
//
// This package holds:
//   * the precision code carried by the 2-bit prec field,
//   * the row map of the dummy array (row 0 is a hard-wired zero row),
//   * the selects of the two write-back muxes M1 and M2,
//   * the per-cycle control bundle the embedded FSM sends to a dummy array,
//   * the CIM instruction formats of the two variants, with the bit positions
//     printed in the paper's instruction-format figure,
//   * the variant selector of the top level (2SA or 1DA).
// The numeric encodings of prec and inType and the bit order inside a
// multi-bit instruction field (lowest printed bit = least significant bit)
// are this design's own choice; the paper prints only the field positions.
package bramac_pkg;

  // Geometry of the block (paper: 128x160 main array, 4:1 column mux,
  // 40-bit ports, 7x160 dummy array, reserved instruction address 0xfff).
  localparam int unsigned MAIN_ROWS   = 128;
  localparam int unsigned ROW_BITS    = 160;
  localparam int unsigned COL_MUX     = 4;
  localparam int unsigned WORD_W      = ROW_BITS / COL_MUX;     // 40
  localparam int unsigned DEPTH       = MAIN_ROWS * COL_MUX;    // 512
  localparam int unsigned ROW_AW      = $clog2(MAIN_ROWS);      // 7
  localparam int unsigned COL_AW      = $clog2(COL_MUX);        // 2
  localparam int unsigned WORD_AW     = ROW_AW + COL_AW;        // 9
  localparam int unsigned PORT_AW     = 12;                     // wide enough for 0xfff
  localparam logic [PORT_AW-1:0] CIM_ADDR = 12'hfff;
  localparam int unsigned DUMMY_ROWS  = 7;
  localparam int unsigned IN_W        = 8;                      // input_1 / input_2 width

  // MAC precision (prec field). 2'b11 is unused and treated as 8-bit.
  typedef enum logic [1:0] {
    PREC_2 = 2'd0,
    PREC_4 = 2'd1,
    PREC_8 = 2'd2
  } prec_e;

  // Number of input bits streamed for a precision.
  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC_2:  return 2;
      PREC_4:  return 4;
      default: return 8;
    endcase
  endfunction

  // Dummy-array rows, in the order the paper lists them.
  typedef enum logic [2:0] {
    ROW_ZERO = 3'd0,   // hard-coded zero
    ROW_W1   = 3'd1,
    ROW_W2   = 3'd2,
    ROW_W12  = 3'd3,   // W1 + W2
    ROW_INV  = 3'd4,   // inverted partial sum
    ROW_P    = 3'd5,   // MAC2 result P
    ROW_ACC  = 3'd6    // accumulator
  } row_e;

  // Write-back mux M1 (in front of write driver A).
  typedef enum logic [1:0] {
    M1_RAMA   = 2'd0,  // copy data coming from main-array port
    M1_SUM    = 2'd1,  // adder sum S
    M1_SRIGHT = 2'd2   // sum of the bit to the right: sum shifted left by one
  } m1_sel_e;

  // Write-back mux M2 (in front of write driver B).
  typedef enum logic [1:0] {
    M2_RAMB = 2'd0,    // copy data coming from main-array port
    M2_BBAR = 2'd1,    // inverted read data of port B
    M2_ZERO = 2'd2     // 1'b0, initialises P or the accumulator
  } m2_sel_e;

  // One cycle of dummy-array control. When rd*_demux is set the read row is
  // chosen by the 2:4 demux from the two current input bits {I2[i], I1[i]}.
  typedef struct packed {
    logic    ren_a;
    logic    rd_a_demux;
    row_e    rd_a_row;
    logic    ren_b;
    logic    rd_b_demux;
    row_e    rd_b_row;
    logic    wen_a;
    row_e    wr_a_row;
    m1_sel_e sel_a;
    logic    wen_b;
    row_e    wr_b_row;
    m2_sel_e sel_b;
    logic    cin;      // carry into every SIMD lane (1 for "+ inv(psum) + 1")
    prec_e   prec;     // SIMD lane width for the adder and the shift
  } dummy_ctrl_t;

  localparam dummy_ctrl_t DUMMY_IDLE = '{
    ren_a: 1'b0, rd_a_demux: 1'b0, rd_a_row: ROW_ZERO,
    ren_b: 1'b0, rd_b_demux: 1'b0, rd_b_row: ROW_ZERO,
    wen_a: 1'b0, wr_a_row: ROW_ZERO, sel_a: M1_SUM,
    wen_b: 1'b0, wr_b_row: ROW_ZERO, sel_b: M2_ZERO,
    cin: 1'b0, prec: PREC_8};

  // CIM instruction of BRAMAC-2SA (bits 0..32 of the 40-bit port-A data).
  typedef struct packed {
    logic [6:0]      unused;    // 39:33
    logic [IN_W-1:0] input_2;   // 32:25
    logic [IN_W-1:0] input_1;   // 24:17
    logic [1:0]      bram_col;  // 16:15
    logic [6:0]      bram_row;  // 14:8
    logic            done;      // 7
    logic            w1_w2;     // 6
    logic            copy;      // 5
    logic            start;     // 4
    logic            reset;     // 3
    logic            in_type;   // 2   0: signed inputs, 1: unsigned inputs
    prec_e           prec;      // 1:0
  } instr_2sa_t;

  // CIM instruction of BRAMAC-1DA (bits 0..38 of the 40-bit port-A data).
  typedef struct packed {
    logic            unused;    // 39
    logic [IN_W-1:0] input_2;   // 38:31
    logic [IN_W-1:0] input_1;   // 30:23
    logic [1:0]      bram_col;  // 22:21
    logic [6:0]      bram_row_2;// 20:14
    logic [6:0]      bram_row_1;// 13:7
    logic            done;      // 6
    logic            copy;      // 5
    logic            start;     // 4
    logic            reset;     // 3
    logic            in_type;   // 2
    prec_e           prec;      // 1:0
  } instr_1da_t;

  // Which of the two variants a bramac block is built as: two synchronous
  // dummy arrays (2SA) or one dummy array on a doubled clock (1DA).
  typedef enum logic {
    VAR_2SA = 1'b0,
    VAR_1DA = 1'b1
  } variant_e;

endpackage
