// dummy_array: the 7-row x 160-column dual-port compute array of BRAMAC,
// together with its 2:4 row demux, its SIMD adder and its write-back muxes.
//
// Rows (see bramac_pkg::row_e): 0 = constant zero, 1 = W1, 2 = W2,
// 3 = W1+W2, 4 = inverted partial sum, 5 = MAC2 result P, 6 = accumulator.
//
// Every cycle both ports may read one row and write one row. A cycle is a
// read-compute-write step: the two read rows (A and B) go to the SIMD adder,
// and at the clock edge write port A stores the output of mux M1 and write
// port B the output of mux M2:
//   M1: ramA (weight copy) | S (sum) | S_Right (sum shifted left one bit
//       inside each lane, lane LSB filled with 0)
//   M2: ramB (weight copy) | B-bar (inverted port-B read data) | zero
// Reading a row in the same cycle as it is written returns the old contents.
//
// The row read on a port whose rd_*_demux flag is set is chosen by the two
// current input bits {I2[i], I1[i]}: 00 -> zero row, 01 -> W1, 10 -> W2,
// 11 -> W1+W2. This is the table-lookup form of
// psum = W1*I1[i] + W2*I2[i] used by the paper.
//
// acc_col selects one of the four 40-bit slices (bits 40c+39..40c) of the
// accumulator row; acc_dout is combinational from the stored row.
//
// Follows the paper: row map, demux rule, M1/M2 inputs, SIMD lane widths.
// Own choices: the slice order of the accumulator readout, port B winning if
// both ports wrote the same row (the controller never does this, an
// assertion checks it), and no power-on clearing, as in an SRAM: the
// accumulator is cleared by the reset instruction and P at the start of
// every MAC2.
module dummy_array
  import bramac_pkg::*;
(
  input  logic                clk,
  input  dummy_ctrl_t         ctrl,
  input  logic [1:0]          in_bits,    // {I2[i], I1[i]}
  input  logic [ROW_BITS-1:0] ram_a,      // sign-extended copy data, write port A
  input  logic [ROW_BITS-1:0] ram_b,      // sign-extended copy data, write port B
  input  logic [COL_AW-1:0]   acc_col,
  output logic [WORD_W-1:0]   acc_dout
);

  logic [ROW_BITS-1:0] rows [1:DUMMY_ROWS-1];

  row_e                rd_a_row, rd_b_row;
  logic [ROW_BITS-1:0] rd_a, rd_b, sum, sum_shl, wr_a_data, wr_b_data;
  logic [ROW_BITS-1:0] lane_lsb;      // bit j is the LSB of a SIMD lane

  function automatic logic [ROW_BITS-1:0] read_row(row_e r, logic [ROW_BITS-1:0] r1,
      logic [ROW_BITS-1:0] r2, logic [ROW_BITS-1:0] r3, logic [ROW_BITS-1:0] r4,
      logic [ROW_BITS-1:0] r5, logic [ROW_BITS-1:0] r6);
    case (r)
      ROW_W1:  return r1;
      ROW_W2:  return r2;
      ROW_W12: return r3;
      ROW_INV: return r4;
      ROW_P:   return r5;
      ROW_ACC: return r6;
      default: return '0;     // row 0 is hard-wired to zero
    endcase
  endfunction

  // 2:4 demux in front of the row decoders
  assign rd_a_row = ctrl.rd_a_demux ? row_e'({1'b0, in_bits}) : ctrl.rd_a_row;
  assign rd_b_row = ctrl.rd_b_demux ? row_e'({1'b0, in_bits}) : ctrl.rd_b_row;

  assign rd_a = ctrl.ren_a ? read_row(rd_a_row, rows[1], rows[2], rows[3], rows[4], rows[5], rows[6]) : '0;
  assign rd_b = ctrl.ren_b ? read_row(rd_b_row, rows[1], rows[2], rows[3], rows[4], rows[5], rows[6]) : '0;

  simd_adder #(.WIDTH(ROW_BITS)) u_adder (
    .a    (rd_a),
    .b    (rd_b),
    .cin  (ctrl.cin),
    .prec (ctrl.prec),
    .s    (sum)
  );

  always_comb begin
    for (int unsigned j = 0; j < ROW_BITS; j++) begin
      case (ctrl.prec)
        PREC_2:  lane_lsb[j] = (j % 8 == 0);
        PREC_4:  lane_lsb[j] = (j % 16 == 0);
        default: lane_lsb[j] = (j % 32 == 0);
      endcase
    end
    sum_shl = {sum[ROW_BITS-2:0], 1'b0} & ~lane_lsb;
  end

  // write-back mux M1
  always_comb begin
    case (ctrl.sel_a)
      M1_RAMA:   wr_a_data = ram_a;
      M1_SRIGHT: wr_a_data = sum_shl;
      default:   wr_a_data = sum;
    endcase
  end

  // write-back mux M2
  always_comb begin
    case (ctrl.sel_b)
      M2_RAMB: wr_b_data = ram_b;
      M2_BBAR: wr_b_data = ~rd_b;
      default: wr_b_data = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (ctrl.wen_a && ctrl.wr_a_row != ROW_ZERO) rows[ctrl.wr_a_row] <= wr_a_data;
    if (ctrl.wen_b && ctrl.wr_b_row != ROW_ZERO) rows[ctrl.wr_b_row] <= wr_b_data;
  end

  assign acc_dout = rows[ROW_ACC][WORD_W*acc_col +: WORD_W];

  // The two write ports never target the same row in one cycle.
  always_ff @(posedge clk)
    assert (!(ctrl.wen_a && ctrl.wen_b && ctrl.wr_a_row == ctrl.wr_b_row))
      else $error("dummy_array: both write ports target row %0d", ctrl.wr_a_row);

endmodule
