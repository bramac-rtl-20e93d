// efsm_2sa: embedded finite-state machine of BRAMAC-2SA.
//
// The eFSM turns CIM instructions into the cycle-by-cycle row reads, writes
// and mux selects of the two dummy arrays, so that the main array's ports are
// needed only in the cycles that copy weights or read out the accumulator.
//
// Instruction timing. An instruction is presented on port A (address 0xfff)
// in one cycle and registered at the next clock edge, like any M20K input; it
// takes effect in the following cycle ("its cycle"). In that cycle:
//   copy  : the word the main array reads at {bramRow, bramCol} is written,
//           sign-extended, into row W1 (w1_w2 = 0) or W2 (w1_w2 = 1) of both
//           dummy arrays through write port B (mux M2 = ramB). Array 0 is fed
//           by main port A, array 1 by main port B, which read the same word.
//   input_1/input_2 : latched for array 0 when w1_w2 = 0 (I1, I2) and for
//           array 1 when w1_w2 = 1 (I3, I4), if copy or start is set.
//   start : starts a MAC2 in the next cycle, or right after the MAC2 in
//           progress; prec and inType of this instruction apply to it.
//   done  : acc_col/acc_arr select a 40-bit slice of the accumulator row of
//           array bramRow[0]; the top puts it on port B's data output.
//   reset : clears both accumulators and returns the eFSM to idle.
//
// MAC2 sequence for n-bit inputs (n = 2, 4, 8), one dummy-array cycle each,
// following the paper's worked 4-bit example and Algorithm 1:
//   INIT    read W1, W2; write W1+W2 (M1 = S); write P = 0 (M2 = 0)
//   INVERT  read row selected by the input MSBs; write its inverse (M2 = B-bar)
//           to the inverter row                       (signed inputs only)
//   ADDMSB  P = (Inverter + P + 1) << 1               (signed inputs only)
//   ADD i   P = (selected row + P) << 1, no shift for i = 0
//   ACCUM   Accumulator = Accumulator + P
// With the two weight copies this is n + 5 cycles for signed inputs. A copy
// for the next MAC2 may be issued so that it falls in the ADD 0 and ACCUM
// cycles, which do not use write port B; a start in the ACCUM cycle starts
// the next MAC2 immediately, giving the paper's n + 3 cycles per MAC2
// (5 / 7 / 11 cycles for 2 / 4 / 8 bits). Unsigned inputs skip INVERT and
// treat the MSB like any other bit, one cycle less.
//
// Own choices where the paper is silent: the assignment of rows to read
// ports in each step, the routing of inputs by w1_w2, selecting the array by
// bramRow[0] on readout, the pending-start latch and a synchronous active-low
// reset of the controller state. The issuing logic must not copy into a
// weight row still being read, nor issue a copy in the INIT or INVERT cycle
// of a MAC2 (an assertion checks the latter).
module efsm_2sa
  import bramac_pkg::*;
#(
  parameter int unsigned N_ARRAYS = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  input  instr_2sa_t       instr,
  output dummy_ctrl_t      ctrl,
  output logic [1:0]       in_bits [N_ARRAYS],  // {I2[i], I1[i]} per array
  output prec_e            copy_prec,           // sign-extension precision
  output logic             rd_acc,              // accumulator readout this cycle
  output logic [COL_AW-1:0] acc_col,
  output logic             acc_arr,
  output logic             busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_INVERT, S_ADDMSB, S_ADD, S_ACCUM
  } state_e;

  state_e          state, state_n;
  logic [2:0]      bit_idx, bit_idx_n;
  instr_2sa_t      iq;
  logic            iq_valid;
  logic            pending, pending_n;
  prec_e           prec_w, st_prec, st_prec_n;
  logic            unsigned_w, st_unsigned, st_unsigned_n;
  logic [IN_W-1:0] in1_w [N_ARRAYS], in2_w [N_ARRAYS];
  logic [IN_W-1:0] st_in1 [N_ARRAYS], st_in2 [N_ARRAYS];
  logic [IN_W-1:0] st_in1_n [N_ARRAYS], st_in2_n [N_ARRAYS];
  logic            start_req, load_work;
  dummy_ctrl_t     seq;

  // instruction register
  always_ff @(posedge clk) begin
    if (!rst_n) iq_valid <= 1'b0;
    else        iq_valid <= instr_valid;
    iq <= instr;
  end

  // staged inputs and mode for the next MAC2
  always_comb begin
    st_in1_n      = st_in1;
    st_in2_n      = st_in2;
    st_prec_n     = st_prec;
    st_unsigned_n = st_unsigned;
    if (iq_valid && (iq.copy || iq.start)) begin
      st_in1_n[iq.w1_w2] = iq.input_1;
      st_in2_n[iq.w1_w2] = iq.input_2;
    end
    if (iq_valid && iq.start) begin
      st_prec_n     = iq.prec;
      st_unsigned_n = iq.in_type;
    end
  end

  assign start_req = (iq_valid && iq.start) || pending;

  // next state
  always_comb begin
    state_n   = state;
    bit_idx_n = bit_idx;
    pending_n = pending;
    load_work = 1'b0;
    case (state)
      S_IDLE, S_ACCUM: begin
        if (start_req) begin
          state_n   = S_INIT;
          load_work = 1'b1;
          pending_n = 1'b0;
        end else begin
          state_n = S_IDLE;
        end
      end
      S_INIT: begin
        bit_idx_n = 3'(prec_bits(prec_w) - 1);
        state_n   = unsigned_w ? S_ADD : S_INVERT;
      end
      S_INVERT: state_n = S_ADDMSB;
      S_ADDMSB: begin
        bit_idx_n = bit_idx - 3'd1;
        state_n   = S_ADD;
      end
      S_ADD: begin
        if (bit_idx == 3'd0) state_n = S_ACCUM;
        else                 bit_idx_n = bit_idx - 3'd1;
      end
      default: state_n = S_IDLE;
    endcase
    if (state != S_IDLE && state != S_ACCUM && iq_valid && iq.start)
      pending_n = 1'b1;
    if (iq_valid && iq.reset) begin
      state_n   = S_IDLE;
      pending_n = 1'b0;
      load_work = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      bit_idx <= '0;
      pending <= 1'b0;
    end else begin
      state   <= state_n;
      bit_idx <= bit_idx_n;
      pending <= pending_n;
    end
    st_in1      <= st_in1_n;
    st_in2      <= st_in2_n;
    st_prec     <= st_prec_n;
    st_unsigned <= st_unsigned_n;
    if (load_work) begin
      in1_w      <= st_in1_n;
      in2_w      <= st_in2_n;
      prec_w     <= st_prec_n;
      unsigned_w <= st_unsigned_n;
    end
  end

  // dummy-array control of the MAC2 sequence
  always_comb begin
    seq      = DUMMY_IDLE;
    seq.prec = prec_w;
    case (state)
      S_INIT: begin
        seq.ren_a = 1'b1;  seq.rd_a_row = ROW_W1;
        seq.ren_b = 1'b1;  seq.rd_b_row = ROW_W2;
        seq.wen_a = 1'b1;  seq.wr_a_row = ROW_W12; seq.sel_a = M1_SUM;
        seq.wen_b = 1'b1;  seq.wr_b_row = ROW_P;   seq.sel_b = M2_ZERO;
      end
      S_INVERT: begin
        seq.ren_b = 1'b1;  seq.rd_b_demux = 1'b1;
        seq.wen_b = 1'b1;  seq.wr_b_row = ROW_INV; seq.sel_b = M2_BBAR;
      end
      S_ADDMSB: begin
        seq.ren_a = 1'b1;  seq.rd_a_row = ROW_INV;
        seq.ren_b = 1'b1;  seq.rd_b_row = ROW_P;
        seq.cin   = 1'b1;
        seq.wen_a = 1'b1;  seq.wr_a_row = ROW_P;   seq.sel_a = M1_SRIGHT;
      end
      S_ADD: begin
        seq.ren_a = 1'b1;  seq.rd_a_demux = 1'b1;
        seq.ren_b = 1'b1;  seq.rd_b_row = ROW_P;
        seq.wen_a = 1'b1;  seq.wr_a_row = ROW_P;
        seq.sel_a = (bit_idx == 3'd0) ? M1_SUM : M1_SRIGHT;
      end
      S_ACCUM: begin
        seq.ren_a = 1'b1;  seq.rd_a_row = ROW_ACC;
        seq.ren_b = 1'b1;  seq.rd_b_row = ROW_P;
        seq.wen_a = 1'b1;  seq.wr_a_row = ROW_ACC; seq.sel_a = M1_SUM;
      end
      default: ;
    endcase
  end

  // instruction-driven actions merged into the sequence
  always_comb begin
    ctrl = seq;
    if (iq_valid && iq.copy) begin
      ctrl.wen_b    = 1'b1;
      ctrl.wr_b_row = iq.w1_w2 ? ROW_W2 : ROW_W1;
      ctrl.sel_b    = M2_RAMB;
    end
    if (iq_valid && iq.reset) begin
      ctrl          = DUMMY_IDLE;
      ctrl.wen_b    = 1'b1;
      ctrl.wr_b_row = ROW_ACC;
      ctrl.sel_b    = M2_ZERO;
    end
  end

  for (genvar k = 0; k < N_ARRAYS; k++) begin : g_bits
    assign in_bits[k] = {in2_w[k][bit_idx], in1_w[k][bit_idx]};
  end

  assign copy_prec = iq.prec;
  assign rd_acc    = iq_valid && iq.done;
  assign acc_col   = iq.bram_col;
  assign acc_arr   = iq.bram_row[0];
  assign busy      = (state != S_IDLE);

  // A weight copy must not collide with the write-port-B use of the sequence.
  always_ff @(posedge clk)
    if (rst_n && iq_valid && iq.copy && !iq.reset)
      assert (!seq.wen_b) else $error("efsm_2sa: weight copy issued in a cycle that writes port B");

endmodule
