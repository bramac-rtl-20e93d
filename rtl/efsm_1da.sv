// efsm_1da: embedded finite-state machine of BRAMAC-1DA, the variant with a
// single dummy array clocked at twice the main-array clock ("double-pumped").
//
// Clocks. clk drives the main array and the instruction registers; clk2x,
// phase-aligned with clk (every rising edge of clk is also a rising edge of
// clk2x), drives the dummy array and the MAC2 sequencer. A toggle flop in the
// clk domain, sampled in the clk2x domain, tells the sequencer whether it is
// in the first or the second half of a main-clock cycle.
//
// Instruction timing (main-clock cycles; the instruction is presented in
// cycle 0 on port A at address 0xfff):
//   cycle 1        the main array reads {bramRow_1, bramCol} on port A and
//                  {bramRow_2, bramCol} on port B; at the end of the cycle
//                  both words are captured (cap_en) for the copy;
//                  done: acc_col selects the accumulator slice, shown on
//                  port B's output in this cycle like read data;
//   cycle 2, 1st half  copy: W1 through write port A (M1 = ramA) and W2
//                  through write port B (M2 = ramB) in the same half cycle;
//                  start, reset and the inputs take effect here;
//   cycle 2, 2nd half  INIT of the started MAC2, then the same step list as
//                  BRAMAC-2SA (INVERT, ADDMSB, ADD i..., ACCUM), one step per
//                  half cycle.
// A done reads the accumulator in its cycle 1, before an instruction issued
// one cycle earlier has acted (cycle 2), so a done must not directly follow a
// reset; two cycles later is enough.
// A signed n-bit MAC2 therefore takes n + 4 half cycles including its copy:
// 3, 4 and 6 main cycles for 2, 4 and 8 bits when the next MAC2's read is
// issued in the cycle of the current ADD 0 / ACCUM, as in the paper's
// pipeline diagram. Unsigned inputs skip INVERT.
//
// Own choices where the paper is silent: the toggle-based phase detection,
// capturing the read words at the end of the read cycle, the pending-start
// latch (a start arriving while a MAC2 runs begins after its ACCUM), and a
// synchronous active-low reset applied in both clock domains. The issuing
// logic must not let a copy fall on a half cycle in which the sequence
// writes through port A or B (an assertion checks this).
module efsm_1da
  import bramac_pkg::*;
(
  input  logic             clk,
  input  logic             clk2x,
  input  logic             rst_n,
  input  logic             instr_valid,
  input  instr_1da_t       instr,
  output dummy_ctrl_t      ctrl,
  output logic [1:0]       in_bits,     // {I2[i], I1[i]}
  output logic             cap_en,      // capture the main-array words this cycle
  output prec_e            copy_prec,   // sign-extension precision of the copy
  output logic             rd_acc,      // accumulator readout this main cycle
  output logic [COL_AW-1:0] acc_col,
  output logic             busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_INVERT, S_ADDMSB, S_ADD, S_ACCUM
  } state_e;

  // ---------------------------------------------------------- clk domain
  instr_1da_t iq1, iq2;
  logic       iq1_v, iq2_v, tog;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      iq1_v <= 1'b0;
      iq2_v <= 1'b0;
      tog   <= 1'b0;
    end else begin
      iq1_v <= instr_valid;
      iq2_v <= iq1_v;
      tog   <= ~tog;
    end
    iq1 <= instr;
    iq2 <= iq1;
  end

  assign cap_en    = iq1_v && iq1.copy;
  assign rd_acc    = iq1_v && iq1.done;
  assign acc_col   = iq1.bram_col;
  assign copy_prec = iq2.prec;

  // -------------------------------------------------------- clk2x domain
  logic            tog_d, first_half, act;
  state_e          state, state_n;
  logic [2:0]      bit_idx, bit_idx_n;
  logic            pending, pending_n;
  prec_e           prec_w, st_prec, st_prec_n;
  logic            unsigned_w, st_unsigned, st_unsigned_n;
  logic [IN_W-1:0] in1_w, in2_w, st_in1, st_in2, st_in1_n, st_in2_n;
  logic            start_req, load_work;
  dummy_ctrl_t     seq;

  always_ff @(posedge clk2x) begin
    if (!rst_n) tog_d <= 1'b0;
    else        tog_d <= tog;
  end

  assign first_half = (tog != tog_d);
  assign act        = iq2_v && first_half;   // instruction acts in this half cycle

  always_comb begin
    st_in1_n      = st_in1;
    st_in2_n      = st_in2;
    st_prec_n     = st_prec;
    st_unsigned_n = st_unsigned;
    if (act && (iq2.copy || iq2.start)) begin
      st_in1_n = iq2.input_1;
      st_in2_n = iq2.input_2;
    end
    if (act && iq2.start) begin
      st_prec_n     = iq2.prec;
      st_unsigned_n = iq2.in_type;
    end
  end

  assign start_req = (act && iq2.start) || pending;

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
    if (state != S_IDLE && state != S_ACCUM && act && iq2.start)
      pending_n = 1'b1;
    if (act && iq2.reset) begin
      state_n   = S_IDLE;
      pending_n = 1'b0;
      load_work = 1'b0;
    end
  end

  always_ff @(posedge clk2x) begin
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

  // dummy-array control of the MAC2 sequence (same steps as BRAMAC-2SA)
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

  // copy (both write ports in one half cycle) and reset merged in
  always_comb begin
    ctrl = seq;
    if (act && iq2.copy) begin
      ctrl.wen_a    = 1'b1;
      ctrl.wr_a_row = ROW_W1;
      ctrl.sel_a    = M1_RAMA;
      ctrl.wen_b    = 1'b1;
      ctrl.wr_b_row = ROW_W2;
      ctrl.sel_b    = M2_RAMB;
    end
    if (act && iq2.reset) begin
      ctrl          = DUMMY_IDLE;
      ctrl.wen_b    = 1'b1;
      ctrl.wr_b_row = ROW_ACC;
      ctrl.sel_b    = M2_ZERO;
    end
  end

  assign in_bits = {in2_w[bit_idx], in1_w[bit_idx]};
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk2x)
    if (rst_n && act && iq2.copy && !iq2.reset)
      assert (!seq.wen_a && !seq.wen_b)
        else $error("efsm_1da: weight copy issued in a half cycle that writes the dummy array");

endmodule
