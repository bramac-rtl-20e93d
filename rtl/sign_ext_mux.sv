// sign_ext_mux: configurable sign-extension mux between the main array and a
// dummy array.
//
// A 40-bit word read from the main array holds five 8-bit, ten 4-bit or twenty
// 2-bit two's-complement weights. Before it is written into a 160-bit dummy
// array row, every weight is sign-extended to the SIMD lane width of the adder
// (32, 16 or 8 bits) so that the MAC2 result and the accumulation that follows
// cannot overflow the lane.
//
// The mux is built from five identical blocks, as in the paper: block k maps
// input byte k (bits 8k+7..8k) to output bits 32k+31..32k.
//   8-bit mode: b7..b0   -> bits 7..0,               b7 fills bits 31..8
//   4-bit mode: b3..b0   -> bits 3..0,  b3 fills 15..4;  b7..b4 -> 19..16, b7 fills 31..20
//   2-bit mode: b1b0 -> 1..0, b3b2 -> 9..8, b5b4 -> 17..16, b7b6 -> 25..24,
//               each sign bit filling the rest of its 8-bit lane
// This is the crossing pattern printed in the paper's figure of the mux.
// Some output bits need no mux at all, because they carry the same input bit
// in every mode (for example bits 1..0 of each block, and its top bits, which
// always hold the sign bit b7); a synthesis tool sees them as plain wires.
//
// Interface: combinational, `din` and `prec` in, `dout` out.
module sign_ext_mux
  import bramac_pkg::*;
(
  input  logic [WORD_W-1:0]   din,
  input  prec_e               prec,
  output logic [ROW_BITS-1:0] dout
);

  localparam int unsigned BLOCKS = WORD_W / 8;   // 5

  always_comb begin
    dout = '0;
    for (int unsigned k = 0; k < BLOCKS; k++) begin
      logic [7:0]  byte_in;
      logic [31:0] ext;
      byte_in = din[8*k +: 8];
      case (prec)
        PREC_2: for (int unsigned e = 0; e < 4; e++)
                  ext[8*e +: 8] = {{6{byte_in[2*e+1]}}, byte_in[2*e +: 2]};
        PREC_4: for (int unsigned e = 0; e < 2; e++)
                  ext[16*e +: 16] = {{12{byte_in[4*e+3]}}, byte_in[4*e +: 4]};
        default: ext = {{24{byte_in[7]}}, byte_in};
      endcase
      dout[32*k +: 32] = ext;
    end
  end

endmodule
