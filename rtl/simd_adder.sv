// simd_adder: the precision-configurable bit-parallel adder of a dummy array.
//
// Adds two 160-bit rows read from the dummy array as independent SIMD lanes:
// twenty 8-bit lanes for 2-bit MACs, ten 16-bit lanes for 4-bit MACs, or five
// 32-bit lanes for 8-bit MACs. Carries never cross a lane boundary, and every
// lane receives the same carry-in `cin` (used for the "+ inv(psum) + 1" step
// of the two's-complement subtraction).
//
// Structure: the paper draws the adder as 160 one-bit full adders and then
// chooses a carry-lookahead adder with 4-bit lookahead generators for its
// evaluation. This module follows that choice: each 4-bit group computes its
// internal carries from generate/propagate terms; the group carry then feeds
// the next group unless that group starts a new lane. Lane widths are
// multiples of 4, so lane boundaries always fall on group boundaries.
//
// Interface: purely combinational, a + b + cin per lane -> s.
module simd_adder
  import bramac_pkg::*;
#(
  parameter int unsigned WIDTH = ROW_BITS   // 160 in the paper
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  input  prec_e            prec,
  output logic [WIDTH-1:0] s
);

  localparam int unsigned GROUPS = WIDTH / 4;

  logic [WIDTH-1:0] g, p;
  logic [WIDTH-1:0] c;          // c[i] = carry into bit i
  logic [GROUPS:0]  gc;         // gc[k] = carry out of group k-1
  logic [GROUPS-1:0] lane_start; // group k begins a SIMD lane

  always_comb begin
    for (int unsigned k = 0; k < GROUPS; k++) begin
      case (prec)
        PREC_2:  lane_start[k] = (k % 2 == 0);
        PREC_4:  lane_start[k] = (k % 4 == 0);
        default: lane_start[k] = (k % 8 == 0);
      endcase
    end
  end

  assign g = a & b;
  assign p = a ^ b;

  always_comb begin
    c  = '0;
    gc = '0;
    for (int unsigned k = 0; k < GROUPS; k++) begin
      logic ci;
      ci = lane_start[k] ? cin : gc[k];
      // 4-bit carry-lookahead generator
      c[4*k]     = ci;
      c[4*k + 1] = g[4*k] | (p[4*k] & ci);
      c[4*k + 2] = g[4*k+1] | (p[4*k+1] & g[4*k]) | (p[4*k+1] & p[4*k] & ci);
      c[4*k + 3] = g[4*k+2] | (p[4*k+2] & g[4*k+1]) | (p[4*k+2] & p[4*k+1] & g[4*k])
                 | (p[4*k+2] & p[4*k+1] & p[4*k] & ci);
      gc[k+1]    = g[4*k+3] | (p[4*k+3] & g[4*k+2]) | (p[4*k+3] & p[4*k+2] & g[4*k+1])
                 | (p[4*k+3] & p[4*k+2] & p[4*k+1] & g[4*k])
                 | (p[4*k+3] & p[4*k+2] & p[4*k+1] & p[4*k] & ci);
    end
  end

  assign s = p ^ c[WIDTH-1:0];

endmodule
