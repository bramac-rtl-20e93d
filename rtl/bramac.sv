// bramac: top level of one BRAMAC block, built as either of the two variants.
//
// The block replaces an M20K-style block RAM. In memory mode it is a plain
// dual-port 512 x 40-bit RAM; in compute mode a port-A access to address
// 0xfff carries a CIM instruction that copies weights into the dummy
// array(s), streams in inputs and reads out the accumulators (see bramac_2sa
// and bramac_1da for the details of each variant).
//
// VARIANT selects the build:
//   VAR_2SA (default)  bramac_2sa, two dummy arrays on the main clock; clk2x
//                      is not used and may be tied off.
//   VAR_1DA            bramac_1da, one dummy array on clk2x, which must run at
//                      twice the frequency of clk with its rising edges
//                      aligned to those of clk.
// The CIM instruction layout on din_a follows the selected variant
// (bramac_pkg::instr_2sa_t or instr_1da_t).
//
// The paper proposes both variants and evaluates an FPGA in which every block
// RAM is replaced by one or the other; the parameter and the shared port list
// (plain address, data and control signals where the FPGA's routing crossbars
// would connect) are this design's own packaging.
module bramac
  import bramac_pkg::*;
#(
  parameter variant_e VARIANT = VAR_2SA
) (
  input  logic               clk,
  input  logic               clk2x,    // dummy-array clock, used by VAR_1DA only
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

  if (VARIANT == VAR_1DA) begin : g_1da
    bramac_1da u_core (
      .clk, .clk2x, .rst_n, .mode,
      .addr_a, .we_a, .din_a, .dout_a,
      .addr_b, .we_b, .din_b, .dout_b
    );
  end else begin : g_2sa
    bramac_2sa u_core (
      .clk, .rst_n, .mode,
      .addr_a, .we_a, .din_a, .dout_a,
      .addr_b, .we_b, .din_b, .dout_b
    );
  end

endmodule
