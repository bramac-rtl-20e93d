// main_bram: the main storage array of BRAMAC, a 20-kbit M20K-style array.
//
// Physically 128 rows x 160 columns; a 4:1 column mux turns a 160-bit row
// into four 40-bit words, so the array is used as 512 words of 40 bits. A word
// address is {row[6:0], col[1:0]}: the row goes to the row decoder, the column
// to the column decoder that drives the 4:1 mux. It is stored here as 512
// 40-bit words, which is the same memory seen through that mux.
//
// Two ports, A and B, each with address, write enable and write data, and
// registered inputs as in an M20K: what is presented in one cycle is acted on
// at the next clock edge. A read returns the word in the following cycle; a
// write of a port returns the old word on that port's output (read-first).
// If both ports write the same word in one cycle, port B's data is kept.
//
// Follows the paper: 128x160 array, 4:1 column mux, 40-bit data width and
// depth 512. Own choices: only the 512x40 configuration is provided (the other
// M20K width/depth configurations of memory mode are not modelled), read-first
// behaviour and the port-B-wins rule for colliding writes.
module main_bram
  import bramac_pkg::*;
(
  input  logic               clk,
  input  logic [WORD_AW-1:0] addr_a,
  input  logic               we_a,
  input  logic [WORD_W-1:0]  din_a,
  output logic [WORD_W-1:0]  dout_a,
  input  logic [WORD_AW-1:0] addr_b,
  input  logic               we_b,
  input  logic [WORD_W-1:0]  din_b,
  output logic [WORD_W-1:0]  dout_b
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    dout_a <= mem[addr_a];
    dout_b <= mem[addr_b];
    if (we_a) mem[addr_a] <= din_a;
    if (we_b) mem[addr_b] <= din_b;
  end

endmodule
