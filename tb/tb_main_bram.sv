// tb_main_bram: self-checking test of the 512 x 40 main array.
//
// Random reads and writes on both ports against a reference memory: read data
// is expected one cycle after the address, a port writing a word returns the
// old word (read-first), the other port reading the word being written also
// sees the old word, and when both ports write one word port B's data is kept.
module tb_main_bram;
  import bramac_pkg::*;

  logic               clk = 0;
  logic [WORD_AW-1:0] addr_a, addr_b;
  logic               we_a, we_b;
  logic [WORD_W-1:0]  din_a, din_b, dout_a, dout_b;
  logic [WORD_W-1:0]  ref_mem [DEPTH];
  logic [WORD_W-1:0]  exp_a, exp_b;
  int checks = 0, failures = 0;

  main_bram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we_a = 0; we_b = 0;
    // initialise every word
    for (int w = 0; w < DEPTH; w += 2) begin
      @(negedge clk);
      addr_a = 9'(w); we_a = 1; din_a = 40'({$urandom, $urandom}); ref_mem[w] = din_a;
      addr_b = 9'(w + 1); we_b = 1; din_b = 40'({$urandom, $urandom}); ref_mem[w + 1] = din_b;
    end
    @(negedge clk);
    we_a = 0; we_b = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t > 0) begin
        checks += 2;
        if (dout_a !== exp_a) begin
          failures++; if (failures < 10) $display("t=%0d port A: got %h expected %h", t, dout_a, exp_a);
        end
        if (dout_b !== exp_b) begin
          failures++; if (failures < 10) $display("t=%0d port B: got %h expected %h", t, dout_b, exp_b);
        end
      end
      addr_a = 9'($urandom_range(0, 31)); addr_b = (t % 7 == 0) ? addr_a : 9'($urandom_range(0, 31));
      we_a = 1'($urandom); we_b = 1'($urandom);
      din_a = 40'({$urandom, $urandom}); din_b = 40'({$urandom, $urandom});
      exp_a = ref_mem[addr_a]; exp_b = ref_mem[addr_b];
      if (we_a) ref_mem[addr_a] = din_a;
      if (we_b) ref_mem[addr_b] = din_b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
