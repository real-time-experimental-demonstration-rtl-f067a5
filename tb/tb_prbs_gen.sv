// tb_prbs_gen: checks the variable-width PRBS-15 source against a bit-serial
// reference for random request sizes, including idle cycles, and that bits
// above nbits are zero.
module tb_prbs_gen;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, req;
  logic [$clog2(BITS_MAX+1)-1:0] nbits;
  logic [BITS_MAX-1:0] bits;
  int checks = 0, failures = 0;

  prbs_gen dut (.clk, .rst, .req, .nbits, .bits);

  initial begin
    logic [14:0] ref_s;
    logic [BITS_MAX-1:0] exp_bits;
    rst = 1; req = 0; nbits = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    ref_s = 15'h7FFF;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      req   = ($urandom_range(3) != 0);
      nbits = $bits(nbits)'($urandom_range(BITS_MAX));
      #1;
      if (req) begin
        exp_bits = '0;
        for (int i = 0; i < int'(nbits); i++) exp_bits[i] = prbs_step(ref_s);
        checks++;
        if (bits !== exp_bits) begin
          failures++;
          if (failures < 5) $display("FAIL it=%0d nbits=%0d got %h exp %h", it, nbits, bits, exp_bits);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
