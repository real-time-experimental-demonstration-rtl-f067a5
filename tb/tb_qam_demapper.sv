// tb_qam_demapper: builds corrected symbols z = a*e + d with random levels a,
// random scale e and a perturbation |d| < 0.8*e for every constellation and
// band count, and checks that the bits out are the Gray labels of a placed
// as the mapper places them, that bands above n_bands are zero and that
// nbits = n_bands * bits per symbol.
module tb_qam_demapper;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, z_valid, bits_valid;
  logic [3:0] n_bands;
  qam_t qam;
  logic signed [63:0] z_i [M_MAX];
  logic signed [63:0] z_q [M_MAX];
  logic signed [63:0] e [M_MAX];
  logic [BITS_MAX-1:0] bits;
  logic [$clog2(BITS_MAX+1)-1:0] nbits;
  int checks = 0, failures = 0;

  qam_demapper dut (.clk, .rst, .n_bands, .qam, .z_i, .z_q, .e, .z_valid, .bits, .nbits, .bits_valid);

  function automatic int gray_of_level(int a, int h);
    int b;
    b = (a + (1 << h) - 1) / 2;
    return b ^ (b >> 1);
  endfunction

  initial begin
    int bps, h, s, ai, aq;
    logic [BITS_MAX-1:0] exp_bits;
    longint ev;
    rst = 1; z_valid = 0; n_bands = 1; qam = QAM4;
    for (int b = 0; b < int'(M_MAX); b++) begin z_i[b] = 0; z_q[b] = 0; e[b] = 1; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 400; it++) begin
      qam = qam_t'($urandom_range(2));
      n_bands = 4'($urandom_range(M_MAX, 1));
      bps = bits_per_sym(qam);
      h = bps / 2;
      s = 1 << h;
      exp_bits = '0;
      for (int b = 0; b < int'(M_MAX); b++) begin
        ev = longint'($urandom_range(1 << 30, 1 << 20));
        ai = 2 * int'($urandom_range(s - 1)) - (s - 1);
        aq = 2 * int'($urandom_range(s - 1)) - (s - 1);
        e[b]   = ev;
        z_i[b] = longint'(ai) * ev + (ev * (longint'($urandom_range(1600)) - 800)) / 1000;
        z_q[b] = longint'(aq) * ev + (ev * (longint'($urandom_range(1600)) - 800)) / 1000;
        if (b < int'(n_bands))
          for (int k = 0; k < h; k++) begin
            exp_bits[b*bps + k]     = 1'((gray_of_level(ai, h) >> k) & 1);
            exp_bits[b*bps + h + k] = 1'((gray_of_level(aq, h) >> k) & 1);
          end
      end
      z_valid = 1;
      @(negedge clk);
      z_valid = 0;
      checks++;
      if (!bits_valid || bits != exp_bits || int'(nbits) != int'(n_bands) * bps) begin
        failures++;
        if (failures < 6) $display("FAIL %s m=%0d got %h exp %h nbits %0d", qam.name(), n_bands, bits, exp_bits, nbits);
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
