// tb_qam_mapper: random bit words for every constellation and band count;
// the levels of each band are compared with a reference Gray mapping
// (level = 2*gray2bin(g) - (S-1), in-phase half of the bits first).
module tb_qam_mapper;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  logic [3:0] n_bands;
  qam_t qam;
  logic [BITS_MAX-1:0] bits;
  lvl_t lvl_i [M_MAX];
  lvl_t lvl_q [M_MAX];
  int checks = 0, failures = 0;

  qam_mapper dut (.n_bands, .qam, .bits, .lvl_i, .lvl_q);

  initial begin
    int bps, h, gi, gq, ei, eq;
    for (int it = 0; it < 300; it++) begin
      qam     = qam_t'($urandom_range(2));
      n_bands = 4'($urandom_range(M_MAX, 1));
      bits    = {$urandom, $urandom};
      #1;
      bps = bits_per_sym(qam);
      h   = bps / 2;
      for (int b = 0; b < int'(M_MAX); b++) begin
        gi = int'((bits >> (b*bps)) & ((1 << h) - 1));
        gq = int'((bits >> (b*bps + h)) & ((1 << h) - 1));
        ei = (b < int'(n_bands)) ? ref_level(gi, h) : 0;
        eq = (b < int'(n_bands)) ? ref_level(gq, h) : 0;
        checks++;
        if (int'(lvl_i[b]) != ei || int'(lvl_q[b]) != eq) begin
          failures++;
          if (failures < 5) $display("FAIL %s band %0d got %0d,%0d exp %0d,%0d", qam.name(), b, lvl_i[b], lvl_q[b], ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
