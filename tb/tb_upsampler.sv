// tb_upsampler: for several band counts, starts a burst and checks the phase
// sequence 0..N-1 (N = m*SPS1), one symbol strobe per N samples with the
// right symbol index, the done pulse on the last sample and the burst length
// in clocks.
module tb_upsampler;
  import mcap_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, start, active, sym_stb, done;
  logic [3:0] n_bands;
  logic [11:0] n_sym, sym_idx;
  logic [4:0] phase;
  int checks = 0, failures = 0;

  upsampler dut (.clk, .rst, .n_bands, .start, .n_sym, .active, .phase, .sym_stb, .sym_idx, .done);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", s); end
  endtask

  initial begin
    int n, cyc, stb;
    rst = 1; start = 0; n_bands = 1; n_sym = 5;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int m = 1; m <= int'(M_MAX); m += 3) begin
      n_bands = 4'(m);
      n_sym   = 12'(3 + m);
      n = m * SPS1;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0; stb = 0;
      while (active) begin
        chk(int'(phase) == cyc % n, $sformatf("m=%0d phase %0d at %0d", m, phase, cyc));
        chk(sym_stb == (cyc % n == 0), "sym_stb position");
        chk(int'(sym_idx) == cyc / n, "sym_idx");
        chk(done == (cyc == int'(n_sym) * n - 1), "done position");
        if (sym_stb) stb++;
        cyc++;
        @(negedge clk);
      end
      chk(cyc == int'(n_sym) * n, $sformatf("m=%0d burst %0d clocks, expected %0d", m, cyc, int'(n_sym) * n));
      chk(stb == int'(n_sym), "symbol count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
