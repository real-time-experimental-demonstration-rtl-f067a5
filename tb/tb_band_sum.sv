// tb_band_sum: random band signals and shifts; the DAC sample one clock
// later must equal the rounded, shifted and saturated sum, or the preamble
// sample while pre_sel is high. Large inputs exercise saturation.
module tb_band_sum;
  import mcap_pkg::*;

  localparam int BO_W = 26;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, pre_sel;
  logic [4:0] tx_shift;
  logic signed [BO_W-1:0] band_in [M_MAX];
  smp_t pre_smp, dac;
  int checks = 0, failures = 0, n_sat = 0;

  band_sum dut (.clk, .rst, .tx_shift, .band_in, .pre_sel, .pre_smp, .dac);

  initial begin
    longint s, e;
    rst = 1; pre_sel = 0; pre_smp = 0; tx_shift = 0;
    for (int b = 0; b < int'(M_MAX); b++) band_in[b] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 500; it++) begin
      tx_shift = 5'($urandom_range(12));
      pre_sel  = ($urandom_range(7) == 0);
      pre_smp  = smp_t'($urandom);
      s = 0;
      for (int b = 0; b < int'(M_MAX); b++) begin
        band_in[b] = BO_W'(int'($urandom_range(1 << 21)) - (1 << 20));
        s += longint'(band_in[b]);
      end
      if (tx_shift > 0) s = (s + (longint'(1) << (tx_shift - 1))) >>> tx_shift;
      if (s > 32767) begin s = 32767; n_sat++; end
      if (s < -32768) begin s = -32768; n_sat++; end
      e = pre_sel ? longint'(pre_smp) : s;
      @(negedge clk);
      checks++;
      if (longint'(dac) != e) begin
        failures++;
        if (failures < 6) $display("FAIL it=%0d got %0d exp %0d", it, dac, e);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
