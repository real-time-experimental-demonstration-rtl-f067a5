// tb_downsampler: after frame_start, checks that the sample is passed on one
// clock later, the phase counts 0..N-1, sym_end at phase N-1, slot_new comes at
// phase 0 of the first NS symbol periods, sym_out at phase N-1 from period
// SPAN-1 on with sym_k = q-SPAN+1, and done (and the end of activity) after
// NS+SPAN-1 periods. Also checks that a second frame_start while active is
// ignored.
module tb_downsampler;
  import mcap_pkg::*;

  localparam int NS = 20;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, frame_start, active, slot_new, sym_end, sym_out, done;
  logic [3:0] n_bands;
  logic [4:0] phase;
  logic [11:0] sym_k;
  smp_t x_in, x;
  int checks = 0, failures = 0;

  downsampler #(.NS(NS)) dut (.clk, .rst, .n_bands, .frame_start, .x_in, .x, .active, .phase,
                              .slot_new, .sym_end, .sym_out, .sym_k, .done);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", s); end
  endtask

  initial begin
    int n, q, ph, cyc, nout;
    smp_t prev;
    rst = 1; frame_start = 0; n_bands = 1; x_in = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int m = 1; m <= int'(M_MAX); m += 4) begin
      n_bands = 4'(m);
      n = m * SPS1;
      repeat (3) @(negedge clk);
      frame_start = 1;
      x_in = smp_t'($urandom);
      prev = x_in;
      @(negedge clk);
      frame_start = 0;
      cyc = 0; nout = 0;
      while (active) begin
        q = cyc / n; ph = cyc % n;
        chk(x == prev, "sample delay");
        chk(int'(phase) == ph, "phase");
        chk(sym_end == (ph == n - 1), "sym_end");
        chk(slot_new == (ph == 0 && q < NS), "slot_new");
        chk(sym_out == (ph == n - 1 && q >= SPAN - 1), "sym_out");
        if (sym_out) begin
          chk(int'(sym_k) == q - SPAN + 1, "sym_k");
          nout++;
        end
        chk(done == (ph == n - 1 && q == NS + SPAN - 2), "done");
        if (cyc == 7) frame_start = 1;
        x_in = smp_t'($urandom);
        prev = x_in;
        @(negedge clk);
        frame_start = 0;
        cyc++;
      end
      chk(cyc == (NS + SPAN - 1) * n, $sformatf("m=%0d active %0d clocks", m, cyc));
      chk(nout == NS, "symbols out");
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
