// tb_ber_counter: feeds the PRBS-15 sequence in words of random width.
// Phase 1, error free: the checker must lock after 15 bits and then compare
// every bit without an error. Phase 2: single bit errors are injected at
// random and must be counted exactly. Phase 3: random data must make the
// checker lose lock (a relock); phase 4: the true sequence again must be
// re-acquired with no further errors.
module tb_ber_counter;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, bits_valid, locked;
  logic [BITS_MAX-1:0] bits;
  logic [$clog2(BITS_MAX+1)-1:0] nbits;
  logic [47:0] bit_count, err_count;
  logic [15:0] relocks;
  int checks = 0, failures = 0;

  ber_counter dut (.clk, .rst, .bits, .nbits, .bits_valid, .locked, .bit_count, .err_count, .relocks);

  logic [14:0] ref_s = 15'h1234;
  longint sent = 0, injected = 0;

  task automatic send(int n, int mode);  // mode 0 clean, 1 with errors, 2 random
    bits = '0;
    nbits = $bits(nbits)'(n);
    for (int i = 0; i < n; i++) begin
      bits[i] = prbs_step(ref_s);
      if (mode == 1 && $urandom_range(99) == 0) begin bits[i] = ~bits[i]; injected++; end
      if (mode == 2) bits[i] = 1'($urandom);
    end
    sent += n;
    bits_valid = 1;
    @(negedge clk);
    bits_valid = 0;
  endtask

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    longint c0, e0;
    rst = 1; bits_valid = 0; bits = 0; nbits = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 50; i++) send($urandom_range(BITS_MAX, 2), 0);
    chk(locked, "locked");
    chk(bit_count == 48'(sent - 15), $sformatf("bit_count %0d exp %0d", bit_count, sent - 15));
    chk(err_count == 0, "no errors");
    c0 = longint'(bit_count);
    sent = 0;
    for (int i = 0; i < 200; i++) send($urandom_range(BITS_MAX, 2), 1);
    chk(err_count == 48'(injected), $sformatf("errors %0d exp %0d", err_count, injected));
    chk(bit_count == 48'(c0 + sent), "bits compared with errors");
    chk(relocks == 0, "no relock at 1% BER");
    for (int i = 0; i < 100; i++) send(BITS_MAX, 2);
    chk(relocks > 0, "relock on random data");
    e0 = longint'(err_count);
    for (int i = 0; i < 20; i++) send(BITS_MAX, 0);
    c0 = longint'(err_count);
    for (int i = 0; i < 100; i++) send(BITS_MAX, 0);
    chk(locked && err_count == 48'(c0), "re-acquired");
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
