// tb_cap_rx_filter: random coefficients and a random sample stream; the
// symbol-timing inputs are driven as the downsampler would drive them
// (N = 6, NS = 20 symbols). Every emitted y_i / y_q of every band must equal
// the reference correlation sum_{n<L} x[kN+n] * p(n), rounded, shifted
// right by rx_shift and saturated to Y_W bits. A second pass with a small
// shift checks saturation.
module tb_cap_rx_filter;
  import mcap_pkg::*;

  localparam int N = 6, NS = 20, L = SPAN * N, T = (NS + SPAN - 1) * N;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, slot_new, sym_end, sym_out, y_valid;
  logic [5:0] rx_shift;
  smp_t x;
  logic [4:0] phase;
    logic [11:0] sym_k, y_k;
  coef_wr_t cw;
  logic signed [Y_W-1:0] y_i [M_MAX];
  logic signed [Y_W-1:0] y_q [M_MAX];
  int checks = 0, failures = 0, n_sat = 0;

  cap_rx_filter dut (.clk, .rst, .coef_wr(cw), .rx_shift, .x, .phase, .slot_new, .sym_end,
                     .sym_out, .sym_k, .y_i, .y_q, .y_valid, .y_k);

  int p [2][M_MAX][L];
  int xs [T];

  function automatic longint ref_y(int q, int b, int k, int sh);
    longint acc = 0;
    for (int n = 0; n < L; n++) acc += longint'(xs[k*N + n]) * p[q][b][n];
    if (sh > 0) acc = (acc + (longint'(1) << (sh - 1))) >>> sh;
    if (acc > (1 << (Y_W-1)) - 1) begin acc = (1 << (Y_W-1)) - 1; n_sat++; end
    if (acc < -(1 << (Y_W-1))) begin acc = -(1 << (Y_W-1)); n_sat++; end
    return acc;
  endfunction

  task automatic run_pass(int sh);
    int nout;
    rx_shift = 6'(sh);
    nout = 0;
    for (int t = 0; t < T; t++) begin
      x        = smp_t'(xs[t]);
      phase    = 5'(t % N);
      sym_end  = (t % N == N - 1);
      slot_new = (t % N == 0) && (t / N < NS);
      sym_out  = (t % N == N - 1) && (t / N >= SPAN - 1);
      sym_k    = 12'(t / N - (SPAN - 1));
      @(negedge clk);
      if (sym_out) begin
        nout++;
        checks++;
        if (!y_valid || y_k != sym_k) failures++;
        for (int b = 0; b < int'(M_MAX); b++) begin
          checks += 2;
          if (longint'(y_i[b]) != ref_y(0, b, int'(sym_k), sh) ||
              longint'(y_q[b]) != ref_y(1, b, int'(sym_k), sh)) begin
            failures++;
            if (failures < 6) $display("FAIL k=%0d band %0d got %0d,%0d exp %0d,%0d", sym_k, b,
                                       y_i[b], y_q[b], ref_y(0, b, int'(sym_k), sh), ref_y(1, b, int'(sym_k), sh));
          end
        end
      end
    end
    sym_out = 0;
    slot_new = 0;
    checks++;
    if (nout != NS) failures++;
  endtask

  initial begin
    rst = 1; cw = '0; x = 0; phase = 0; sym_end = 0; slot_new = 0; sym_out = 0; sym_k = 0; rx_shift = 0;
    for (int q = 0; q < 2; q++)
      for (int b = 0; b < int'(M_MAX); b++)
        for (int n = 0; n < L; n++) begin
          p[q][b][n] = int'($urandom_range(65535)) - 32768;
          @(negedge clk);
          cw = '{we: 1'b1, quad: q[0], band: 4'(b), tap: 4'(n / N), phase: 5'(n % N), data: coef_t'(p[q][b][n])};
        end
    @(negedge clk);
    cw.we = 0;
    rst = 0;
    for (int t = 0; t < T; t++) xs[t] = int'($urandom_range(65535)) - 32768;
    run_pass(24);
    run_pass(14);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation not exercised"); end
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
