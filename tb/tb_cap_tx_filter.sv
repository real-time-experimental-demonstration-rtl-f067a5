// tb_cap_tx_filter: loads random coefficients into all bands, streams random
// symbols through an upsampled burst (N = 9 samples per symbol) and compares
// every band output with the direct convolution
//   s_b(t) = sum_k I_b[k] p_b(t - kN) + Q_b[k] p'_b(t - kN),
// two clocks after the phase is applied. Also checks the output is zero
// while inactive.
module tb_cap_tx_filter;
  import mcap_pkg::*;

  localparam int N = 9, NSYM = 40, L = SPAN * N, BO_W = 26;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, active, sym_stb;
  logic [4:0] phase;
  coef_wr_t cw;
  lvl_t lvl_i [M_MAX];
  lvl_t lvl_q [M_MAX];
  logic signed [BO_W-1:0] band_out [M_MAX];
  int checks = 0, failures = 0;

  cap_tx_filter dut (.clk, .rst, .coef_wr(cw), .active, .phase, .sym_stb, .lvl_i, .lvl_q, .band_out);

  int p  [2][M_MAX][L];
  int si [M_MAX][NSYM];
  int sq [M_MAX][NSYM];

  function automatic longint expect_out(int b, int t);
    longint acc = 0;
    for (int k = 0; k < NSYM; k++)
      if (t - k*N >= 0 && t - k*N < L)
        acc += longint'(si[b][k]) * p[0][b][t - k*N] + longint'(sq[b][k]) * p[1][b][t - k*N];
    return acc;
  endfunction

  initial begin
    rst = 1; active = 0; sym_stb = 0; phase = 0; cw = '0;
    for (int b = 0; b < int'(M_MAX); b++) begin lvl_i[b] = 0; lvl_q[b] = 0; end
    for (int q = 0; q < 2; q++)
      for (int b = 0; b < int'(M_MAX); b++)
        for (int n = 0; n < L; n++) begin
          p[q][b][n] = int'($urandom_range(65535)) - 32768;
          @(negedge clk);
          cw = '{we: 1'b1, quad: q[0], band: 4'(b), tap: 4'(n / N), phase: 5'(n % N), data: coef_t'(p[q][b][n])};
        end
    @(negedge clk);
    cw.we = 0;
    for (int b = 0; b < int'(M_MAX); b++)
      for (int k = 0; k < NSYM; k++) begin
        si[b][k] = 2 * int'($urandom_range(7)) - 7;
        sq[b][k] = 2 * int'($urandom_range(7)) - 7;
      end
    rst = 0;
    @(negedge clk);
    // check idle output
    checks++;
    if (band_out[3] != 0) failures++;
    for (int t = 0; t < NSYM * N + 2; t++) begin
      active  = t < NSYM * N;
      phase   = 5'(t % N);
      sym_stb = active && (t % N == 0);
      for (int b = 0; b < int'(M_MAX); b++) begin
        lvl_i[b] = (t < NSYM * N) ? lvl_t'(si[b][t / N]) : '0;
        lvl_q[b] = (t < NSYM * N) ? lvl_t'(sq[b][t / N]) : '0;
      end
      @(negedge clk);
      if (t >= 1 && t - 1 < NSYM * N)
        for (int b = 0; b < int'(M_MAX); b++) begin
          checks++;
          if (longint'(band_out[b]) != expect_out(b, t - 1)) begin
            failures++;
            if (failures < 6) $display("FAIL t=%0d band %0d got %0d exp %0d", t - 1, b, band_out[b], expect_out(b, t - 1));
          end
        end
    end
    active = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (band_out[0] != 0) failures++;
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
