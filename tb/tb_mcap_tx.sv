// tb_mcap_tx: runs the transmitter with 3 sub-bands and 16-QAM and compares
// two complete frames on the DAC output, sample by sample, with a reference
// model written independently of the RTL: a preamble of two equal halves of
// +/-8192, then the direct-form CAP sum over all bands
//   s(t) = sum_b sum_k I_b[k] p_b(t-kN) + Q_b[k] p'_b(t-kN)
// for 8 pilot symbols (1+j), 256 PRBS-15 data symbols and SPAN-1 zero
// symbols, rounded, shifted and saturated. The frame period in clocks is
// checked against 2*64 + (8+256+SPAN-1)*N.
module tb_mcap_tx;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  localparam int M = 3, NPILOT = 8, NDATA = 256, PRE = 64;
  localparam int N = M * SPS1, L = SPAN * N, NSYM = NPILOT + NDATA + SPAN - 1;
  localparam int FLEN = 2 * PRE + NSYM * N;
  localparam qam_t Q = QAM16;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  mcap_cfg_t cfg;
  coef_wr_t cw;
  smp_t dac;
  logic [15:0] frames;
  int checks = 0, failures = 0;

  mcap_tx dut (.clk, .rst, .cfg, .coef_wr(cw), .dac, .frames);

  int p [2][M][L];
  int si [M][2*NSYM];
  int sq [M][2*NSYM];
  smp_t cap [2*FLEN + 4];

  initial begin
    logic [14:0] ref_s;
    int bps, h, g, tloc, sh, k0;
    longint acc;
    rst = 1;
    cw = '0;
    cfg = make_cfg(M, Q, 1.0);
    sh = int'(cfg.tx_shift);
    for (int q = 0; q < 2; q++)
      for (int b = 0; b < M; b++)
        for (int n = 0; n < L; n++) begin
          p[q][b][n] = coef_value(M, b, q, n);
          @(negedge clk);
          cw = '{we: 1'b1, quad: q[0], band: 4'(b), tap: 4'(n / N), phase: 5'(n % N), data: coef_t'(p[q][b][n])};
        end
    @(negedge clk);
    cw.we = 0;
    @(negedge clk);
    rst = 0;
    // reference symbols of two frames
    ref_s = 15'h7FFF;
    bps = bits_per_sym(Q);
    h = bps / 2;
    for (int f = 0; f < 2; f++)
      for (int k = 0; k < NSYM; k++)
        for (int b = 0; b < M; b++) begin
          if (k < NPILOT) begin si[b][f*NSYM+k] = 1; sq[b][f*NSYM+k] = 1; end
          else if (k < NPILOT + NDATA) begin
            g = 0;
            for (int i = 0; i < h; i++) g |= int'(prbs_step(ref_s)) << i;
            si[b][f*NSYM+k] = ref_level(g, h);
            g = 0;
            for (int i = 0; i < h; i++) g |= int'(prbs_step(ref_s)) << i;
            sq[b][f*NSYM+k] = ref_level(g, h);
          end else begin si[b][f*NSYM+k] = 0; sq[b][f*NSYM+k] = 0; end
        end
    // capture: the first preamble sample leaves the DAC port three clocks
    // after reset is released (framer, two-stage alignment, output register)
    repeat (3) @(posedge clk);
    for (int t = 0; t < 2 * FLEN + 4; t++) begin
      @(negedge clk);
      cap[t] = dac;
    end
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < PRE; i++) begin
        checks++;
        if (cap[f*FLEN + i] != cap[f*FLEN + PRE + i] || (cap[f*FLEN + i] != 8192 && cap[f*FLEN + i] != -8192)) failures++;
      end
      for (int t = 0; t < NSYM * N; t++) begin
        acc = 0;
        for (int b = 0; b < M; b++)
          for (int k = 0; k < NSYM; k++) begin
            tloc = t - k * N;
            if (tloc >= 0 && tloc < L)
              acc += longint'(si[b][f*NSYM+k]) * p[0][b][tloc] + longint'(sq[b][f*NSYM+k]) * p[1][b][tloc];
          end
        acc = (acc + (longint'(1) << (sh - 1))) >>> sh;
        if (acc > 32767) acc = 32767;
        if (acc < -32768) acc = -32768;
        checks++;
        if (longint'(cap[f*FLEN + 2*PRE + t]) != acc) begin
          failures++;
          if (failures < 6) $display("FAIL frame %0d sample %0d got %0d exp %0d", f, t, cap[f*FLEN + 2*PRE + t], acc);
        end
      end
    end
    // frame period: the second preamble repeats the first one exactly
    k0 = 0;
    for (int i = 0; i < 2 * PRE; i++) if (cap[i] != cap[FLEN + i]) k0++;
    checks++;
    if (k0 != 0) begin failures++; $display("FAIL frame period"); end
    checks++;
    if (frames != 16'd2) begin failures++; $display("FAIL frames %0d", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
