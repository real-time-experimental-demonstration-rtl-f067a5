// tb_mcap_sweep: runs every configuration of the demonstrator's BER
// measurement through the complete link: m = 1 .. 10 sub-bands with 4-, 16-
// and 64-QAM, two frames each, over the same channel model as the end-to-end
// test (two-tap low-pass and +/-4 LSB noise). For each it checks that both
// frames are detected, that exactly frames*256*m*bps - 15 bits are compared,
// and that the BER is below the 7% FEC limit of 3.8e-3 for 4- and 16-QAM
// and below the 20% FEC limit of 2e-2 for 64-QAM when m >= 3. With one or
// two bands the per-band symbol rate is high and the low-pass channel causes
// inter-symbol interference that this receiver (like the demonstrator's) does
// not equalise, so there the test instead checks the trend: the BER with one
// band must not be lower than with ten. The compared-bit count is checked
// whenever the PRBS checker never had to relock.
module tb_mcap_sweep;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  localparam int NPILOT = 8, NDATA = 256, PRE_HALF = 64, FRAMES = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_tx, rst_rx;
  mcap_cfg_t cfg;
  coef_wr_t  cw;
  smp_t dac_out, adc_in;
  logic [15:0] tx_frames, rx_detections, rx_frames, rx_relocks;
  logic rx_locked;
  logic [47:0] rx_bits, rx_errors;
  logic signed [Y_W+7:0] est_i [M_MAX];
  logic signed [Y_W+7:0] est_q [M_MAX];

  mcap_vlc_top dut (
    .clk_tx(clk), .rst_tx, .cfg_tx(cfg), .coef_wr_tx(cw), .dac_out, .tx_frames,
    .clk_rx(clk), .rst_rx, .cfg_rx(cfg), .coef_wr_rx(cw), .adc_in,
    .rx_locked, .rx_bits, .rx_errors, .rx_detections, .rx_frames, .rx_relocks,
    .rx_est_i(est_i), .rx_est_q(est_q)
  );

  // channel model
  smp_t d1, d2, d3;
  int   noise_amp = 4;
  always_ff @(posedge clk) begin
    int v;
    d1 <= dac_out;
    d2 <= d1;
    d3 <= d2;
    v = (179 * int'(d2) + 64 * int'(d3)) / 256;
    if (noise_amp > 0) v += int'($urandom_range(2 * noise_amp)) - noise_amp;
    adc_in <= smp_t'(v);
  end

  int checks = 0, failures = 0;
  real ber_tab [11][3];
  int n_detect = 0, n_switch = 0, n_rotated = 0, n_ber = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic configure(int m, qam_t q);
    rst_tx = 1;
    rst_rx = 1;
    cfg = make_cfg(m, q, 0.8);
    for (int qd = 0; qd < 2; qd++)
      for (int b = 0; b < m; b++)
        for (int n = 0; n < SPAN * m * SPS1; n++) begin
          @(posedge clk);
          cw.we    <= 1'b1;
          cw.quad  <= qd[0];
          cw.band  <= 4'(b);
          cw.tap   <= 4'(n / (m * SPS1));
          cw.phase <= 5'(n % (m * SPS1));
          cw.data  <= coef_t'(coef_value(m, b, qd, n));
        end
    @(posedge clk);
    cw.we <= 1'b0;
    repeat (4) @(posedge clk);
    rst_tx = 0;
    rst_rx = 0;
  endtask

  task automatic run_format(int m, qam_t q, real max_ber);
    longint t_prev, t_now, expect_bits, period;
    int bps, rot;
    real ber;
    configure(m, q);
    n_switch++;
    bps = bits_per_sym(q);
    period = 2 * PRE_HALF + longint'((NPILOT + NDATA + SPAN - 1) * m * SPS1);
    t_prev = 0;
    for (int f = 0; f < FRAMES; f++) begin
      fork
        begin : wait_frame
          @(rx_frames);
        end
        begin : limit
          repeat (3 * period) @(posedge clk);
        end
      join_any
      disable fork;
      t_now = cycle;
      if (f > 0) check(t_now - t_prev == period,
                       $sformatf("m=%0d %s frame period %0d, expected %0d", m, q.name(), t_now - t_prev, period));
      t_prev = t_now;
    end
    // let the last symbol of the frame drain through filter, CPE and demapper
    repeat (8) @(posedge clk);
    check(rx_frames == 16'(FRAMES), $sformatf("m=%0d %s frames %0d", m, q.name(), rx_frames));
    check(rx_detections == 16'(FRAMES), $sformatf("m=%0d %s detections %0d", m, q.name(), rx_detections));
    check(rx_locked, "PRBS checker locked");
    expect_bits = longint'(FRAMES) * NDATA * m * bps - 15;
    if (rx_relocks == 0) check(rx_bits == 48'(expect_bits), $sformatf("m=%0d %s compared bits %0d, expected %0d", m, q.name(), rx_bits, expect_bits));
    ber = (rx_bits == 0) ? 1.0 : real'(rx_errors) / real'(rx_bits);
    ber_tab[m][q] = ber;
    if (m >= 3) check(ber <= max_ber, $sformatf("m=%0d %s BER %e above %e", m, q.name(), ber, max_ber));
    n_detect += int'(rx_detections);
    if (rx_bits > 0) n_ber++;
    rot = 0;
    for (int b = 0; b < m; b++)
      if (est_q[b] > est_i[b] / 8 || est_q[b] < -est_i[b] / 8 || est_i[b] < 0) rot++;
    n_rotated += rot;
    $display("format m=%0d %s: frames=%0d bits=%0d errors=%0d BER=%e rotated bands=%0d relocks=%0d",
             m, q.name(), rx_frames, rx_bits, rx_errors, ber, rot, rx_relocks);
  endtask

  initial begin
    cw = '0;
    cfg = '0;
    rst_tx = 1;
    rst_rx = 1;
    for (int qi = 0; qi < 3; qi++)
      for (int m = 1; m <= int'(M_MAX); m++)
        run_format(m, qam_t'(qi), (qi == 2) ? 2e-2 : 3.8e-3);
    for (int qi = 0; qi < 3; qi++)
      check(ber_tab[1][qi] >= ber_tab[10][qi], $sformatf("BER trend for %s", qam_t'(qi)));
    $display("BER table (rows m = 1..10; columns 4-, 16-, 64-QAM)");
    for (int m = 1; m <= int'(M_MAX); m++)
      $display("  m=%2d  %e  %e  %e", m, ber_tab[m][0], ber_tab[m][1], ber_tab[m][2]);
    $display("mechanisms: detections=%0d format_changes=%0d rotated_bands=%0d ber_measurements=%0d",
             n_detect, n_switch, n_rotated, n_ber);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
