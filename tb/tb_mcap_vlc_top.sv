// tb_mcap_vlc_top: end-to-end test of the two FPGA designs at their default
// sizes (10 sub-bands maximum, 256 data symbols per frame). The DAC output is
// carried to the ADC input by a channel model: a two-tap low-pass
// (0.7 x[t-2] + 0.25 x[t-3], which rotates and attenuates every sub-band
// differently, like an LED) plus uniform noise of +/-4 LSB.
//
// The test steps through several modulation formats. Each change is made as
// in the demonstrator: both boards are reset (service is interrupted), the
// filter coefficients for the new band count are written, and the link must
// then resynchronise on its own. For each format it checks frame detection,
// PRBS lock, the exact number of compared bits, the frame period in clocks
// (the rate) and the bit errors. It also counts how often each mechanism
// occurred: preamble detection, format change, phase correction of a rotated
// band, and BER measurement; a mechanism that never occurred is a failure.
module tb_mcap_vlc_top;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  localparam int NPILOT = 8, NDATA = 256, PRE_HALF = 64, FRAMES = 3;

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
    check(rx_bits == 48'(expect_bits), $sformatf("m=%0d %s compared bits %0d, expected %0d", m, q.name(), rx_bits, expect_bits));
    ber = (rx_bits == 0) ? 1.0 : real'(rx_errors) / real'(rx_bits);
    check(ber <= max_ber, $sformatf("m=%0d %s BER %e above %e", m, q.name(), ber, max_ber));
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
    run_format(5, QAM16, 0.0);
    run_format(2, QAM4, 0.0);
    run_format(10, QAM64, 1e-3);
    run_format(1, QAM4, 0.0);
    check(n_detect > 0, "preamble detection occurred");
    check(n_switch > 1, "format change occurred");
    check(n_rotated > 0, "phase correction of a rotated band occurred");
    check(n_ber > 0, "BER measurement occurred");
    $display("mechanisms: detections=%0d format_changes=%0d rotated_bands=%0d ber_measurements=%0d",
             n_detect, n_switch, n_rotated, n_ber);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
