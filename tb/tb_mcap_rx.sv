// tb_mcap_rx: the receiver is fed by a transmitter instance through a channel
// that inverts and filters the signal (-0.6 x[t-5] - 0.3 x[t-6] + 0.1 x[t-7])
// and adds +/-6 LSB of noise, so every band arrives rotated. First the
// transmitter is held in reset and only noise arrives: nothing may be
// detected. Then, for 4 bands / 16-QAM and 7 bands / 4-QAM, the receiver
// must detect each frame once, lock its PRBS checker, compare exactly
// frames*NDATA*m*bps - 15 bits without error, finish frames at the frame
// period, and report a rotated pilot estimate.
module tb_mcap_rx;
  import mcap_pkg::*;
  import mcap_tb_pkg::*;

  localparam int NPILOT = 8, NDATA = 256, PRE = 64, FRAMES = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_tx, rst_rx, locked;
  mcap_cfg_t cfg;
  coef_wr_t cw;
  smp_t dac, adc;
  logic [15:0] tx_frames, detections, frames_done, relocks;
  logic [47:0] bit_count, err_count;
  logic signed [Y_W+7:0] est_i [M_MAX];
  logic signed [Y_W+7:0] est_q [M_MAX];
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  mcap_tx u_src (.clk, .rst(rst_tx), .cfg, .coef_wr(cw), .dac, .frames(tx_frames));
  mcap_rx dut (.clk, .rst(rst_rx), .cfg, .coef_wr(cw), .adc, .locked, .bit_count, .err_count,
               .detections, .frames_done, .relocks, .est_i, .est_q);

  smp_t dl [8];
  always_ff @(posedge clk) begin
    int v;
    dl[0] <= dac;
    for (int i = 1; i < 8; i++) dl[i] <= dl[i-1];
    v = (-154 * int'(dl[4]) - 77 * int'(dl[5]) + 26 * int'(dl[6])) / 256;
    adc <= smp_t'(v + int'($urandom_range(12)) - 6);
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic run(int m, qam_t q);
    longint period, t0, t1;
    int rot;
    rst_tx = 1; rst_rx = 1;
    cfg = make_cfg(m, q, 0.6);
    for (int qd = 0; qd < 2; qd++)
      for (int b = 0; b < m; b++)
        for (int n = 0; n < SPAN * m * SPS1; n++) begin
          @(negedge clk);
          cw = '{we: 1'b1, quad: qd[0], band: 4'(b), tap: 4'(n / (m * SPS1)),
                 phase: 5'(n % (m * SPS1)), data: coef_t'(coef_value(m, b, qd, n))};
        end
    @(negedge clk);
    cw.we = 0;
    // receiver first, transmitter silent: noise only
    rst_rx = 0;
    repeat (2000) @(negedge clk);
    chk(detections == 0, "no detection on noise");
    rst_tx = 0;
    period = 2 * PRE + longint'((NPILOT + NDATA + SPAN - 1) * m * SPS1);
    @(frames_done);
    t0 = cycle;
    repeat (FRAMES - 1) @(frames_done);
    t1 = cycle;
    repeat (8) @(negedge clk);
    chk(t1 - t0 == (FRAMES - 1) * period, $sformatf("frame period %0d exp %0d", (t1 - t0) / (FRAMES - 1), period));
    chk(detections == 16'(FRAMES), $sformatf("detections %0d", detections));
    chk(locked, "locked");
    chk(bit_count == 48'(longint'(FRAMES) * NDATA * m * bits_per_sym(q) - 15), $sformatf("bits %0d", bit_count));
    chk(err_count == 0, $sformatf("errors %0d", err_count));
    rot = 0;
    for (int b = 0; b < m; b++) if (est_i[b] < 0 || est_q[b] != 0) rot++;
    chk(rot > 0, "rotated bands seen");
    $display("m=%0d %s bits=%0d errors=%0d", m, q.name(), bit_count, err_count);
  endtask

  initial begin
    cw = '0;
    run(4, QAM16);
    run(7, QAM4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
