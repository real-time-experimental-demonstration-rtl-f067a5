// tb_sc_sync: sends random payload samples, then a preamble of two equal
// halves of 64 samples, then a numbered payload, several times with random
// gaps. frame_start must come exactly once per preamble, in the cycle the
// first payload sample leaves x_out, and x_out must be the input delayed by
// WIN = 64 clocks. With search_en low nothing may be detected.
module tb_sc_sync;
  import mcap_pkg::*;

  localparam int L = 64, WIN = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, search_en, frame_start;
  smp_t x_in, x_out;
  logic [15:0] detections;
  int checks = 0, failures = 0;

  sc_sync dut (.clk, .rst, .search_en, .x_in, .x_out, .frame_start, .detections);

  smp_t hist [$];
  int   marks [$];  // sample index of each first payload sample
  int   t = 0, n_fs = 0;

  // delay and frame_start alignment check
  always @(negedge clk) if (!rst) begin
    if (t >= WIN) begin
      checks++;
      if (x_out != hist[t - WIN]) failures++;
    end
    if (frame_start) begin
      n_fs++;
      checks++;
      if (!(marks.size() > 0 && t - WIN == marks[0])) begin
        failures++;
        $display("FAIL frame_start for sample %0d, expected %0d", t - WIN, marks.size() ? marks[0] : -1);
      end
      if (marks.size() > 0) void'(marks.pop_front());
    end
  end

  task automatic put(smp_t v);
    x_in = v;
    hist.push_back(v);
    @(posedge clk);
    #1 t++;
  endtask

  initial begin
    smp_t pre [L];
    rst = 1; search_en = 1; x_in = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int f = 0; f < 4; f++) begin
      for (int i = 0; i < 200 + int'($urandom_range(100)); i++)
        put(smp_t'(int'($urandom_range(6000)) - 3000));
      for (int i = 0; i < L; i++) pre[i] = $urandom_range(1) ? 8192 : -8192;
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < L; i++) put(smp_t'(int'(pre[i]) + int'($urandom_range(64)) - 32));
      marks.push_back(t);
      for (int i = 0; i < 300; i++) put(smp_t'(int'($urandom_range(6000)) - 3000));
    end
    // search disabled: no detection
    search_en = 0;
    for (int i = 0; i < L; i++) pre[i] = $urandom_range(1) ? 8192 : -8192;
    for (int h = 0; h < 2; h++) for (int i = 0; i < L; i++) put(pre[i]);
    for (int i = 0; i < 200; i++) put(smp_t'(int'($urandom_range(6000)) - 3000));
    checks++;
    if (n_fs != 4 || detections != 16'd4) begin
      failures++;
      $display("FAIL %0d frame starts, %0d detections, expected 4", n_fs, detections);
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
