// tb_cpe: for random complex channel gains h (any phase), feeds NPILOT pilot
// observations y = h*(1+j) plus small noise, then data observations y = h*a
// for random 64-QAM levels a. The corrected output must satisfy
// z = 2*NPILOT * y * conj(c) with c the pilot correlation, e = |c|^2, and
// round(z/e) must recover a, i.e. the rotation is removed. Pilots must not
// produce an output.
module tb_cpe;
  import mcap_pkg::*;

  localparam int NPILOT = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, y_valid, z_valid;
  logic [11:0] y_k;
  logic signed [Y_W-1:0] y_i [M_MAX];
  logic signed [Y_W-1:0] y_q [M_MAX];
  logic signed [63:0] z_i [M_MAX];
  logic signed [63:0] z_q [M_MAX];
  logic signed [63:0] e [M_MAX];
  logic signed [Y_W+7:0] est_i [M_MAX];
  logic signed [Y_W+7:0] est_q [M_MAX];
  int checks = 0, failures = 0;

  cpe #(.NPILOT(NPILOT)) dut (.clk, .rst, .y_i, .y_q, .y_valid, .y_k, .z_i, .z_q, .e, .est_i, .est_q, .z_valid);

  initial begin
    real hr [M_MAX], hi [M_MAX], ph, mag;
    longint ci [M_MAX], cq [M_MAX];
    int ai [M_MAX], aq [M_MAX], yi, yq;
    longint ez_i, ez_q;
    rst = 1; y_valid = 0; y_k = 0;
    for (int b = 0; b < int'(M_MAX); b++) begin y_i[b] = 0; y_q[b] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int fr = 0; fr < 4; fr++) begin
      for (int b = 0; b < int'(M_MAX); b++) begin
        ph  = 6.2831853 * real'($urandom_range(1000)) / 1000.0;
        mag = 1000.0 + real'($urandom_range(2000));
        hr[b] = mag * $cos(ph);
        hi[b] = mag * $sin(ph);
        ci[b] = 0; cq[b] = 0;
      end
      for (int k = 0; k < NPILOT + 30; k++) begin
        for (int b = 0; b < int'(M_MAX); b++) begin
          if (k < NPILOT) begin ai[b] = 1; aq[b] = 1; end
          else begin ai[b] = 2 * int'($urandom_range(7)) - 7; aq[b] = 2 * int'($urandom_range(7)) - 7; end
          yi = $rtoi(hr[b] * ai[b] - hi[b] * aq[b]) + int'($urandom_range(4)) - 2;
          yq = $rtoi(hr[b] * aq[b] + hi[b] * ai[b]) + int'($urandom_range(4)) - 2;
          y_i[b] = Y_W'(yi);
          y_q[b] = Y_W'(yq);
          if (k < NPILOT) begin ci[b] += yi + yq; cq[b] += yq - yi; end
        end
        y_k = 12'(k);
        y_valid = 1;
        @(negedge clk);
        y_valid = 0;
        checks++;
        if (z_valid != (k >= NPILOT)) failures++;
        if (k >= NPILOT)
          for (int b = 0; b < int'(M_MAX); b++) begin
            ez_i = (longint'(y_i[b]) * ci[b] + longint'(y_q[b]) * cq[b]) * 2 * NPILOT;
            ez_q = (longint'(y_q[b]) * ci[b] - longint'(y_i[b]) * cq[b]) * 2 * NPILOT;
            checks += 2;
            if (z_i[b] != ez_i || z_q[b] != ez_q || e[b] != ci[b]*ci[b] + cq[b]*cq[b]) failures++;
            if ($rtoi(real'(z_i[b]) / real'(e[b]) + 100.5) - 100 != ai[b] ||
                $rtoi(real'(z_q[b]) / real'(e[b]) + 100.5) - 100 != aq[b]) begin
              failures++;
              if (failures < 6) $display("FAIL band %0d level %0d,%0d got %f,%f", b, ai[b], aq[b],
                                         real'(z_i[b]) / real'(e[b]), real'(z_q[b]) / real'(e[b]));
            end
          end
      end
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
