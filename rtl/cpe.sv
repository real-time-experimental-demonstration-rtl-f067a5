// cpe: common phase error correction, one estimate per sub-band and frame.
// The first NPILOT symbols of every frame are pilots with the known value
// 1+j. The block correlates them with the pilot,
//   c_b = sum_pilots y * conj(1+j)   (= 2 * NPILOT * h_b for a channel gain h_b)
// and then multiplies every data symbol by conj(c_b). This removes the band's
// phase rotation (from the channel and residual timing error) without a
// division or an arctangent; the gain that remains is |c_b|^2 / (2 NPILOT),
// the same for every symbol of the band. To give the slicer an exact scale
// the block outputs z = 2*NPILOT * y * conj(c_b) together with e = |c_b|^2,
// so that an undistorted level a (in units of the constellation grid) gives
// z = a * e.
//
// The paper only names the block (CPE) and draws a rotated constellation
// being turned back; the pilot-aided estimator is this design's choice.
//
// Timing: y_valid in cycle t gives z_valid in cycle t+1 for data symbols
// (y_k >= NPILOT); pilots produce no output. NPILOT must be a power of two.
// Because the factor 2*NPILOT is a left shift, the lowest log2(2*NPILOT) bits
// of z_i and z_q are always zero; they are kept so that z and e share one
// scale in the slicer.
module cpe
  import mcap_pkg::*;
#(
  parameter int unsigned M      = M_MAX,
  parameter int unsigned NPILOT = 8,
  parameter int unsigned SYM_W  = 12
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [Y_W-1:0] y_i [M],
  input  logic signed [Y_W-1:0] y_q [M],
  input  logic                  y_valid,
  input  logic [SYM_W-1:0]      y_k,
  output logic signed [63:0]    z_i [M],
  output logic signed [63:0]    z_q [M],
  output logic signed [63:0]    e   [M],
  output logic signed [Y_W+7:0] est_i [M],
  output logic signed [Y_W+7:0] est_q [M],
  output logic                  z_valid
);

  localparam int unsigned LOG_NP = $clog2(NPILOT);
  localparam int unsigned E_W    = Y_W + 8;
  typedef logic signed [E_W-1:0] est_t;
  typedef logic signed [63:0]    w_t;

  logic is_pilot;
  est_t pi_term [M];
  est_t pq_term [M];

  assign is_pilot = y_k < SYM_W'(NPILOT);

  always_comb
    for (int b = 0; b < int'(M); b++) begin
      pi_term[b] = est_t'(y_i[b]) + est_t'(y_q[b]);
      pq_term[b] = est_t'(y_q[b]) - est_t'(y_i[b]);
    end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int b = 0; b < int'(M); b++) begin
        est_i[b] <= '0;
        est_q[b] <= '0;
        z_i[b]   <= '0;
        z_q[b]   <= '0;
        e[b]     <= '0;
      end
      z_valid <= 1'b0;
    end else begin
      z_valid <= y_valid && !is_pilot;
      for (int b = 0; b < int'(M); b++) begin
        if (y_valid && is_pilot) begin
          est_i[b] <= (y_k == '0) ? pi_term[b] : est_i[b] + pi_term[b];
          est_q[b] <= (y_k == '0) ? pq_term[b] : est_q[b] + pq_term[b];
        end
        if (y_valid && !is_pilot) begin
          z_i[b] <= (w_t'(y_i[b]) * w_t'(est_i[b]) + w_t'(y_q[b]) * w_t'(est_q[b])) <<< (LOG_NP + 1);
          z_q[b] <= (w_t'(y_q[b]) * w_t'(est_i[b]) - w_t'(y_i[b]) * w_t'(est_q[b])) <<< (LOG_NP + 1);
          e[b]   <= w_t'(est_i[b]) * w_t'(est_i[b]) + w_t'(est_q[b]) * w_t'(est_q[b]);
        end
      end
    end
  end

endmodule
