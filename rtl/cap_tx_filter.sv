// cap_tx_filter: the CAP pulse-shaping filters p(n) and p'(n) of every
// sub-band. Band b transmits s_b(n) = sum_k I_b[k] p_b(n - kN) + Q_b[k] p'_b(n - kN),
// where p_b and p'_b are the in-phase and quadrature (Hilbert pair) shaping
// pulses of that band, each L = SPAN * N taps long.
//
// How: because the upsampled input holds one non-zero sample in N, only SPAN
// taps of each filter see a symbol at any time. The filter is therefore
// polyphase: a delay line holds the last SPAN symbols of each band, and the
// output at phase ph is sum_j I[j] * p[j*N + ph] + Q[j] * p'[j*N + ph].
// That is 2*SPAN multiplications of a small level by a coefficient per band
// and sample instead of 2*L.
//
// The coefficients are written at run time through coef_wr (one per clock),
// so the pulse shape, carrier frequencies and band count can be changed
// without rebuilding; the paper's pulses are square-root raised cosines with
// roll-off 0.15 modulated by cosine and sine carriers at the band centres.
//
// Timing: phase/sym_stb/levels in cycle t give band_out in cycle t+2.
// While active is low the delay lines hold and band_out is zero.
module cap_tx_filter
  import mcap_pkg::*;
#(
  parameter int unsigned M  = M_MAX,
  parameter int unsigned NT = SPAN,
  parameter int unsigned NP = N_MAX,
  parameter int unsigned BO_W = 26
) (
  input  logic                   clk,
  input  logic                   rst,
  input  coef_wr_t               coef_wr,
  input  logic                   active,
  input  logic [4:0]             phase,
  input  logic                   sym_stb,
  input  lvl_t                   lvl_i [M],
  input  lvl_t                   lvl_q [M],
  output logic signed [BO_W-1:0] band_out [M]
);

  coef_t coef [2][M][NT][NP];
  lvl_t  dl_i [M][NT];
  lvl_t  dl_q [M][NT];
  logic [4:0] ph_q;
  logic       act_q;
  logic signed [BO_W-1:0] sum [M];

  always_ff @(posedge clk) begin
    if (coef_wr.we && int'(coef_wr.band) < int'(M) && int'(coef_wr.tap) < int'(NT)
        && int'(coef_wr.phase) < int'(NP))
      coef[coef_wr.quad][coef_wr.band][coef_wr.tap][coef_wr.phase] <= coef_wr.data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int b = 0; b < int'(M); b++)
        for (int j = 0; j < int'(NT); j++) begin
          dl_i[b][j] <= '0;
          dl_q[b][j] <= '0;
        end
      ph_q  <= '0;
      act_q <= 1'b0;
    end else begin
      ph_q  <= phase;
      act_q <= active;
      if (active && sym_stb)
        for (int b = 0; b < int'(M); b++) begin
          dl_i[b][0] <= lvl_i[b];
          dl_q[b][0] <= lvl_q[b];
          for (int j = 1; j < int'(NT); j++) begin
            dl_i[b][j] <= dl_i[b][j-1];
            dl_q[b][j] <= dl_q[b][j-1];
          end
        end
    end
  end

  always_comb begin
    for (int b = 0; b < int'(M); b++) begin
      sum[b] = '0;
      for (int j = 0; j < int'(NT); j++)
        sum[b] = sum[b] + BO_W'(dl_i[b][j] * coef[0][b][j][ph_q])
                        + BO_W'(dl_q[b][j] * coef[1][b][j][ph_q]);
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(M); b++)
      if (rst || !act_q) band_out[b] <= '0;
      else               band_out[b] <= sum[b];
  end

endmodule
