// cap_rx_filter: the CAP matched filters p(-n) and p'(-n) of every sub-band,
// followed by sampling at the symbol rate. For symbol k of band b it computes
//   y_i = sum_{n<L} x[kN+n] * p_b(n),   y_q = sum_{n<L} x[kN+n] * p'_b(n)
// which is the output of the time-reversed filter p(-n) taken at the symbol
// instant, i.e. matched filtering followed by N-fold downsampling.
//
// How: symbols overlap, because a pulse is SPAN symbol periods long, so each
// band has SPAN accumulator pairs ordered by age. Accumulator d holds the
// symbol that started d symbol periods ago; at sample phase ph it adds
// x * p[d*N + ph], so every accumulator always uses the same tap bank and
// only the phase selects a coefficient. Accumulator 0 is restarted at phase
// 0 (slot_new); at the end of every symbol period (sym_end) the accumulators
// move one place up, and the one leaving place SPAN-1 is complete: it is
// scaled and emitted when sym_out is high. Each band therefore needs 2*SPAN
// multipliers at the sample rate, the same as the direct filter would need
// after decimation.
//
// Coefficients are written through coef_wr with the same addressing as the
// transmitter (n = tap*N + phase); loading the transmitter's p and p' gives
// the matched filter. The sums are scaled by a rounding right shift of
// rx_shift bits and saturated to Y_W bits.
//
// The matched filters themselves follow the system diagram of the
// demonstrator; merging them with the downsampler into per-symbol
// correlators, the span and the output scaling are this design's choices.
//
// Timing: inputs from the downsampler in cycle t; y_* and y_valid registered
// in cycle t+1 when sym_out was high in cycle t.
module cap_rx_filter
  import mcap_pkg::*;
#(
  parameter int unsigned M     = M_MAX,
  parameter int unsigned NT    = SPAN,
  parameter int unsigned NP    = N_MAX,
  parameter int unsigned ACC_W = 48,
  parameter int unsigned SYM_W = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  coef_wr_t         coef_wr,
  input  logic [5:0]       rx_shift,
  input  smp_t             x,
  input  logic [4:0]       phase,
  input  logic             slot_new,
  input  logic             sym_end,
  input  logic             sym_out,
  input  logic [SYM_W-1:0] sym_k,
  output logic signed [Y_W-1:0] y_i [M],
  output logic signed [Y_W-1:0] y_q [M],
  output logic             y_valid,
  output logic [SYM_W-1:0] y_k
);

  typedef logic signed [ACC_W-1:0] acc_t;
  localparam acc_t YMAX = acc_t'((1 << (Y_W-1)) - 1);
  localparam acc_t YMIN = -acc_t'(1 << (Y_W-1));

  coef_t coef [2][M][NT][NP];
  acc_t  acc_i [M][NT];
  acc_t  acc_q [M][NT];
  acc_t  nxt_i [M][NT];
  acc_t  nxt_q [M][NT];
  acc_t  fin_i [M];
  acc_t  fin_q [M];

  function automatic logic signed [Y_W-1:0] scale(acc_t v, logic [5:0] sh);
    acc_t r;
    r = (sh == 0) ? v : (v + (acc_t'(1) <<< (sh - 1))) >>> sh;
    if (r > YMAX)      return YMAX[Y_W-1:0];
    else if (r < YMIN) return YMIN[Y_W-1:0];
    else               return r[Y_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (coef_wr.we && int'(coef_wr.band) < int'(M) && int'(coef_wr.tap) < int'(NT)
        && int'(coef_wr.phase) < int'(NP))
      coef[coef_wr.quad][coef_wr.band][coef_wr.tap][coef_wr.phase] <= coef_wr.data;
  end

  always_comb begin
    for (int b = 0; b < int'(M); b++) begin
      for (int d = 0; d < int'(NT); d++) begin
        if (slot_new && d == 0) begin
          nxt_i[b][d] = acc_t'(x * coef[0][b][d][phase]);
          nxt_q[b][d] = acc_t'(x * coef[1][b][d][phase]);
        end else begin
          nxt_i[b][d] = acc_i[b][d] + acc_t'(x * coef[0][b][d][phase]);
          nxt_q[b][d] = acc_q[b][d] + acc_t'(x * coef[1][b][d][phase]);
        end
      end
      fin_i[b] = nxt_i[b][NT-1];
      fin_q[b] = nxt_q[b][NT-1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int b = 0; b < int'(M); b++) begin
        for (int j = 0; j < int'(NT); j++) begin
          acc_i[b][j] <= '0;
          acc_q[b][j] <= '0;
        end
        y_i[b] <= '0;
        y_q[b] <= '0;
      end
      y_valid <= 1'b0;
      y_k     <= '0;
    end else begin
      for (int b = 0; b < int'(M); b++)
        for (int d = 0; d < int'(NT); d++)
          if (!sym_end) begin
            acc_i[b][d] <= nxt_i[b][d];
            acc_q[b][d] <= nxt_q[b][d];
          end else if (d == 0) begin
            acc_i[b][d] <= '0;
            acc_q[b][d] <= '0;
          end else begin
            acc_i[b][d] <= nxt_i[b][d-1];
            acc_q[b][d] <= nxt_q[b][d-1];
          end
      y_valid <= sym_out;
      if (sym_out) begin
        y_k <= sym_k;
        for (int b = 0; b < int'(M); b++) begin
          y_i[b] <= scale(fin_i[b], rx_shift);
          y_q[b] <= scale(fin_q[b], rx_shift);
        end
      end
    end
  end

endmodule
