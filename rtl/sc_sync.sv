// sc_sync: Schmidl and Cox frame synchronisation for the real-valued m-CAP
// signal. The transmitter precedes each frame with a preamble of two equal
// halves of L samples. With x the incoming sample stream the block keeps
//   P(t) = sum_{i<L} x[t-i] * x[t-i-L]      (correlation of the two halves)
//   R(t) = sum_{i<2L} x[t-i]^2 / 2          (mean energy of the two halves)
// as running sums (one add and one subtract per sample each, so they stay
// exact). A frame is declared when P > 0, 8*P^2 >= R'^2 with R' = 2R the
// stored sum (metric P^2/R^2 at least 1/2) and R' >= R_MIN. Normalising by
// both halves rather than only the latest one (as in the original method)
// keeps the metric at or below 1 and stops false alarms when a loud
// preamble is followed by a quieter payload. From that point the block searches WIN samples for
// the largest P, which marks the last preamble sample. The samples are passed
// on through a WIN-sample delay line so that frame_start can be raised in the
// same cycle as the first payload sample leaves x_out, whatever the position
// of the peak inside the window.
//
// To keep the products narrow the metric uses the samples shifted right by
// SHIFT bits. search_en gates the detector (the receiver clears it while it
// is demodulating a frame); the running sums always run.
// The method is the one the paper names; the thresholds, window and the
// peak search are this design's choices.
module sc_sync
  import mcap_pkg::*;
#(
  parameter int unsigned L     = 64,
  parameter int unsigned WIN   = 64,
  parameter int unsigned SHIFT = 4,
  parameter longint      R_MIN = 4096
) (
  input  logic clk,
  input  logic rst,
  input  logic search_en,
  input  smp_t x_in,
  output smp_t x_out,
  output logic frame_start,
  output logic [15:0] detections
);

  localparam int unsigned XS_W = X_W - SHIFT;
  localparam int unsigned S_W  = 2*XS_W + $clog2(L) + 2;

  typedef logic signed [XS_W-1:0] xs_t;
  typedef enum logic [1:0] { S_IDLE, S_SEARCH, S_COUNT } state_t;

  xs_t  sdl [2*L];           // sdl[i] holds xs[t-1-i]
  smp_t odl [WIN];           // output delay line
  logic signed [S_W-1:0] p_q, r_q, p_n, r_n, p_max;
  xs_t  xs, x_l, x_2l;
  logic signed [2*S_W+1:0] p2, r2;
  logic hit;
  state_t state;
  logic [$clog2(WIN+1)-1:0] since, since_n, cnt, cd;

  assign xs   = xs_t'(x_in >>> SHIFT);
  assign x_l  = sdl[L-1];
  assign x_2l = sdl[2*L-1];
  assign p_n  = p_q + S_W'(xs * x_l) - S_W'(x_l * x_2l);
  assign r_n  = r_q + S_W'(xs * xs) - S_W'(x_2l * x_2l);
  assign p2   = (2*S_W+2)'(p_n) * (2*S_W+2)'(p_n);
  assign r2   = (2*S_W+2)'(r_n) * (2*S_W+2)'(r_n);
  assign hit = search_en && p_n > 0 && (p2 <<< 3) >= r2 && r_n >= S_W'(R_MIN);

  assign x_out       = odl[WIN-1];
  assign frame_start = state == S_COUNT && cd == '0;
  assign since_n     = (p_n > p_max) ? '0 : since + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(2*L); i++) sdl[i] <= '0;
      for (int i = 0; i < int'(WIN); i++) odl[i] <= '0;
      p_q <= '0;
      r_q <= '0;
      state <= S_IDLE;
      p_max <= '0;
      since <= '0;
      cnt <= '0;
      cd <= '0;
      detections <= '0;
    end else begin
      sdl[0] <= xs;
      for (int i = 1; i < int'(2*L); i++) sdl[i] <= sdl[i-1];
      odl[0] <= x_in;
      for (int i = 1; i < int'(WIN); i++) odl[i] <= odl[i-1];
      p_q <= p_n;
      r_q <= r_n;
      case (state)
        S_IDLE: if (hit) begin
          state <= S_SEARCH;
          p_max <= p_n;
          since <= '0;
          cnt   <= $bits(cnt)'(1);
        end
        S_SEARCH: begin
          if (p_n > p_max) p_max <= p_n;
          since <= since_n;
          cnt   <= cnt + 1'b1;
          if (cnt == $bits(cnt)'(WIN - 1)) begin
            state <= S_COUNT;
            cd    <= $bits(cd)'(WIN) - since_n;
          end
        end
        default: begin
          if (cd == '0) begin
            state      <= S_IDLE;
            detections <= detections + 1'b1;
          end else begin
            cd <= cd - 1'b1;
          end
        end
      endcase
    end
  end

endmodule
