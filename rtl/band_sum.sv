// band_sum: the summing node (Sigma) of the transmitter. Adds the shaped
// signals of all sub-bands, scales the total by an arithmetic right shift of
// tx_shift bits with round-to-nearest, and saturates it to the DAC width.
// While pre_sel is high the sum is replaced by pre_smp, the synchronisation
// preamble, so the DAC sees one continuous sample stream.
// Timing: one register stage, inputs in cycle t appear on dac in cycle t+1.
// The adder is the paper's; the scaling, saturation and preamble multiplexer
// are this design's.
module band_sum
  import mcap_pkg::*;
#(
  parameter int unsigned M    = M_MAX,
  parameter int unsigned BO_W = 26
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [4:0]             tx_shift,
  input  logic signed [BO_W-1:0] band_in [M],
  input  logic                   pre_sel,
  input  smp_t                   pre_smp,
  output smp_t                   dac
);

  localparam int unsigned S_W = BO_W + $clog2(M) + 1;
  localparam logic signed [S_W-1:0] MAXV = S_W'((1 << (X_W-1)) - 1);
  localparam logic signed [S_W-1:0] MINV = -S_W'(1 << (X_W-1));

  logic signed [S_W-1:0] total, rnd, scaled;

  always_comb begin
    total = '0;
    for (int b = 0; b < int'(M); b++) total = total + S_W'(band_in[b]);
    rnd    = (tx_shift == 0) ? '0 : S_W'(1) <<< (tx_shift - 1);
    scaled = (total + rnd) >>> tx_shift;
  end

  always_ff @(posedge clk) begin
    if (rst)              dac <= '0;
    else if (pre_sel)     dac <= pre_smp;
    else if (scaled > MAXV) dac <= smp_t'(MAXV);
    else if (scaled < MINV) dac <= smp_t'(MINV);
    else                  dac <= smp_t'(scaled);
  end

endmodule
