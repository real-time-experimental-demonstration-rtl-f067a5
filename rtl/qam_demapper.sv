// qam_demapper: M-QAM decision and bit demapping for all sub-bands of one
// symbol period, the inverse of qam_mapper.
//
// Each axis of a corrected symbol z is compared with the decision thresholds
// of an S-level axis (S = 2, 4, 8). With the scale e from the phase corrector
// (an ideal level a arrives as z = a*e) the thresholds lie at (2t+2-S)*e,
// t = 0 .. S-2, so the level index is the number of thresholds that z
// exceeds; no division is needed. The index is Gray-coded back to bits, which
// are placed at bits[b*bps +: bps] (in-phase half first), as in the mapper.
//
// Timing: one register stage; bits_valid follows z_valid by one cycle and
// nbits = n_bands * bps tells the checker how many bits are valid.
// The demapper is named in the paper; the slicer is this design's.
module qam_demapper
  import mcap_pkg::*;
#(
  parameter int unsigned M = M_MAX
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [3:0]           n_bands,
  input  qam_t                 qam,
  input  logic signed [63:0]   z_i [M],
  input  logic signed [63:0]   z_q [M],
  input  logic signed [63:0]   e   [M],
  input  logic                 z_valid,
  output logic [M*BPS_MAX-1:0] bits,
  output logic [$clog2(M*BPS_MAX+1)-1:0] nbits,
  output logic                 bits_valid
);

  function automatic logic [2:0] slice(logic signed [63:0] z, logic signed [63:0] ev,
                                       int unsigned h);
    logic [2:0] idx;
    int         s;
    s   = 1 << h;
    idx = '0;
    for (int t = 0; t < 7; t++)
      if (t < s - 1 && z > ev * 64'(2*t + 2 - s)) idx = idx + 1'b1;
    return idx ^ (idx >> 1);
  endfunction

  logic [M*BPS_MAX-1:0] bits_c;

  always_comb begin
    int unsigned bps, h;
    logic [2:0]  gi, gq;
    bps    = bits_per_sym(qam);
    h      = bps / 2;
    bits_c = '0;
    for (int b = 0; b < int'(M); b++) begin
      gi = slice(z_i[b], e[b], h);
      gq = slice(z_q[b], e[b], h);
      if (b < int'(n_bands))
        for (int k = 0; k < 3; k++)
          if (k < int'(h)) begin
            bits_c[b*bps + k]     = gi[k];
            bits_c[b*bps + h + k] = gq[k];
          end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bits       <= '0;
      nbits      <= '0;
      bits_valid <= 1'b0;
    end else begin
      bits_valid <= z_valid;
      nbits      <= $bits(nbits)'(int'(n_bands) * bits_per_sym(qam));
      if (z_valid) bits <= bits_c;
    end
  end

endmodule
