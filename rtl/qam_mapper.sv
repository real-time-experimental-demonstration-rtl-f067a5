// qam_mapper: M-QAM mapper for all sub-bands of one symbol period.
//
// Sub-band b takes bits [b*bps +: bps] of the input word, bps = 2, 4 or 6 for
// 4-, 16- and 64-QAM. The first half of those bits (LSB first) selects the
// in-phase level and the second half the quadrature level. Each half is a
// Gray-coded index g; with S = 2^(bps/2) levels per axis the level is
// 2*gray2bin(g) - (S-1), i.e. one of -(S-1), ..., -1, +1, ..., +(S-1).
// Sub-bands at or above n_bands output zero. Purely combinational.
// The paper names the mapper and the three constellations; the bit order
// and Gray labelling are this design's choice.
module qam_mapper
  import mcap_pkg::*;
#(
  parameter int unsigned M = M_MAX
) (
  input  logic [3:0]          n_bands,
  input  qam_t                qam,
  input  logic [M*BPS_MAX-1:0] bits,
  output lvl_t                lvl_i [M],
  output lvl_t                lvl_q [M]
);

  function automatic lvl_t axis_level(logic [2:0] g, int unsigned h);
    logic [2:0] b;
    case (h)
      1:       b = {2'b00, g[0]};
      2:       b = {1'b0, g[1], g[1] ^ g[0]};
      default: b = {g[2], g[2] ^ g[1], g[2] ^ g[1] ^ g[0]};
    endcase
    return lvl_t'(2 * int'(b) - ((1 << h) - 1));
  endfunction

  always_comb begin
    int unsigned bps, h;
    logic [5:0]  w;
    bps = bits_per_sym(qam);
    h   = bps / 2;
    for (int b = 0; b < int'(M); b++) begin
      w = '0;
      for (int k = 0; k < 6; k++)
        if (k < int'(bps)) w[k] = bits[b*bps + k];
      if (b < int'(n_bands)) begin
        lvl_i[b] = axis_level(w[2:0], h);
        lvl_q[b] = axis_level(3'(32'(w) >> h), h);
      end else begin
        lvl_i[b] = '0;
        lvl_q[b] = '0;
      end
    end
  end

endmodule
