// prbs_gen: transmit data source (D_s). A PRBS-15 generator, polynomial
// x^15 + x^14 + 1, that produces a variable number of bits per request so that
// one request supplies every sub-band of one symbol period.
//
// Interface: when req is high, bits[i] for i < nbits holds the next nbits
// sequence bits (bits[0] first) and the state advances by nbits at the clock
// edge. Bits at positions >= nbits are zero. Output is combinational from
// the state, so the bits are valid in the cycle req is asserted.
// The paper only shows a bit source; the PRBS choice is this design's, made
// so that the receiver can count bit errors against the same sequence.
module prbs_gen
  import mcap_pkg::*;
#(
  parameter int unsigned W = BITS_MAX,
  parameter logic [14:0] SEED = 15'h7FFF
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 req,
  input  logic [$clog2(W+1)-1:0] nbits,
  output logic [W-1:0]         bits
);

  logic [14:0] state, state_nx;

  always_comb begin
    logic [14:0] s;
    logic        b;
    s    = state;
    b    = 1'b0;
    bits = '0;
    for (int i = 0; i < W; i++) begin
      if (i < int'(nbits)) begin
        b       = s[14] ^ s[13];
        bits[i] = b;
        s       = {s[13:0], b};
      end
    end
    state_nx = s;
  end

  always_ff @(posedge clk) begin
    if (rst)      state <= SEED;
    else if (req) state <= state_nx;
  end

endmodule
