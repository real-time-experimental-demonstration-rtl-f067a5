// ber_counter: the receive data sink E_s with bit-error-rate measurement.
// It checks the received bits against a local copy of the transmitter's
// PRBS-15 (x^15 + x^14 + 1).
//
// How: the checker starts unlocked and loads the first 15 received bits into
// its LFSR. From then on it predicts each bit from its own state, counts a
// compared bit and, if the received bit differs, an error. Errors therefore
// count once each (no error multiplication). If more than a quarter of the
// bits in a block of BLOCK compared bits are wrong the checker declares loss
// of lock and reloads from the stream.
//
// Interface: bits_valid with nbits valid bits in bits[nbits-1:0] (bits[0]
// first), processed in one cycle. bit_count and err_count accumulate since
// reset; BER = err_count / bit_count. The paper states that the receiver
// FPGA measures the BER; the PRBS checker is this design's.
module ber_counter
  import mcap_pkg::*;
#(
  parameter int unsigned W     = BITS_MAX,
  parameter int unsigned BLOCK = 1024
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [W-1:0]           bits,
  input  logic [$clog2(W+1)-1:0] nbits,
  input  logic                   bits_valid,
  output logic                   locked,
  output logic [47:0]            bit_count,
  output logic [47:0]            err_count,
  output logic [15:0]            relocks
);

  logic [14:0] state, state_n;
  logic [4:0]  fill, fill_n;
  logic [$clog2(W+1)-1:0] nb_cmp, nb_err;
  logic [15:0] blk_bits, blk_errs;

  always_comb begin
    logic pred;
    logic lk;
    state_n = state;
    fill_n  = fill;
    nb_cmp  = '0;
    nb_err  = '0;
    pred    = 1'b0;
    lk      = locked;
    for (int i = 0; i < int'(W); i++) begin
      if (i < int'(nbits)) begin
        pred = state_n[14] ^ state_n[13];
        if (lk) begin
          nb_cmp  = nb_cmp + 1'b1;
          if (pred != bits[i]) nb_err = nb_err + 1'b1;
          state_n = {state_n[13:0], pred};
        end else begin
          state_n = {state_n[13:0], bits[i]};
          fill_n  = fill_n + 1'b1;
          if (fill_n == 5'd15) lk = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= '0;
      fill      <= '0;
      locked    <= 1'b0;
      bit_count <= '0;
      err_count <= '0;
      relocks   <= '0;
      blk_bits  <= '0;
      blk_errs  <= '0;
    end else if (bits_valid) begin
      state     <= state_n;
      bit_count <= bit_count + 48'(nb_cmp);
      err_count <= err_count + 48'(nb_err);
      if (!locked) begin
        fill   <= fill_n;
        locked <= fill_n >= 5'd15;
      end else if (blk_bits + 16'(nb_cmp) >= 16'(BLOCK)) begin
        blk_bits <= '0;
        blk_errs <= '0;
        if ((blk_errs + 16'(nb_err)) * 4 > 16'(BLOCK)) begin
          locked  <= 1'b0;
          fill    <= '0;
          relocks <= relocks + 1'b1;
        end
      end else begin
        blk_bits <= blk_bits + 16'(nb_cmp);
        blk_errs <= blk_errs + 16'(nb_err);
      end
    end
  end

endmodule
