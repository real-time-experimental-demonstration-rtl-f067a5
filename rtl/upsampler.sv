// upsampler: the UP block of the transmitter. It turns the per-band symbol
// rate into the sample rate by inserting N-1 zero samples after every symbol,
// N = n_bands * SPS1. The zero samples are not materialised: the block
// produces the sample phase (0 .. N-1) inside the current symbol period and a
// symbol strobe at phase 0, which is all the polyphase shaping filter needs.
//
// Interface: a start pulse begins a burst of n_sym symbol periods. While
// active, phase counts 0..N-1 every clock (one sample per clock), sym_stb is
// high at phase 0 together with the index sym_idx of the symbol to load, and
// done pulses on the last sample of the burst. Start is ignored while active.
// Only the name "UP" is from the paper; the burst interface is this design's.
module upsampler
  import mcap_pkg::*;
#(
  parameter int unsigned SYM_W = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [3:0]       n_bands,
  input  logic             start,
  input  logic [SYM_W-1:0] n_sym,
  output logic             active,
  output logic [4:0]       phase,
  output logic             sym_stb,
  output logic [SYM_W-1:0] sym_idx,
  output logic             done
);

  logic [4:0] n_last;
  assign n_last  = 5'(int'(n_bands) * SPS1 - 1);
  assign sym_stb = active && phase == 5'd0;
  assign done    = active && phase == n_last && sym_idx == n_sym - 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      active  <= 1'b0;
      phase   <= '0;
      sym_idx <= '0;
    end else if (!active) begin
      if (start) begin
        active  <= 1'b1;
        phase   <= '0;
        sym_idx <= '0;
      end
    end else if (phase == n_last) begin
      phase <= '0;
      if (sym_idx == n_sym - 1'b1) active <= 1'b0;
      else                         sym_idx <= sym_idx + 1'b1;
    end else begin
      phase <= phase + 1'b1;
    end
  end

endmodule
