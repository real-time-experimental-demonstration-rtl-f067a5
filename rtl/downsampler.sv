// downsampler: the DOWN block of the receiver, i.e. the symbol timing and
// decimation control of the matched filters. From frame_start (raised by the
// synchroniser with the first payload sample) it counts the sample phase
// 0..N-1 (N = n_bands * SPS1) and the symbol period q, and tells the
// polyphase matched filters which of their SPAN accumulators starts a new
// symbol (at phase 0) and which one is complete and must be sampled (at phase
// N-1). The output strobe therefore runs at the per-band symbol rate fs/N:
// this is where the N-fold downsampling happens.
//
// Symbol k is integrated over samples k*N .. k*N+L-1 of the payload and is
// emitted at q = k+SPAN-1, phase N-1. The block runs for NS+SPAN-1 symbol
// periods, so that the last of the NS symbols of a frame completes, then
// raises done and goes idle (the synchroniser may then search again).
//
// Timing: x_in and frame_start in cycle t give x and the timing signals in
// cycle t+1 (one register stage, sample and timing stay aligned).
// The name is the paper's; the control scheme is this design's.
module downsampler
  import mcap_pkg::*;
#(
  parameter int unsigned NS    = 264,
  parameter int unsigned SYM_W = 12
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [3:0]       n_bands,
  input  logic             frame_start,
  input  smp_t             x_in,
  output smp_t             x,
  output logic             active,
  output logic [4:0]       phase,
  output logic             slot_new, // phase 0 and symbol q < NS: start symbol q
  output logic             sym_end,  // phase N-1: end of symbol period q
  output logic             sym_out,  // phase N-1 and q >= SPAN-1: symbol q-SPAN+1 complete
  output logic [SYM_W-1:0] sym_k,    // index of the completed symbol
  output logic             done
);

  localparam int unsigned QLAST = NS + SPAN - 2;

  logic [SYM_W-1:0] q;
  logic [4:0]       n_last;

  assign n_last   = 5'(int'(n_bands) * SPS1 - 1);
  assign slot_new = active && phase == 5'd0 && q < SYM_W'(NS);
  assign sym_end  = active && phase == n_last;
  assign sym_out  = active && phase == n_last && q >= SYM_W'(SPAN - 1);
  assign sym_k    = q - SYM_W'(SPAN - 1);
  assign done     = active && phase == n_last && q == SYM_W'(QLAST);

  always_ff @(posedge clk) begin
    if (rst) begin
      x      <= '0;
      active <= 1'b0;
      phase  <= '0;
      q      <= '0;
    end else begin
      x <= x_in;
      if (frame_start && !active) begin
        active <= 1'b1;
        phase  <= '0;
          q      <= '0;
      end else if (active) begin
        if (phase == n_last) begin
          phase <= '0;
          q     <= q + 1'b1;
          if (q == SYM_W'(QLAST)) active <= 1'b0;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

endmodule
