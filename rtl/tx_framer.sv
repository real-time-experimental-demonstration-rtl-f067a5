// tx_framer: frame sequencer of the transmitter. The receiver finds frames
// with the Schmidl and Cox method, which needs a training preamble made of
// two identical halves; the paper names the method but not the frame, so the
// frame below is this design's:
//
//   | preamble: 2 x PRE_HALF samples | NPILOT pilot symbols | NDATA data symbols | SPAN-1 zero symbols |
//
// The preamble is a +/-PRE_AMP binary sequence from a 7-bit LFSR (x^7+x^6+1)
// that is reseeded at the start of each half, so both halves are equal.
// Pilot symbols are level (+1,+1) on every active band and let the receiver
// estimate each band's phase and gain. The zero symbols at the end flush the
// shaping filters so that every frame starts from an empty delay line.
// Frames follow each other without gaps.
//
// Interface: pre_sel/pre_smp give the preamble sample of the current cycle;
// up_start starts the upsampler for NPILOT+NDATA+SPAN-1 symbols at the end of
// the preamble and up_done (from the upsampler) returns to the preamble.
module tx_framer
  import mcap_pkg::*;
#(
  parameter int unsigned PRE_HALF = 64,
  parameter int signed   PRE_AMP  = 8192
) (
  input  logic clk,
  input  logic rst,
  input  logic up_done,
  output logic up_start,
  output logic pre_sel,
  output smp_t pre_smp,
  output logic [15:0] frames
);

  typedef enum logic [0:0] { S_PRE, S_BODY } state_t;
  state_t      state;
  logic [$clog2(2*PRE_HALF)-1:0] cnt;
  logic [6:0]  lfsr;

  assign pre_sel  = state == S_PRE;
  assign pre_smp  = lfsr[0] ? smp_t'(PRE_AMP) : smp_t'(-PRE_AMP);
  assign up_start = state == S_PRE && cnt == $bits(cnt)'(2*PRE_HALF - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_PRE;
      cnt    <= '0;
      lfsr   <= 7'h5A;
      frames <= '0;
    end else case (state)
      S_PRE: begin
        if (cnt == $bits(cnt)'(PRE_HALF - 1) || cnt == $bits(cnt)'(2*PRE_HALF - 1))
          lfsr <= 7'h5A;
        else
          lfsr <= {lfsr[5:0], lfsr[6] ^ lfsr[5]};
        if (up_start) begin
          state <= S_BODY;
          cnt   <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      default: begin
        if (up_done) begin
          state  <= S_PRE;
          frames <= frames + 1'b1;
        end
      end
    endcase
  end

endmodule
