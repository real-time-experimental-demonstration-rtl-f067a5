// mcap_pkg: types and constants shared by the multi-band CAP (m-CAP)
// transmitter and receiver.
//
// The sub-band count (1..10), the QAM orders (4, 16, 64) and the roll-off
// used by the filter coefficients (0.15) follow the demonstrator; the word
// widths, the filter span, the samples per aggregate symbol and the frame
// layout are choices of this implementation (see the individual modules).
//
// A run-time configuration (mcap_cfg_t) selects the number of sub-bands and
// the constellation. It is captured while the transmitter or receiver is held
// in reset, so changing the modulation format interrupts the link until the
// receiver has found the next frame.
package mcap_pkg;

  // Largest number of sub-bands (m = 1 .. 10 in the demonstrator).
  localparam int unsigned M_MAX = 10;
  // Samples per symbol of a single-band (m = 1) signal. With m sub-bands the
  // per-band symbol period is N = m * SPS1 samples, so the aggregate symbol
  // rate is fs / SPS1 for every m.
  localparam int unsigned SPS1 = 3;
  localparam int unsigned N_MAX = M_MAX * SPS1;
  // Shaping / matched filter length in per-band symbol periods: L = SPAN * N.
  localparam int unsigned SPAN = 14;

  localparam int unsigned X_W   = 16;  // DAC and ADC sample width
  localparam int unsigned C_W   = 16;  // filter coefficient width
  localparam int unsigned LVL_W = 4;   // signed QAM level, -7 .. +7
  localparam int unsigned Y_W   = 18;  // matched-filter output after scaling
  localparam int unsigned BPS_MAX = 6; // bits per symbol, 64-QAM
  localparam int unsigned BITS_MAX = M_MAX * BPS_MAX; // bits per symbol period

  typedef enum logic [1:0] {
    QAM4  = 2'd0,
    QAM16 = 2'd1,
    QAM64 = 2'd2
  } qam_t;

  typedef struct packed {
    logic [3:0] n_bands;   // m, 1 .. M_MAX
    qam_t       qam;       // constellation used on every sub-band
    logic [4:0] tx_shift;  // right shift applied to the summed TX signal
    logic [5:0] rx_shift;  // right shift applied to the matched-filter sums
  } mcap_cfg_t;

  typedef logic signed [LVL_W-1:0] lvl_t;
  typedef logic signed [X_W-1:0]   smp_t;
  typedef logic signed [C_W-1:0]   coef_t;

  // One write into a coefficient memory: quad 0 is p (in-phase), quad 1 is
  // p' (quadrature); tap index n = tap * N + phase.
  typedef struct packed {
    logic       we;
    logic       quad;
    logic [3:0] band;
    logic [3:0] tap;
    logic [4:0] phase;
    coef_t      data;
  } coef_wr_t;

  function automatic int unsigned bits_per_sym(qam_t q);
    case (q)
      QAM4:    return 2;
      QAM16:   return 4;
      default: return 6;
    endcase
  endfunction

endpackage
