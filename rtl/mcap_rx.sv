// mcap_rx: the receiver FPGA of the demonstrator (USRP-RIO 2943 in the
// paper). Chain, as in the system diagram: ADC samples -> Schmidl and Cox
// synchronisation -> p(-n)/p'(-n) matched filters -> DOWN (symbol-rate
// sampling) -> CPE -> M-QAM demapper -> E_s (bit sink and BER counter).
//
// One ADC sample is taken per clock. The receiver runs from its own clock
// and reset; the only link to the transmitter is the sample stream. The
// synchroniser searches for a preamble while no frame is being demodulated;
// after a detection the downsampler runs for the NPILOT+NDATA symbols of the
// frame (plus the filter tail) and then re-arms the search. The
// configuration is captured while rst is high, as in the transmitter, and
// must match it (same m, constellation and filter coefficients).
module mcap_rx
  import mcap_pkg::*;
#(
  parameter int unsigned NPILOT   = 8,
  parameter int unsigned NDATA    = 256,
  parameter int unsigned PRE_HALF = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  mcap_cfg_t   cfg,
  input  coef_wr_t    coef_wr,
  input  smp_t        adc,
  output logic        locked,
  output logic [47:0] bit_count,
  output logic [47:0] err_count,
  output logic [15:0] detections,
  output logic [15:0] frames_done,
  output logic [15:0] relocks,
  output logic signed [Y_W+7:0] est_i [M_MAX],
  output logic signed [Y_W+7:0] est_q [M_MAX]
);

  localparam int unsigned SYM_W = 12;
  localparam int unsigned NS    = NPILOT + NDATA;

  mcap_cfg_t cfg_q;
  always_ff @(posedge clk)
    if (rst) cfg_q <= cfg;

  smp_t x_sync, x_dn;
  logic frame_start, dn_active, slot_new, sym_end, sym_out, dn_done;
  logic [4:0] phase;
  logic [SYM_W-1:0] sym_k;

  sc_sync #(.L(PRE_HALF), .WIN(PRE_HALF)) u_sync (
    .clk, .rst, .search_en(!dn_active), .x_in(adc), .x_out(x_sync),
    .frame_start, .detections
  );

  downsampler #(.NS(NS), .SYM_W(SYM_W)) u_down (
    .clk, .rst, .n_bands(cfg_q.n_bands), .frame_start, .x_in(x_sync), .x(x_dn),
    .active(dn_active), .phase, .slot_new, .sym_end, .sym_out, .sym_k, .done(dn_done)
  );

  always_ff @(posedge clk)
    if (rst)          frames_done <= '0;
    else if (dn_done) frames_done <= frames_done + 1'b1;

  logic signed [Y_W-1:0] y_i [M_MAX];
  logic signed [Y_W-1:0] y_q [M_MAX];
  logic y_valid;
  logic [SYM_W-1:0] y_k;

  cap_rx_filter #(.M(M_MAX), .NT(SPAN), .NP(N_MAX), .SYM_W(SYM_W)) u_mf (
    .clk, .rst, .coef_wr, .rx_shift(cfg_q.rx_shift), .x(x_dn), .phase,
    .slot_new, .sym_end, .sym_out, .sym_k, .y_i, .y_q, .y_valid, .y_k
  );

  logic signed [63:0] z_i [M_MAX];
  logic signed [63:0] z_q [M_MAX];
  logic signed [63:0] e   [M_MAX];
  logic z_valid;

  cpe #(.M(M_MAX), .NPILOT(NPILOT), .SYM_W(SYM_W)) u_cpe (
    .clk, .rst, .y_i, .y_q, .y_valid, .y_k, .z_i, .z_q, .e, .est_i, .est_q, .z_valid
  );

  logic [BITS_MAX-1:0] bits;
  logic [$clog2(BITS_MAX+1)-1:0] nbits;
  logic bits_valid;

  qam_demapper #(.M(M_MAX)) u_demap (
    .clk, .rst, .n_bands(cfg_q.n_bands), .qam(cfg_q.qam), .z_i, .z_q, .e, .z_valid,
    .bits, .nbits, .bits_valid
  );

  ber_counter #(.W(BITS_MAX)) u_es (
    .clk, .rst, .bits, .nbits, .bits_valid, .locked, .bit_count, .err_count, .relocks
  );

endmodule
