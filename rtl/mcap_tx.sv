// mcap_tx: the transmitter FPGA of the demonstrator (USRP-RIO 2953 in the
// paper). Chain, as in the system diagram: data source (prbs_gen) -> M-QAM
// mapper -> upsampler (UP) -> p(n)/p'(n) shaping filters -> summing node ->
// DAC samples. A frame sequencer (tx_framer) inserts the Schmidl and Cox
// preamble and pilot symbols that the receiver needs.
//
// One DAC sample is produced per clock. The configuration (band count m,
// constellation, output scaling) is captured while rst is high; changing it
// therefore means a reset, i.e. a short interruption of service, which is how
// the paper describes real-time format changes. Shaping coefficients are
// written through coef_wr at any time (normally during reset).
//
// Latency: the first payload sample leaves dac directly after the last
// preamble sample; frames are back to back.
module mcap_tx
  import mcap_pkg::*;
#(
  parameter int unsigned NPILOT   = 8,
  parameter int unsigned NDATA    = 256,
  parameter int unsigned PRE_HALF = 64,
  parameter int signed   PRE_AMP  = 8192
) (
  input  logic       clk,
  input  logic       rst,
  input  mcap_cfg_t  cfg,
  input  coef_wr_t   coef_wr,
  output smp_t       dac,
  output logic [15:0] frames
);

  localparam int unsigned BO_W  = 26;
  localparam int unsigned SYM_W = 12;
  localparam int unsigned NSYM  = NPILOT + NDATA + SPAN - 1;

  mcap_cfg_t cfg_q;
  always_ff @(posedge clk)
    if (rst) cfg_q <= cfg;

  logic up_start, up_done, up_active, sym_stb, pre_sel;
  logic [4:0] phase;
  logic [SYM_W-1:0] sym_idx;
  smp_t pre_smp;

  tx_framer #(.PRE_HALF(PRE_HALF), .PRE_AMP(PRE_AMP)) u_framer (
    .clk, .rst, .up_done, .up_start, .pre_sel, .pre_smp, .frames
  );

  upsampler #(.SYM_W(SYM_W)) u_up (
    .clk, .rst, .n_bands(cfg_q.n_bands), .start(up_start), .n_sym(SYM_W'(NSYM)),
    .active(up_active), .phase, .sym_stb, .sym_idx, .done(up_done)
  );

  // Symbol source for this symbol period: pilots, PRBS data or flush zeros.
  logic is_pilot, is_data;
  logic [BITS_MAX-1:0] bits;
  logic [$clog2(BITS_MAX+1)-1:0] nbits;
  lvl_t map_i [M_MAX], map_q [M_MAX], lvl_i [M_MAX], lvl_q [M_MAX];

  assign is_pilot = sym_idx < SYM_W'(NPILOT);
  assign is_data  = !is_pilot && sym_idx < SYM_W'(NPILOT + NDATA);
  assign nbits    = $bits(nbits)'(int'(cfg_q.n_bands) * bits_per_sym(cfg_q.qam));

  prbs_gen #(.W(BITS_MAX)) u_ds (
    .clk, .rst, .req(up_active && sym_stb && is_data), .nbits, .bits
  );

  qam_mapper #(.M(M_MAX)) u_map (
    .n_bands(cfg_q.n_bands), .qam(cfg_q.qam), .bits, .lvl_i(map_i), .lvl_q(map_q)
  );

  always_comb
    for (int b = 0; b < int'(M_MAX); b++) begin
      if (is_data) begin
        lvl_i[b] = map_i[b];
        lvl_q[b] = map_q[b];
      end else if (is_pilot && b < int'(cfg_q.n_bands)) begin
        lvl_i[b] = lvl_t'(1);
        lvl_q[b] = lvl_t'(1);
      end else begin
        lvl_i[b] = '0;
        lvl_q[b] = '0;
      end
    end

  logic signed [BO_W-1:0] band_out [M_MAX];

  cap_tx_filter #(.M(M_MAX), .NT(SPAN), .NP(N_MAX), .BO_W(BO_W)) u_shape (
    .clk, .rst, .coef_wr, .active(up_active), .phase, .sym_stb, .lvl_i, .lvl_q, .band_out
  );

  // The shaping filter has two cycles of latency; delay the preamble to match.
  logic [1:0] pre_sel_d;
  smp_t       pre_smp_d [2];
  always_ff @(posedge clk) begin
    if (rst) begin
      pre_sel_d <= '0;
      pre_smp_d[0] <= '0;
      pre_smp_d[1] <= '0;
    end else begin
      pre_sel_d    <= {pre_sel_d[0], pre_sel};
      pre_smp_d[0] <= pre_smp;
      pre_smp_d[1] <= pre_smp_d[0];
    end
  end

  band_sum #(.M(M_MAX), .BO_W(BO_W)) u_sum (
    .clk, .rst, .tx_shift(cfg_q.tx_shift), .band_in(band_out),
    .pre_sel(pre_sel_d[1]), .pre_smp(pre_smp_d[1]), .dac
  );

endmodule
