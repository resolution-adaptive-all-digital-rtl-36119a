// ra_bs_top: resolution-adaptive all-digital baseband of a massive MU-MIMO
// basestation: ADC array, controller and finite-alphabet spatial equalizer.
//
// What it does: takes the I/Q baseband samples of all B antennas, quantizes
// those of the B' active antennas with q-bit ADCs, and equalizes every
// received vector into U per-UE symbol estimates s_u = mu_u x_u^H z using a
// k-bit finite-alphabet matrix X^H. q, k, B' and U are set at run time by the
// controller, so power can follow the number of UEs, the modulation and the
// channel. Beside it, the preprocessing path quantizes each L-MMSE row w_u
// into x_u (FL-MMSE) and derives the scaling factor mu_u from x_u and the
// channel estimate h_u.
//
// Structure (the block diagram of the paper: RF chains -> ADC pairs -> bus ->
// CHEST and Equalizer, with CTRL setting RF, ADCs and Equalizer):
//   adc_pair x B        I/Q converters, enabled by the antenna mask
//   ra_ctrl             operating point, stall/drain/calibrate sequence
//   flmmse_quantizer    w_u -> x_u (k-bit codes)
//   mu_calc             x_u, h_u -> mu_u
//   fa_equalizer        q time-interleaved PPAC instances + scaling
// The RF chains, the channel estimator (CHEST) and the L-MMSE matrix
// computation are outside: their outputs are the ports y_*, h_* and w_*.
//
// Interface and timing: y_valid with y_re/y_im is accepted when in_ready is
// high; s_valid follows q+2 cycles later with the estimates of UEs 0..U-1
// (others zero). A new operating point is written with cfg_we. A new matrix is
// loaded by raising chan_update, streaming for each UE u the u-th column of W
// (the conjugate of row u of W^H) and of the channel estimate H, in ADC
// half-steps with H_FRAC fractional bits, as (w, h, antenna index)
// entries with w_last on its final entry (valid/ready), then lowering
// chan_update; reception stalls meanwhile and resumes after recalibration.
// ant_mask and ppac_en report which antennas and PPAC instances are powered.
module ra_bs_top
  import ra_pkg::*;
#(
  parameter int unsigned B   = B_ANT,
  parameter int unsigned U   = U_MAX,
  parameter int unsigned QM  = Q_MAX,
  parameter int unsigned KM  = K_MAX,
  parameter int unsigned SW  = SAMPLE_W,
  parameter int unsigned WW  = W_W,
  parameter int unsigned HW  = H_W,
  parameter int unsigned OW  = OUT_W,
  localparam int unsigned UW  = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned BW  = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned BCW = $clog2(B + 1),
  localparam int unsigned UCW = $clog2(U + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // operating point
  input  logic                 cfg_we,
  input  logic [3:0]           cfg_q,
  input  logic [3:0]           cfg_k,
  input  logic [BCW-1:0]       cfg_bact,
  input  logic [UCW-1:0]       cfg_u,
  input  logic                 recal_req,
  output logic [3:0]           act_q,
  output logic [3:0]           act_k,
  output logic [BCW-1:0]       act_bact,
  output logic [UCW-1:0]       act_u,
  output logic [B-1:0]         ant_mask,
  output logic [QM-1:0]        ppac_en,
  // RF chain outputs and gain control
  input  logic [SW-1:0]        adc_delta,
  input  logic                 y_valid,
  output logic                 in_ready,
  input  logic signed [SW-1:0] y_re [B],
  input  logic signed [SW-1:0] y_im [B],
  // matrix update from the channel estimator / L-MMSE preprocessing
  input  logic                 chan_update,
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic [UW-1:0]        w_ue,
  input  logic [BW-1:0]        w_ant,
  input  logic                 w_last,
  input  logic signed [WW-1:0] w_re,
  input  logic signed [WW-1:0] w_im,
  input  logic signed [HW-1:0] h_re,
  input  logic signed [HW-1:0] h_im,
  // equalized estimates
  output logic                 s_valid,
  output logic signed [OW-1:0] s_re [U],
  output logic signed [OW-1:0] s_im [U]
);

  logic [3:0]    tgt_k;
  logic [U-1:0]  ue_mask;
  logic          stall, x_wr_allow, cal, eq_idle, adc_v;
  logic [QM-1:0] z_re [B], z_im [B];

  logic          qz_valid, qz_ready, qz_last, mu_x_ready, q_busy, m_busy;
  logic [UW-1:0] qz_ue;
  logic [BW-1:0] qz_ant;
  logic [KM-1:0] qz_nre, qz_nim;

  logic                     mu_we;
  logic [UW-1:0]            mu_ue;
  logic signed [MU_W-1:0]   mu_mre, mu_mim;
  logic [EXP_W-1:0]         mu_exp;

  ra_ctrl #(.B(B), .U(U), .QM(QM), .KM(KM)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_q, .cfg_k, .cfg_bact, .cfg_u, .recal_req,
    .upd_busy(chan_update || q_busy || m_busy),
    .eq_idle(eq_idle && !adc_v),
    .act_q, .act_k, .act_bact, .act_u, .tgt_k,
    .ant_mask, .ue_mask, .stall, .x_wr_allow, .cal
  );

  assign in_ready = !stall;

  for (genvar b = 0; b < B; b++) begin : g_adc
    adc_pair #(.SW(SW), .QM(QM)) u_adc (
      .clk, .rst_n, .en(ant_mask[b]), .q(act_q), .delta(adc_delta),
      .y_re(y_re[b]), .y_im(y_im[b]), .z_re(z_re[b]), .z_im(z_im[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) adc_v <= 1'b0;
    else        adc_v <= y_valid && in_ready;
  end

  flmmse_quantizer #(.B(B), .U(U), .KM(KM), .WW(WW)) u_quant (
    .clk, .rst_n, .k(tgt_k),
    .in_valid(w_valid), .in_ready(w_ready), .in_ue(w_ue), .in_ant(w_ant),
    .in_last(w_last), .w_re, .w_im,
    .out_valid(qz_valid), .out_ready(qz_ready), .out_ue(qz_ue), .out_ant(qz_ant),
    .out_last(qz_last), .out_nre(qz_nre), .out_nim(qz_nim), .busy(q_busy)
  );

  assign qz_ready = x_wr_allow && mu_x_ready;

  mu_calc #(.B(B), .U(U), .KM(KM), .HW(HW)) u_mu (
    .clk, .rst_n,
    .h_we(w_valid && w_ready), .h_ant(w_ant), .h_re, .h_im,
    .x_valid(qz_valid && x_wr_allow), .x_ready(mu_x_ready), .x_ue(qz_ue),
    .x_ant(qz_ant), .x_last(qz_last), .x_nre(qz_nre), .x_nim(qz_nim),
    .mu_we, .mu_ue, .mu_mre, .mu_mim, .mu_exp, .busy(m_busy)
  );

  fa_equalizer #(.B(B), .U(U), .KM(KM), .QM(QM), .OW(OW)) u_eq (
    .clk, .rst_n,
    .cfg_q(act_q), .cfg_k(act_k), .ant_mask, .ue_mask, .cal,
    .x_we(qz_valid && qz_ready), .x_ue(qz_ue), .x_ant(qz_ant),
    .x_nre(qz_nre), .x_nim(qz_nim),
    .mu_we, .mu_ue, .mu_mre, .mu_mim, .mu_exp,
    .z_valid(adc_v), .z_re, .z_im,
    .idle(eq_idle), .ppac_en, .s_valid, .s_re, .s_im
  );

endmodule
