// fa_equalizer: resolution-adaptive finite-alphabet spatial equalizer.
//
// What it does: computes s_u = mu_u x_u^H z for every active UE and every
// received vector z, at a sustained rate of one vector per clock cycle for
// any ADC resolution q.
//
// How it works: one PPAC instance (ppac_mvp) needs q cycles per vector, so
// N_PPAC = Q_MAX instances are time-interleaved and only the first q of them
// are enabled; the others are held idle, which is how the paper's equalizer
// power grows in proportion to q. Incoming vectors are dealt round-robin over
// the q enabled instances. All instances hold the same X^H (the write port is
// broadcast). Since every instance takes exactly q cycles and receives at most
// one vector every q cycles, at most one instance finishes per cycle and
// results leave in arrival order; the finished instance's inner products go
// to the shared post-equalization scaling (post_scaler).
//
// Interface and timing: z_valid with z_re/z_im (sign-extended q-bit ADC codes
// per antenna) is always accepted; the caller holds z_valid low while the
// configuration, X^H or the scaling factors change (the controller does
// this). s_valid follows z_valid after q+1 cycles. 'cal' (idle only) refreshes
// the row sums of every instance and restarts the round-robin. 'idle' is high
// when no vector is in flight. Time interleaving and its dependence on q
// follow the paper; the round-robin dispatch is this design's choice.
module fa_equalizer
  import ra_pkg::*;
#(
  parameter int unsigned B    = B_ANT,
  parameter int unsigned U    = U_MAX,
  parameter int unsigned KM   = K_MAX,
  parameter int unsigned QM   = Q_MAX,
  parameter int unsigned NP   = QM,
  parameter int unsigned IPW  = IP_W,
  parameter int unsigned MUW  = MU_W,
  parameter int unsigned EXPW = EXP_W,
  parameter int unsigned OW   = OUT_W,
  localparam int unsigned UW  = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned BW  = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [3:0]            cfg_q,
  input  logic [3:0]            cfg_k,
  input  logic [B-1:0]          ant_mask,
  input  logic [U-1:0]          ue_mask,
  input  logic                  cal,
  input  logic                  x_we,
  input  logic [UW-1:0]         x_ue,
  input  logic [BW-1:0]         x_ant,
  input  logic [KM-1:0]         x_nre,
  input  logic [KM-1:0]         x_nim,
  input  logic                  mu_we,
  input  logic [UW-1:0]         mu_ue,
  input  logic signed [MUW-1:0] mu_mre,
  input  logic signed [MUW-1:0] mu_mim,
  input  logic [EXPW-1:0]       mu_exp,
  input  logic                  z_valid,
  input  logic [QM-1:0]         z_re [B],
  input  logic [QM-1:0]         z_im [B],
  output logic                  idle,
  output logic [NP-1:0]         ppac_en,
  output logic                  s_valid,
  output logic signed [OW-1:0]  s_re [U],
  output logic signed [OW-1:0]  s_im [U]
);

  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;

  logic [NP-1:0] start, busy, done;
  logic signed [IPW-1:0] ip_re [NP][U];
  logic signed [IPW-1:0] ip_im [NP][U];
  logic signed [IPW-1:0] sel_re [U], sel_im [U];
  logic [PW-1:0] ptr;

  always_comb begin
    for (int unsigned i = 0; i < NP; i++) ppac_en[i] = (i < 32'(cfg_q));
  end

  always_comb begin
    start = '0;
    if (z_valid) start[ptr] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (cal) ptr <= '0;
    else if (z_valid) ptr <= (32'(ptr) + 1 >= 32'(cfg_q)) ? '0 : ptr + 1'b1;
  end

  for (genvar i = 0; i < NP; i++) begin : g_ppac
    ppac_mvp #(.B(B), .U(U), .KM(KM), .QM(QM), .IPW(IPW)) u_ppac (
      .clk, .rst_n,
      .en(ppac_en[i]), .cfg_k, .cfg_q, .ant_mask, .ue_mask,
      .x_we, .x_ue, .x_ant, .x_nre, .x_nim,
      .cal, .start(start[i]), .z_re, .z_im,
      .busy(busy[i]), .done(done[i]),
      .ip_re(ip_re[i]), .ip_im(ip_im[i])
    );
  end

  always_comb begin
    for (int unsigned u = 0; u < U; u++) begin
      sel_re[u] = '0;
      sel_im[u] = '0;
    end
    for (int unsigned i = 0; i < NP; i++) begin
      if (done[i]) begin
        for (int unsigned u = 0; u < U; u++) begin
          sel_re[u] = ip_re[i][u];
          sel_im[u] = ip_im[i][u];
        end
      end
    end
  end

  post_scaler #(.U(U), .IPW(IPW), .MUW(MUW), .EXPW(EXPW), .OW(OW)) u_scale (
    .clk, .rst_n, .ue_mask,
    .mu_we, .mu_ue, .mu_mre, .mu_mim, .mu_exp,
    .in_valid(|done), .ip_re(sel_re), .ip_im(sel_im),
    .out_valid(s_valid), .s_re, .s_im
  );

  assign idle = !(|busy) && !(|done);

  a_one_done:  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(done));
  a_free_inst: assert property (@(posedge clk) disable iff (!rst_n) z_valid |-> !busy[ptr]);
  a_cal_idle:  assert property (@(posedge clk) disable iff (!rst_n) cal |-> (idle && !z_valid));

endmodule
