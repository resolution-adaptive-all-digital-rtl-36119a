// ra_ctrl: the controller (CTRL) that sets the operating point of the
// resolution-adaptive receiver.
//
// What it does: holds the operating point chosen for the current scenario,
// namely ADC bits q, equalizer bits k, active antennas B' and UE load U, and
// drives it into the ADC array and the equalizer: the ADC pairs of the B'
// contiguous antennas at the centre of the array are enabled (as in the
// paper), q PPAC instances, k bit-cell columns and U equalizer rows are used.
//
// How it works: a new operating point written on cfg_* is held pending. The
// receive stream is stalled (stall=1) in three cases: a pending operating
// point, a recalibration request, or a matrix update in progress (upd_busy).
// The controller then waits until the equalizer is drained (DRAIN), lets
// matrix and scaling-factor writes through (HOLD, x_wr_allow=1) until
// upd_busy falls, installs the pending point (APPLY), issues one calibration
// cycle (CAL, cal=1) so the PPAC row sums match the new X, k and antenna mask, and
// resumes (RUN). Out-of-range requests are clamped to the supported range.
// Which operating point to choose is decided outside (the paper finds it from
// a Pareto search over simulations); this block only applies it.
//
// Interface and timing: cfg_we is a one-cycle write strobe. tgt_k is the most
// recently written k, used to requantize X before it is installed. The reset
// point is the paper's worst case (q=7, k=6, all antennas, 64 UEs). The
// handshake and state sequence are this design's choices.
module ra_ctrl
  import ra_pkg::*;
#(
  parameter int unsigned B  = B_ANT,
  parameter int unsigned U  = U_MAX,
  parameter int unsigned QM = Q_MAX,
  parameter int unsigned KM = K_MAX,
  localparam int unsigned BCW = $clog2(B + 1),
  localparam int unsigned UCW = $clog2(U + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_we,
  input  logic [3:0]     cfg_q,
  input  logic [3:0]     cfg_k,
  input  logic [BCW-1:0] cfg_bact,
  input  logic [UCW-1:0] cfg_u,
  input  logic           recal_req,
  input  logic           upd_busy,
  input  logic           eq_idle,
  output logic [3:0]     act_q,
  output logic [3:0]     act_k,
  output logic [BCW-1:0] act_bact,
  output logic [UCW-1:0] act_u,
  output logic [3:0]     tgt_k,
  output logic [B-1:0]   ant_mask,
  output logic [U-1:0]   ue_mask,
  output logic           stall,
  output logic           x_wr_allow,
  output logic           cal
);

  typedef enum logic [2:0] {RUN, DRAIN, HOLD, APPLY, CAL} state_t;
  typedef struct packed {
    logic [3:0]     q;
    logic [3:0]     k;
    logic [BCW-1:0] bact;
    logic [UCW-1:0] u;
  } opp_t;

  state_t state;
  opp_t   act, pend;
  logic   pend_v, recal_v;
  logic [BCW-1:0] first_ant;

  function automatic opp_t clamp(input logic [3:0] q, input logic [3:0] k,
                                 input logic [BCW-1:0] b, input logic [UCW-1:0] u);
    opp_t o;
    o.q    = (q == 0) ? 4'd1 : ((32'(q) > QM) ? 4'(QM) : q);
    o.k    = (k == 0) ? 4'd1 : ((32'(k) > KM) ? 4'(KM) : k);
    o.bact = (b == 0) ? BCW'(1) : ((32'(b) > B) ? BCW'(B) : b);
    o.u    = (u == 0) ? UCW'(1) : ((32'(u) > U) ? UCW'(U) : u);
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= CAL;     // calibrate once after reset
      act     <= '{q: 4'(RESET_Q), k: 4'(RESET_K), bact: BCW'(B), u: UCW'(U)};
      pend    <= '{q: 4'(RESET_Q), k: 4'(RESET_K), bact: BCW'(B), u: UCW'(U)};
      pend_v  <= 1'b0;
      recal_v <= 1'b0;
    end else begin
      if (cfg_we) begin
        pend   <= clamp(cfg_q, cfg_k, cfg_bact, cfg_u);
        pend_v <= 1'b1;
      end
      if (recal_req) recal_v <= 1'b1;
      unique case (state)
        RUN:   if (pend_v || recal_v || upd_busy) state <= DRAIN;
        DRAIN: if (eq_idle) state <= HOLD;
        HOLD:  if (!upd_busy) state <= APPLY;
        APPLY: begin
          if (pend_v) act <= pend;
          if (!cfg_we) pend_v <= 1'b0;     // a write in this cycle stays pending
          if (!recal_req) recal_v <= 1'b0;
          state <= CAL;
        end
        CAL:   state <= RUN;
        default: state <= RUN;
      endcase
    end
  end

  assign act_q      = act.q;
  assign act_k      = act.k;
  assign act_bact   = act.bact;
  assign act_u      = act.u;
  assign tgt_k      = pend.k;
  assign stall      = (state != RUN) || pend_v || recal_v || upd_busy;
  assign x_wr_allow = (state == HOLD);
  assign cal        = (state == CAL);

  // B' contiguous antennas centred in the array: indices first..first+B'-1
  assign first_ant = BCW'((B - 32'(act.bact)) / 2);
  always_comb begin
    for (int unsigned b = 0; b < B; b++)
      ant_mask[b] = (b >= 32'(first_ant)) && (b < 32'(first_ant) + 32'(act.bact));
    for (int unsigned u = 0; u < U; u++)
      ue_mask[u] = (u < 32'(act.u));
  end

endmodule
