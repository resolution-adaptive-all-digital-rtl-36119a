// ppac_mvp: one processing-in-memory instance of the finite-alphabet equalizer.
//
// What it does: stores the finite-alphabet matrix X^H (U rows of B complex
// k-bit entries) in bit-cells and computes, for one received vector z of
// q-bit ADC codes, the exact complex inner products x_u^H z for all UEs.
//
// How it works: each entry x~ = 2n+1 is held as the k bits of n, one bit-cell
// per bit, separately for the real and imaginary part. The vector z enters
// bit-serially, one bit-plane of the ADC codes per clock cycle, LSB first, so
// a vector takes exactly q cycles (as the paper states for PPAC). In each
// cycle every bit-cell ANDs its stored bit with the plane bit of its antenna,
// each column of equal bit weight is counted (popcount over the antennas), and
// the column counts are combined with their two's complement weights (bit
// k-1 negative, bits k and above switched off). The paper's bit-cell count
// 4kB'U is met by evaluating the four real products Re x.Re z, Im x.Im z,
// Re x.Im z and Im x.Re z per UE; this design keeps one copy of the Re and
// Im bits and reads each copy twice, which is arithmetically the same.
// Because both operands are odd half-step levels,
//     sum_b x~_b (2 m_b + 1) = 2 sum_b x~_b m_b + sum_b x~_b,
// the bit-serial loop only accumulates the first term; the row sums
// R = sum_b x~_b over the active antennas are computed once by a calibration
// cycle ('cal', plane forced to the antenna mask) and added at the end.
// Inactive antennas (outside the B' mask) and inactive UE rows are gated off.
//
// Interface and timing: 'start' with z_re/z_im consumes plane 0 in the same
// cycle; planes 1..q-1 follow from an internal register; 'done' pulses in the
// cycle after plane q-1, with ip_re/ip_im valid from then until the next done.
// A new start is accepted in the cycle 'done' rises, so one instance takes a
// new vector every q cycles. x_we writes the two K_MAX-bit codes (sign-extended
// n) of one entry. cal must be issued after X, k or the masks change, while
// the instance is idle. 'en' is the instance enable used for power gating.
// The bit-serial scheme and the q-cycle latency follow the paper; the odd
// half-step arithmetic, row-sum calibration and handshake are this design's.
module ppac_mvp
  import ra_pkg::*;
#(
  parameter int unsigned B   = B_ANT,
  parameter int unsigned U   = U_MAX,
  parameter int unsigned KM  = K_MAX,
  parameter int unsigned QM  = Q_MAX,
  parameter int unsigned IPW = IP_W,
  localparam int unsigned UW = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned BW = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned QW = (QM > 1) ? $clog2(QM) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic [3:0]             cfg_k,
  input  logic [3:0]             cfg_q,
  input  logic [B-1:0]           ant_mask,
  input  logic [U-1:0]           ue_mask,
  input  logic                   x_we,
  input  logic [UW-1:0]          x_ue,
  input  logic [BW-1:0]          x_ant,
  input  logic [KM-1:0]          x_nre,
  input  logic [KM-1:0]          x_nim,
  input  logic                   cal,
  input  logic                   start,
  input  logic [QM-1:0]          z_re [B],
  input  logic [QM-1:0]          z_im [B],
  output logic                   busy,
  output logic                   done,
  output logic signed [IPW-1:0]  ip_re [U],
  output logic signed [IPW-1:0]  ip_im [U]
);

  // bit-cell storage: xr[u][j][b] is bit j of n_re for UE u, antenna b
  logic [KM-1:0][B-1:0] xr [U];
  logic [KM-1:0][B-1:0] xi [U];

  // z bit-planes held while the vector is processed
  logic [QM-1:0][B-1:0] zr_reg, zi_reg, zr_in, zi_in;

  logic [3:0] cnt, t;
  logic [B-1:0] g_r, g_i;
  logic signed [IPW-1:0] acc_re [U], acc_im [U];
  logic signed [IPW-1:0] rs_re [U], rs_im [U];
  logic signed [IPW-1:0] pa [U], pb [U], pc [U], pd [U];
  logic signed [IPW-1:0] nxt_re [U], nxt_im [U];
  logic last;

  // sum_b x~_b g_b = 2 sum_j w_j popcount(col_j & g) + popcount(g)
  function automatic logic signed [IPW-1:0] colsum(input logic [KM-1:0][B-1:0] cols,
                                                   input logic [B-1:0] g,
                                                   input int unsigned k);
    int s;
    s = 0;
    for (int unsigned j = 0; j < KM; j++)
      s += plane_weight(j, k) * $countones(cols[j] & g);
    return IPW'(2 * s + $countones(g));
  endfunction

  always_comb begin
    for (int unsigned b = 0; b < B; b++)
      for (int unsigned p = 0; p < QM; p++) begin
        zr_in[p][b] = z_re[b][p];
        zi_in[p][b] = z_im[b][p];
      end
  end

  assign t    = start ? 4'd0 : cnt;
  assign last = (t + 4'd1 >= cfg_q);
  assign g_r  = (cal ? ant_mask : (start ? zr_in[0] : zr_reg[cnt[QW-1:0]])) & ant_mask;
  assign g_i  = (cal ? ant_mask : (start ? zi_in[0] : zi_reg[cnt[QW-1:0]])) & ant_mask;

  always_comb begin
    logic signed [IPW-1:0] w;
    w = IPW'(plane_weight(32'(t), 32'(cfg_q)));
    for (int unsigned u = 0; u < U; u++) begin
      if (ue_mask[u]) begin
        pa[u] = colsum(xr[u], g_r, 32'(cfg_k));
        pb[u] = colsum(xi[u], g_i, 32'(cfg_k));
        pc[u] = colsum(xr[u], g_i, 32'(cfg_k));
        pd[u] = colsum(xi[u], g_r, 32'(cfg_k));
      end else begin
        pa[u] = '0; pb[u] = '0; pc[u] = '0; pd[u] = '0;
      end
      nxt_re[u] = (start ? IPW'(0) : acc_re[u]) + w * (pa[u] + pb[u]);
      nxt_im[u] = (start ? IPW'(0) : acc_im[u]) + w * (pc[u] - pd[u]);
    end
  end

  always_ff @(posedge clk) begin
    if (x_we) begin
      for (int unsigned j = 0; j < KM; j++) begin
        xr[x_ue][j][x_ant] <= x_nre[j];
        xi[x_ue][j][x_ant] <= x_nim[j];
      end
    end
    if (en && start) begin
      zr_reg <= zr_in;
      zi_reg <= zi_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      for (int unsigned u = 0; u < U; u++) begin
        acc_re[u] <= '0; acc_im[u] <= '0;
        rs_re[u]  <= '0; rs_im[u]  <= '0;
        ip_re[u]  <= '0; ip_im[u]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (en && cal) begin
        for (int unsigned u = 0; u < U; u++) begin
          rs_re[u] <= pa[u];
          rs_im[u] <= pb[u];
        end
      end else if (en && (start || busy)) begin
        if (last) begin
          for (int unsigned u = 0; u < U; u++) begin
            ip_re[u] <= 2 * nxt_re[u] + rs_re[u] + rs_im[u];
            ip_im[u] <= 2 * nxt_im[u] + rs_re[u] - rs_im[u];
          end
          done <= 1'b1;
          busy <= 1'b0;
          cnt  <= '0;
        end else begin
          for (int unsigned u = 0; u < U; u++) begin
            acc_re[u] <= nxt_re[u];
            acc_im[u] <= nxt_im[u];
          end
          busy <= 1'b1;
          cnt  <= t + 4'd1;
        end
      end
    end
  end

  // a vector may only enter an idle instance, and never during calibration
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_cal_idle:   assert property (@(posedge clk) disable iff (!rst_n) cal |-> !(start || busy));

endmodule
