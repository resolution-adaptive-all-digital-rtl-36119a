// post_scaler: post-equalization scaling s_u = mu_u * (x_u^H z) for all UEs.
//
// What it does: holds one complex scaling factor per UE and multiplies each
// UE's exact inner product by it, giving the unbiased estimate of eq. (5) of
// the finite-alphabet equalizer with OUT_FRAC fractional bits.
//
// How it works: a factor is a complex mantissa (MU_W bits per part, 10 bits by
// default as in the paper's example) and a right-shift exponent e, so that
// s = round((ip * mant) / 2^e). The complex product is formed at full
// precision, rounded half-up at bit e, and saturated to OUT_W bits. Rows of
// inactive UEs give zero.
//
// Interface and timing: mu_we writes the factor of UE mu_ue (takes effect the
// next cycle); factors reset to zero. A valid inner-product set at in_valid
// appears scaled on s_re/s_im one cycle later with out_valid. The
// mantissa/exponent format is this design's choice; the paper gives only the
// multiplication and the 10-bit example width.
module post_scaler
  import ra_pkg::*;
#(
  parameter int unsigned U    = U_MAX,
  parameter int unsigned IPW  = IP_W,
  parameter int unsigned MUW  = MU_W,
  parameter int unsigned EXPW = EXP_W,
  parameter int unsigned OW   = OUT_W,
  localparam int unsigned UW  = (U > 1) ? $clog2(U) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [U-1:0]          ue_mask,
  input  logic                  mu_we,
  input  logic [UW-1:0]         mu_ue,
  input  logic signed [MUW-1:0] mu_mre,
  input  logic signed [MUW-1:0] mu_mim,
  input  logic [EXPW-1:0]       mu_exp,
  input  logic                  in_valid,
  input  logic signed [IPW-1:0] ip_re [U],
  input  logic signed [IPW-1:0] ip_im [U],
  output logic                  out_valid,
  output logic signed [OW-1:0]  s_re [U],
  output logic signed [OW-1:0]  s_im [U]
);

  typedef struct packed {
    logic signed [MUW-1:0] mre;
    logic signed [MUW-1:0] mim;
    logic [EXPW-1:0]       e;
  } mu_t;

  mu_t mu [U];
  logic signed [OW-1:0] nr [U], ni [U];

  function automatic logic signed [OW-1:0] scale(input logic signed [63:0] p,
                                                 input logic [EXPW-1:0] e);
    logic signed [63:0] r;
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (OW - 1)) - 1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (OW - 1));
    r = (e == 0) ? p : ((p + (64'sd1 <<< (e - 1))) >>> e);
    if (r > MAXV)      return OW'(MAXV);
    else if (r < MINV) return OW'(MINV);
    else               return OW'(r);
  endfunction

  always_comb begin
    for (int unsigned u = 0; u < U; u++) begin
      logic signed [63:0] pr, pi;
      pr = 64'(ip_re[u]) * 64'(mu[u].mre) - 64'(ip_im[u]) * 64'(mu[u].mim);
      pi = 64'(ip_re[u]) * 64'(mu[u].mim) + 64'(ip_im[u]) * 64'(mu[u].mre);
      nr[u] = ue_mask[u] ? scale(pr, mu[u].e) : '0;
      ni[u] = ue_mask[u] ? scale(pi, mu[u].e) : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int unsigned u = 0; u < U; u++) begin
        mu[u] <= '0;
        s_re[u] <= '0;
        s_im[u] <= '0;
      end
    end else begin
      if (mu_we) mu[mu_ue] <= '{mre: mu_mre, mim: mu_mim, e: mu_exp};
      out_valid <= in_valid;
      if (in_valid) begin
        for (int unsigned u = 0; u < U; u++) begin
          s_re[u] <= nr[u];
          s_im[u] <= ni[u];
        end
      end
    end
  end

endmodule
