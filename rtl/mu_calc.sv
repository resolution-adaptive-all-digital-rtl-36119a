// mu_calc: post-equalization scaling factors mu_u = (x_u^H h_u)^-1.
//
// What it does: for each UE row of the finite-alphabet matrix, forms
// d = x~_u^H h~_u over the active antennas and produces the factor of the
// paper's eq. (4), in the mantissa/exponent form used by post_scaler, scaled
// so that estimates come out with F fractional bits:
//     mu' = 2^F / d = mant * 2^-e,  mant = conj(d) * 2^(p+F) / |d|^2,
// where 2^p <= max(|Re d|, |Im d|) < 2^(p+1). With that choice
// |mant| <= 2^F, so the mantissa fits F+2 bits (10 bits for F=8). Since h~
// carries HF fractional bits, d is 2^HF times the true inner product and the
// exponent is e = p - HF (clamped at 0; only a channel with |d| < 2^HF, i.e.
// a true inner product below one half-step, loses accuracy this way).
//
// How it works: the channel estimate h~ (in ADC half-steps, the same units as
// the received vector) is written per antenna into a buffer (h_we). The
// quantized row arrives as the stream of k-bit codes n from the FL-MMSE
// quantizer; each is expanded to the odd level x~ = 2n+1 and multiplied with
// the buffered h~ of its antenna, accumulating d (ACC). After the last entry,
// two restoring dividers (real, imaginary) run F+1 cycles (DIV) and the factor
// is written out with a one-cycle mu_we pulse (OUT). d = 0 gives a zero factor.
//
// Interface and timing: x_ready is low while dividing; a row takes its length
// plus F+3 cycles (mu_we F+3 cycles after the clock edge that takes the last entry). busy is high from the first entry of a row until mu_we.
// The formula follows the paper; number formats, the divider and the
// streaming organisation are this design's choices.
module mu_calc
  import ra_pkg::*;
#(
  parameter int unsigned B    = B_ANT,
  parameter int unsigned U    = U_MAX,
  parameter int unsigned KM   = K_MAX,
  parameter int unsigned HW   = H_W,
  parameter int unsigned MUW  = MU_W,
  parameter int unsigned EXPW = EXP_W,
  parameter int unsigned F    = OUT_FRAC,
  parameter int unsigned HF   = H_FRAC,
  localparam int unsigned UW  = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned BW  = (B > 1) ? $clog2(B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  h_we,
  input  logic [BW-1:0]         h_ant,
  input  logic signed [HW-1:0]  h_re,
  input  logic signed [HW-1:0]  h_im,
  input  logic                  x_valid,
  output logic                  x_ready,
  input  logic [UW-1:0]         x_ue,
  input  logic [BW-1:0]         x_ant,
  input  logic                  x_last,
  input  logic [KM-1:0]         x_nre,
  input  logic [KM-1:0]         x_nim,
  output logic                  mu_we,
  output logic [UW-1:0]         mu_ue,
  output logic signed [MUW-1:0] mu_mre,
  output logic signed [MUW-1:0] mu_mim,
  output logic [EXPW-1:0]       mu_exp,
  output logic                  busy
);

  localparam int unsigned DW = 32;   // inner-product accumulator
  localparam int unsigned NW = 80;   // divider width

  typedef enum logic [1:0] {ACC, SETUP, DIV, OUT} state_t;

  state_t state;
  logic signed [HW-1:0] hbuf_re [B], hbuf_im [B];
  logic signed [DW-1:0] dr, di;
  logic [NW-1:0] num_r, num_i, den;
  logic [MUW-1:0] qr, qi;
  logic [3:0] it;
  logic [5:0] p;
  logic started;
  logic signed [DW-1:0] xr, xi, hr, hi;

  function automatic logic [DW-1:0] absd(input logic signed [DW-1:0] v);
    return v[DW-1] ? DW'(-v) : DW'(v);
  endfunction

  function automatic logic [5:0] msb(input logic [DW-1:0] v);
    logic [5:0] r;
    r = '0;
    for (int i = 0; i < DW; i++) if (v[i]) r = 6'(i);
    return r;
  endfunction

  assign xr = DW'(2 * $signed(x_nre) + 1);
  assign xi = DW'(2 * $signed(x_nim) + 1);
  assign hr = DW'(hbuf_re[x_ant]);
  assign hi = DW'(hbuf_im[x_ant]);

  assign x_ready = (state == ACC);
  assign busy    = (state != ACC) || started;

  always_ff @(posedge clk) begin
    if (h_we) begin
      hbuf_re[h_ant] <= h_re;
      hbuf_im[h_ant] <= h_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ACC;
      started <= 1'b0;
      dr <= '0; di <= '0;
      num_r <= '0; num_i <= '0; den <= '0;
      qr <= '0; qi <= '0; it <= '0; p <= '0;
      mu_we <= 1'b0; mu_ue <= '0; mu_mre <= '0; mu_mim <= '0; mu_exp <= '0;
    end else begin
      mu_we <= 1'b0;
      unique case (state)
        ACC: if (x_valid) begin
          dr <= dr + xr * hr + xi * hi;
          di <= di + xr * hi - xi * hr;
          mu_ue   <= x_ue;
          started <= 1'b1;
          if (x_last) state <= SETUP;
        end
        SETUP: begin
          logic [DW-1:0] ar, ai;
          logic [5:0] pp;
          ar = absd(dr);
          ai = absd(di);
          pp = msb((ar > ai) ? ar : ai);
          p     <= pp;
          den   <= NW'(ar) * NW'(ar) + NW'(ai) * NW'(ai);
          num_r <= NW'(ar) << (pp + 6'(F));
          num_i <= NW'(ai) << (pp + 6'(F));
          qr <= '0; qi <= '0;
          it <= 4'(F);
          state <= DIV;
        end
        DIV: begin
          logic [NW-1:0] ds;
          ds = den << it;
          if (num_r >= ds) begin num_r <= num_r - ds; qr[it] <= 1'b1; end
          if (num_i >= ds) begin num_i <= num_i - ds; qi[it] <= 1'b1; end
          if (it == 0) state <= OUT;
          else it <= it - 1'b1;
        end
        OUT: begin
          mu_we   <= 1'b1;
          mu_mre  <= (den == 0) ? '0 : (dr[DW-1] ? -$signed(qr) : $signed(qr));
          mu_mim  <= (den == 0) ? '0 : (di[DW-1] ? $signed(qi) : -$signed(qi));
          mu_exp  <= (32'(p) > HF) ? EXPW'(32'(p) - HF) : '0;
          dr <= '0; di <= '0;
          started <= 1'b0;
          state   <= ACC;
        end
        default: state <= ACC;
      endcase
    end
  end

endmodule
