// flmmse_quantizer: finite-alphabet L-MMSE (FL-MMSE) quantization of the
// equalization matrix, one UE row at a time.
//
// What it does: turns a row w_u of the L-MMSE matrix W^H into the k-bit row
// x_u of the finite-alphabet matrix X^H, as the paper prescribes: each real
// and imaginary part is passed through the k-bit midrise quantizer of eq. (2)
// with step Delta = ||w_u||_inf~ * 2^(1-k), where ||.||_inf~ is the largest
// magnitude of any real or imaginary part in the row. The code
// n = floor(w / Delta) = floor(w * 2^(k-1) / ||w_u||_inf~), clipped to
// [-2^(k-1), 2^(k-1)-1], stands for the level Delta*(n + 1/2).
//
// Convention: the equalizer forms x_u^H z with x_u stored as given, so the
// row to send is the u-th column of W, i.e. the conjugate of the u-th row of
// W^H (quantization commutes with conjugation for this symmetric quantizer).
//
// How it works: the row (entries of the B' active antennas, any order, each
// tagged with its antenna index) is written into a row buffer while the
// running maximum is tracked (FILL). After the entry marked in_last the
// buffer is replayed (EMIT): each entry is divided by the row maximum with a
// combinational divider and emitted with its antenna index. The quantizer
// takes no new row while it emits (in_ready low). An all-zero row gives n=0.
//
// Interface and timing: valid/ready handshakes on both sides; one entry per
// cycle in and out. Output codes are sign-extended to KM bits. busy is high
// from the first entry of a row until its last output. The quantization rule
// follows the paper; the two-pass row buffer, the divider and the all-zero
// rule are this design's choices (the paper does not describe preprocessing
// hardware).
module flmmse_quantizer
  import ra_pkg::*;
#(
  parameter int unsigned B  = B_ANT,
  parameter int unsigned U  = U_MAX,
  parameter int unsigned KM = K_MAX,
  parameter int unsigned WW = W_W,
  localparam int unsigned UW = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned BW = (B > 1) ? $clog2(B) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0]           k,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [UW-1:0]        in_ue,
  input  logic [BW-1:0]        in_ant,
  input  logic                 in_last,
  input  logic signed [WW-1:0] w_re,
  input  logic signed [WW-1:0] w_im,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [UW-1:0]        out_ue,
  output logic [BW-1:0]        out_ant,
  output logic                 out_last,
  output logic [KM-1:0]        out_nre,
  output logic [KM-1:0]        out_nim,
  output logic                 busy
);

  typedef struct packed {
    logic [BW-1:0]        ant;
    logic signed [WW-1:0] re;
    logic signed [WW-1:0] im;
  } entry_t;

  typedef enum logic {FILL, EMIT} state_t;

  state_t state;
  entry_t rowbuf [B];
  logic [BW:0] cnt, rd;
  logic [WW:0] maxabs, max_nxt;
  logic [UW-1:0] ue;
  entry_t cur;

  function automatic logic [WW:0] absv(input logic signed [WW-1:0] v);
    return v[WW-1] ? (WW+1)'(-$signed({v[WW-1], v})) : {1'b0, v};
  endfunction

  function automatic logic [KM-1:0] quant(input logic signed [WW-1:0] w,
                                          input logic [WW:0] m,
                                          input logic [3:0] kb);
    int a, qf, r, n, lo, hi;
    if (m == 0) return '0;
    a  = int'(absv(w)) << (kb - 1);
    qf = a / int'(m);
    r  = a % int'(m);
    n  = w[WW-1] ? -(qf + ((r != 0) ? 1 : 0)) : qf;
    hi = (1 << (kb - 1)) - 1;
    lo = -(1 << (kb - 1));
    if (n > hi) n = hi;
    if (n < lo) n = lo;
    return KM'(n);
  endfunction

  always_comb begin
    logic [WW:0] ar, ai;
    ar = absv(w_re);
    ai = absv(w_im);
    max_nxt = maxabs;
    if (ar > max_nxt) max_nxt = ar;
    if (ai > max_nxt) max_nxt = ai;
  end

  assign in_ready  = (state == FILL);
  assign cur       = rowbuf[rd[BW-1:0]];
  assign out_valid = (state == EMIT);
  assign out_ue    = ue;
  assign out_ant   = cur.ant;
  assign out_last  = (rd + 1'b1 == cnt);
  assign out_nre   = quant(cur.re, maxabs, k);
  assign out_nim   = quant(cur.im, maxabs, k);
  assign busy      = (state == EMIT) || (cnt != 0);

  always_ff @(posedge clk) begin
    if (state == FILL && in_valid) rowbuf[cnt[BW-1:0]] <= '{ant: in_ant, re: w_re, im: w_im};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= FILL;
      cnt    <= '0;
      rd     <= '0;
      maxabs <= '0;
      ue     <= '0;
    end else begin
      unique case (state)
        FILL: if (in_valid) begin
          cnt    <= cnt + 1'b1;
          maxabs <= max_nxt;
          ue     <= in_ue;
          if (in_last || cnt + 1'b1 == (BW+1)'(B)) begin
            state <= EMIT;
            rd    <= '0;
          end
        end
        EMIT: if (out_ready) begin
          if (out_last) begin
            state  <= FILL;
            cnt    <= '0;
            maxabs <= '0;
          end
          rd <= rd + 1'b1;
        end
        default: state <= FILL;
      endcase
    end
  end

endmodule
