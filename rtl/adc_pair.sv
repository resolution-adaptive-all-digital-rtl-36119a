// adc_pair: behavioural model of the I/Q converter pair of one RF chain.
//
// This is a behavioural model of an analog part, not a circuit to be
// synthesized: in the real receiver these are two SAR ADCs. The analog I and
// Q inputs are represented here by SAMPLE_W-bit fixed-point samples.
//
// What it does: samples both inputs on the rising clock edge and applies the
// q-bit uniform midrise quantizer of the paper's eq. (2) with step Delta:
// the output level is Delta*(floor(y/Delta) + 1/2) inside the range and
// +/-Delta*(2^q - 1)/2 outside it. The code m = floor(y/Delta), clipped to
// [-2^(q-1), 2^(q-1)-1], is delivered as a two's complement number
// sign-extended to QM bits, meaning the level Delta*(m + 1/2).
//
// Interface and timing: q (1..QM) is the run-time resolution and delta the
// step size in sample LSBs, which the paper assigns to an automatic gain
// control circuit (an input here; 0 is treated as 1). With en low the pair is
// powered down and outputs code 0. Output registered, one cycle of latency.
// The quantizer law follows the paper; the sample format, clipping at exact
// range boundaries and the power-down code are this model's choices.
module adc_pair
  import ra_pkg::*;
#(
  parameter int unsigned SW = SAMPLE_W,
  parameter int unsigned QM = Q_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [3:0]           q,
  input  logic [SW-1:0]        delta,
  input  logic signed [SW-1:0] y_re,
  input  logic signed [SW-1:0] y_im,
  output logic [QM-1:0]        z_re,
  output logic [QM-1:0]        z_im
);

  function automatic logic [QM-1:0] quantize(input logic signed [SW-1:0] y,
                                             input logic [SW-1:0] d,
                                             input logic [3:0] bits);
    int yy, dd, m, lo, hi;
    yy = int'(y);
    dd = (d == 0) ? 1 : int'({1'b0, d});
    m  = yy / dd;                       // truncates toward zero
    if (yy < 0 && (yy % dd) != 0) m = m - 1;  // floor
    hi = (1 << (bits - 1)) - 1;
    lo = -(1 << (bits - 1));
    if (m > hi) m = hi;
    if (m < lo) m = lo;
    return QM'(m);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_re <= '0;
      z_im <= '0;
    end else if (en) begin
      z_re <= quantize(y_re, delta, q);
      z_im <= quantize(y_im, delta, q);
    end else begin
      z_re <= '0;
      z_im <= '0;
    end
  end

endmodule
