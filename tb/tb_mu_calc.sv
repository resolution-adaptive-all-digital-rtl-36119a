// tb_mu_calc: self-checking test of the scaling-factor computation.
//
// Writes a random channel-estimate row, streams random k-bit codes for a
// random subset of antennas, and compares the factor with the exact result
// worked out here with 128-bit integers: d = sum conj(2n+1) h,
// p = floor(log2 max(|Re d|, |Im d|)), mant = conj(d) 2^(p+F) / |d|^2
// truncated toward zero, exponent p - HF (at least 0).
// Also checks that 2^F / d is reproduced to within the mantissa resolution,
// that x_ready drops while dividing and that the latency after the last entry
// is F+3 cycles.
module tb_mu_calc;
  import ra_pkg::*;

  localparam int unsigned B = 16, U = 4, KM = 6, HW = 12, MUW = MU_W, EXPW = EXP_W, F = OUT_FRAC, HF = H_FRAC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_we, x_valid, x_ready, x_last, mu_we, busy;
  logic [3:0] h_ant, x_ant;
  logic signed [HW-1:0] h_re, h_im;
  logic [1:0] x_ue, mu_ue;
  logic [KM-1:0] x_nre, x_nim;
  logic signed [MUW-1:0] mu_mre, mu_mim;
  logic [EXPW-1:0] mu_exp;

  mu_calc #(.B(B), .U(U), .KM(KM), .HW(HW), .MUW(MUW), .EXPW(EXPW), .F(F), .HF(HF)) dut (.*);

  int checks = 0, failures = 0;
  int hr [B], hi [B];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  task automatic row(input int u, input int len, input int kb, input int hamp);
    longint dr, di;
    logic [127:0] ar, ai, den, nr, ni;
    int p, lat;
    longint er, ei;
    for (int b = 0; b < B; b++) begin
      @(negedge clk);
      hr[b] = rnd(-hamp, hamp); hi[b] = rnd(-hamp, hamp);
      h_we = 1; h_ant = 4'(b); h_re = HW'(hr[b]); h_im = HW'(hi[b]);
    end
    @(negedge clk);
    h_we = 0;
    dr = 0; di = 0;
    for (int i = 0; i < len; i++) begin
      int nre = rnd(-(1 << (kb - 1)), (1 << (kb - 1)) - 1), nim = rnd(-(1 << (kb - 1)), (1 << (kb - 1)) - 1);
      int b = (i * 5 + u) % B;
      longint xr = 2 * nre + 1, xi = 2 * nim + 1;
      dr += xr * hr[b] + xi * hi[b];
      di += xr * hi[b] - xi * hr[b];
      x_valid = 1; x_ue = 2'(u); x_ant = 4'(b); x_last = (i == len - 1);
      x_nre = KM'(nre); x_nim = KM'(nim);
      #1;
      check(x_ready, "x_ready low while accumulating");
      @(negedge clk);
    end
    x_valid = 0; x_last = 0;
    lat = 0;
    while (!mu_we && lat < 100) begin
      #1;
      if (lat > 0 && lat < F + 3) check(!x_ready && busy, "x_ready must be low while dividing");
      @(negedge clk);
      lat++;
    end
    check(lat == F + 3, $sformatf("latency %0d, expected %0d", lat, F + 3));
    ar = 128'(dr < 0 ? -dr : dr);
    ai = 128'(di < 0 ? -di : di);
    p = 0;
    for (int j = 0; j < 64; j++) if (ar[j] || ai[j]) p = j;
    den = ar * ar + ai * ai;
    if (den == 0) begin
      er = 0; ei = 0; p = 0;
    end else begin
      nr = (ar << (p + F)) / den;
      ni = (ai << (p + F)) / den;
      er = dr < 0 ? -longint'(nr) : longint'(nr);
      ei = di < 0 ? longint'(ni) : -longint'(ni);
    end
    check(longint'(mu_mre) == er && longint'(mu_mim) == ei &&
          int'(mu_exp) == ((p > HF) ? p - HF : 0) && mu_ue == 2'(u),
          $sformatf("d=(%0d,%0d): got (%0d,%0d)/2^%0d expected (%0d,%0d)/2^(%0d-%0d)",
                    dr, di, mu_mre, mu_mim, mu_exp, er, ei, p, HF));
    if (den != 0) begin
      // 2^F/d from the factor, compared in floating point
      real mr, mi, tr, ti, dd;
      dd = real'(dr) * real'(dr) + real'(di) * real'(di);
      tr = (2.0 ** F) * real'(dr) / dd;
      ti = -(2.0 ** F) * real'(di) / dd;
      mr = real'(mu_mre) / (2.0 ** p);
      mi = real'(mu_mim) / (2.0 ** p);
      check((mr - tr) ** 2 + (mi - ti) ** 2 <= 2.0 * (2.0 / (2.0 ** p)) ** 2,
            $sformatf("factor (%f,%f) far from 2^F/d = (%f,%f)", mr, mi, tr, ti));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    h_we = 0; h_ant = 0; h_re = 0; h_im = 0; x_valid = 0; x_last = 0; x_ue = 0; x_ant = 0;
    x_nre = 0; x_nim = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    row(0, B, 6, 2047);
    row(1, 1, 1, 1);
    row(2, 3, 2, 0);      // zero channel: zero factor
    for (int r = 0; r < 150; r++)
      row(rnd(0, U - 1), rnd(1, B), rnd(1, KM), rnd(1, 2047));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
