// tb_post_scaler: self-checking test of the post-equalization scaling.
//
// Writes random scaling factors (mantissa and exponent) for every UE, applies
// random inner products and compares the outputs with
// round((ip * mant) / 2^e), saturated to OUT_W bits, computed here in real
// arithmetic. Also checks the one-cycle latency, that inactive UEs give zero,
// and that saturation occurs at both ends.
module tb_post_scaler;
  import ra_pkg::*;

  localparam int unsigned U = 4, IPW = IP_W, MUW = MU_W, EXPW = EXP_W, OW = OUT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [U-1:0] ue_mask;
  logic mu_we, in_valid, out_valid;
  logic [1:0] mu_ue;
  logic signed [MUW-1:0] mu_mre, mu_mim;
  logic [EXPW-1:0] mu_exp;
  logic signed [IPW-1:0] ip_re [U], ip_im [U];
  logic signed [OW-1:0] s_re [U], s_im [U];

  post_scaler #(.U(U), .IPW(IPW), .MUW(MUW), .EXPW(EXPW), .OW(OW)) dut (.*);

  int checks = 0, failures = 0, sat = 0;
  int mre [U], mim [U], ex [U];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_scale(input real p, input int e);
    real r;
    longint v;
    r = $floor(p / (2.0 ** e) + 0.5);
    if (r > real'((1 << (OW - 1)) - 1)) r = real'((1 << (OW - 1)) - 1);
    if (r < -real'(1 << (OW - 1))) r = -real'(1 << (OW - 1));
    v = longint'(r);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ue_mask = '1; mu_we = 0; in_valid = 0; mu_ue = 0; mu_mre = 0; mu_mim = 0; mu_exp = 0;
    for (int u = 0; u < U; u++) begin ip_re[u] = 0; ip_im[u] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int u = 0; u < U; u++) begin
        @(negedge clk);
        mre[u] = int'($urandom_range(0, 512)) - 256;
        mim[u] = int'($urandom_range(0, 512)) - 256;
        ex[u]  = int'($urandom_range(0, 34));
        mu_we = 1; mu_ue = 2'(u); mu_mre = MUW'(mre[u]); mu_mim = MUW'(mim[u]); mu_exp = EXPW'(ex[u]);
      end
      @(negedge clk);
      mu_we = 0;
      ue_mask = U'($urandom_range(1, (1 << U) - 1));
      for (int u = 0; u < U; u++) begin
        int sh = int'($urandom_range(4, IPW - 2));
        ip_re[u] = IPW'(int'($urandom_range(0, (1 << sh))) - (1 << (sh - 1)));
        ip_im[u] = IPW'(int'($urandom_range(0, (1 << sh))) - (1 << (sh - 1)));
      end
      in_valid = 1;
      @(posedge clk); #1;
      check(out_valid, "out_valid one cycle after in_valid");
      for (int u = 0; u < U; u++) begin
        real pr, pi;
        longint er, ei;
        pr = real'(ip_re[u]) * real'(mre[u]) - real'(ip_im[u]) * real'(mim[u]);
        pi = real'(ip_re[u]) * real'(mim[u]) + real'(ip_im[u]) * real'(mre[u]);
        er = ue_mask[u] ? ref_scale(pr, ex[u]) : 0;
        ei = ue_mask[u] ? ref_scale(pi, ex[u]) : 0;
        if (ue_mask[u] && (er == (1 << (OW - 1)) - 1 || er == -(1 << (OW - 1)))) sat++;
        check(longint'(s_re[u]) == er && longint'(s_im[u]) == ei,
              $sformatf("ue %0d ip=(%0d,%0d) mu=(%0d,%0d)/2^%0d: got (%0d,%0d) expected (%0d,%0d)",
                        u, ip_re[u], ip_im[u], mre[u], mim[u], ex[u], s_re[u], s_im[u], er, ei));
      end
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      check(!out_valid, "out_valid must drop");
    end
    check(sat > 0, "saturation never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
