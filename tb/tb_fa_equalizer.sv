// tb_fa_equalizer: self-checking test of the time-interleaved equalizer.
//
// For a series of operating points (q from 1 to 8, various k, antenna and UE
// masks) it loads a random finite-alphabet matrix and random scaling factors,
// calibrates, and streams random ADC vectors, back-to-back or with gaps. Every
// output is compared with round(mu_u * sum_b conj(2n+1)(2m+1) / 2^e),
// saturated, computed here directly. It also checks the order of results,
// the latency of q+1 cycles from z_valid to s_valid, a sustained rate of one
// vector per cycle, that exactly q PPAC instances are enabled, and that the
// equalizer reports idle once drained.
module tb_fa_equalizer;
  import ra_pkg::*;

  localparam int unsigned B = 16, U = 4, KM = 6, QM = 8, NP = 8;
  localparam int unsigned IPW = IP_W, MUW = MU_W, EXPW = EXP_W, OW = OUT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] cfg_q, cfg_k;
  logic [B-1:0] ant_mask;
  logic [U-1:0] ue_mask;
  logic cal, x_we, mu_we, z_valid, idle, s_valid;
  logic [1:0] x_ue, mu_ue;
  logic [3:0] x_ant;
  logic [KM-1:0] x_nre, x_nim;
  logic signed [MUW-1:0] mu_mre, mu_mim;
  logic [EXPW-1:0] mu_exp;
  logic [QM-1:0] z_re [B], z_im [B];
  logic [NP-1:0] ppac_en;
  logic signed [OW-1:0] s_re [U], s_im [U];

  fa_equalizer #(.B(B), .U(U), .KM(KM), .QM(QM), .NP(NP), .IPW(IPW), .MUW(MUW),
                 .EXPW(EXPW), .OW(OW)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_in = 0, n_out = 0, b2b = 0;
  int nr [U][B], ni [U][B], mre [U], mim [U], ex [U];

  typedef struct {
    int t_in;
    longint er [U];
    longint ei [U];
  } exp_t;
  exp_t expq [$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int rs(input int bits);
    return -(1 << (bits - 1)) + int'($urandom_range(0, (1 << bits) - 1));
  endfunction

  function automatic longint scale_ref(input real p, input int e);
    real r;
    r = $floor(p / (2.0 ** e) + 0.5);
    if (r > real'((1 << (OW - 1)) - 1)) r = real'((1 << (OW - 1)) - 1);
    if (r < -real'(1 << (OW - 1))) r = -real'(1 << (OW - 1));
    return longint'(r);
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && s_valid) begin
      exp_t e;
      n_out++;
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        e = expq.pop_front();
        check(cycle - e.t_in == int'(cfg_q) + 1,
              $sformatf("latency %0d, expected q+1=%0d", cycle - e.t_in, cfg_q + 1));
        for (int u = 0; u < U; u++)
          check(longint'(s_re[u]) == e.er[u] && longint'(s_im[u]) == e.ei[u],
                $sformatf("q=%0d k=%0d ue %0d: got (%0d,%0d) expected (%0d,%0d)",
                          cfg_q, cfg_k, u, s_re[u], s_im[u], e.er[u], e.ei[u]));
      end
    end
  end

  task automatic send(input int q);
    exp_t e;
    int mr [B], mi [B];
    for (int b = 0; b < B; b++) begin
      mr[b] = rs(q); mi[b] = rs(q);
      z_re[b] = QM'(mr[b]); z_im[b] = QM'(mi[b]);
    end
    for (int u = 0; u < U; u++) begin
      longint ar = 0, ai = 0;
      for (int b = 0; b < B; b++) if (ant_mask[b]) begin
        longint xr = 2 * nr[u][b] + 1, xi = 2 * ni[u][b] + 1;
        longint zr = 2 * mr[b] + 1, zi = 2 * mi[b] + 1;
        ar += xr * zr + xi * zi;
        ai += xr * zi - xi * zr;
      end
      if (ue_mask[u]) begin
        e.er[u] = scale_ref(real'(ar) * mre[u] - real'(ai) * mim[u], ex[u]);
        e.ei[u] = scale_ref(real'(ar) * mim[u] + real'(ai) * mre[u], ex[u]);
      end else begin
        e.er[u] = 0; e.ei[u] = 0;
      end
    end
    z_valid = 1;
    @(posedge clk);
    e.t_in = cycle;
    expq.push_back(e);
    n_in++;
    @(negedge clk);
    z_valid = 0;
  endtask

  task automatic scenario(input int q, input int k, input int first, input int nact,
                          input int nue, input int nvec, input bit gaps);
    @(negedge clk);
    cfg_q = 4'(q); cfg_k = 4'(k);
    for (int b = 0; b < B; b++) ant_mask[b] = (b >= first && b < first + nact);
    for (int u = 0; u < U; u++) ue_mask[u] = (u < nue);
    for (int u = 0; u < U; u++) begin
      for (int b = 0; b < B; b++) begin
        nr[u][b] = rs(k); ni[u][b] = rs(k);
        x_we = 1; x_ue = 2'(u); x_ant = 4'(b); x_nre = KM'(nr[u][b]); x_nim = KM'(ni[u][b]);
        @(negedge clk);
      end
      x_we = 0;
      mre[u] = int'($urandom_range(0, 512)) - 256;
      mim[u] = int'($urandom_range(0, 512)) - 256;
      ex[u] = int'($urandom_range(4, 14));
      mu_we = 1; mu_ue = 2'(u); mu_mre = MUW'(mre[u]); mu_mim = MUW'(mim[u]); mu_exp = EXPW'(ex[u]);
      @(negedge clk);
      mu_we = 0;
    end
    check(ppac_en == NP'((1 << q) - 1), $sformatf("ppac_en %b for q=%0d", ppac_en, q));
    cal = 1;
    @(negedge clk);
    cal = 0;
    for (int v = 0; v < nvec; v++) begin
      send(q);
      if (gaps && $urandom_range(0, 2) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
      else b2b++;
    end
    repeat (q + 3) @(negedge clk);
    check(idle && expq.size() == 0, "not drained");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cal = 0; x_we = 0; mu_we = 0; z_valid = 0; cfg_q = 7; cfg_k = 6;
    ant_mask = '1; ue_mask = '1; x_ue = 0; x_ant = 0; x_nre = 0; x_nim = 0;
    mu_ue = 0; mu_mre = 0; mu_mim = 0; mu_exp = 0;
    for (int b = 0; b < B; b++) begin z_re[b] = 0; z_im[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    scenario(7, 6, 0, B, U, 30, 0);
    scenario(8, 6, 0, B, U, 30, 0);
    scenario(1, 1, 2, 12, U, 30, 0);
    scenario(2, 3, 1, 14, 2, 30, 1);
    for (int r = 0; r < 12; r++)
      scenario(int'($urandom_range(1, QM)), int'($urandom_range(1, KM)), int'($urandom_range(0, 3)),
               int'($urandom_range(10, 13)), int'($urandom_range(1, U)), 25, r[0]);
    check(n_out == n_in && n_in > 0, $sformatf("%0d vectors in, %0d out", n_in, n_out));
    check(b2b > 100, "back-to-back vectors never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
