// tb_ppac_mvp: self-checking test of one PPAC instance.
//
// Loads a random finite-alphabet matrix, calibrates, and streams random ADC
// vectors for several (q, k, antenna mask, UE mask) settings, including the
// extremes q=1, k=1 and q=QM, k=KM. Every UE's complex inner product is
// compared with sum_b conj(2n_b+1)(2m_b+1) over the active antennas, worked
// out directly in the testbench, and the result must appear exactly q cycles
// after start ('done' in the cycle after the last bit-plane).
module tb_ppac_mvp;
  import ra_pkg::*;

  localparam int unsigned B = 24, U = 4, KM = 6, QM = 8, IPW = IP_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, x_we, cal, start, busy, done;
  logic [3:0] cfg_k, cfg_q;
  logic [B-1:0] ant_mask;
  logic [U-1:0] ue_mask;
  logic [1:0] x_ue;
  logic [4:0] x_ant;
  logic [KM-1:0] x_nre, x_nim;
  logic [QM-1:0] z_re [B], z_im [B];
  logic signed [IPW-1:0] ip_re [U], ip_im [U];

  ppac_mvp #(.B(B), .U(U), .KM(KM), .QM(QM), .IPW(IPW)) dut (.*);

  int checks = 0, failures = 0;
  int nr [U][B], ni [U][B];
  int mr [B], mi [B];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd_signed(input int bits);
    int lo = -(1 << (bits - 1));
    return lo + int'($urandom_range(0, (1 << bits) - 1));
  endfunction

  task automatic load_matrix(input int k);
    for (int u = 0; u < U; u++)
      for (int b = 0; b < B; b++) begin
        nr[u][b] = rnd_signed(k);
        ni[u][b] = rnd_signed(k);
        @(negedge clk);
        x_we = 1; x_ue = 2'(u); x_ant = 5'(b);
        x_nre = KM'(nr[u][b]); x_nim = KM'(ni[u][b]);
      end
    @(negedge clk);
    x_we = 0;
  endtask

  task automatic do_cal();
    @(negedge clk); cal = 1;
    @(negedge clk); cal = 0;
  endtask

  task automatic run_vector(input int q);
    int lat;
    longint er, ei;
    for (int b = 0; b < B; b++) begin
      mr[b] = rnd_signed(q);
      mi[b] = rnd_signed(q);
      z_re[b] = QM'(mr[b]);
      z_im[b] = QM'(mi[b]);
    end
    start = 1;
    @(negedge clk);
    start = 0;
    for (int b = 0; b < B; b++) begin  // corrupt inputs: the instance must use its copy
      z_re[b] = QM'($urandom);
      z_im[b] = QM'($urandom);
    end
    lat = 1;
    while (!done && lat < 40) begin @(negedge clk); lat++; end
    check(lat == q, $sformatf("latency %0d, expected q=%0d", lat, q));
    for (int u = 0; u < U; u++) begin
      er = 0; ei = 0;
      if (ue_mask[u]) begin
        for (int b = 0; b < B; b++) if (ant_mask[b]) begin
          longint xr = 2 * nr[u][b] + 1, xi = 2 * ni[u][b] + 1;
          longint zr = 2 * mr[b] + 1, zi = 2 * mi[b] + 1;
          er += xr * zr + xi * zi;
          ei += xr * zi - xi * zr;
        end
      end
      check(longint'(ip_re[u]) == er && longint'(ip_im[u]) == ei,
            $sformatf("q=%0d k=%0d ue %0d: got (%0d,%0d) expected (%0d,%0d)",
                      q, cfg_k, u, ip_re[u], ip_im[u], er, ei));
    end
  endtask

  task automatic scenario(input int q, input int k, input int first, input int nact, input int nue);
    cfg_q = 4'(q); cfg_k = 4'(k);
    for (int b = 0; b < B; b++) ant_mask[b] = (b >= first && b < first + nact);
    for (int u = 0; u < U; u++) ue_mask[u] = (u < nue);
    load_matrix(k);
    do_cal();
    for (int v = 0; v < 4; v++) run_vector(q);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; x_we = 0; cal = 0; start = 0; cfg_k = 6; cfg_q = 7;
    ant_mask = '1; ue_mask = '1; x_ue = 0; x_ant = 0; x_nre = 0; x_nim = 0;
    for (int b = 0; b < B; b++) begin z_re[b] = 0; z_im[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    scenario(7, 6, 0, B, U);      // paper's worst-case point
    scenario(8, 6, 0, B, U);      // largest resolutions
    scenario(1, 1, 2, 20, U);     // 1-bit ADC, 1-bit equalizer
    scenario(3, 2, 1, 22, 3);     // reduced antennas and UEs
    scenario(4, 4, 0, B, 1);
    for (int r = 0; r < 6; r++)
      scenario(int'($urandom_range(1, QM)), int'($urandom_range(1, KM)),
               int'($urandom_range(0, 4)), int'($urandom_range(16, 20)),
               int'($urandom_range(1, U)));
    // disabled instance must ignore start
    en = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (10) @(negedge clk);
    check(!busy && !done, "disabled instance started");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
