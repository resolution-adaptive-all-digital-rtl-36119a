// ra_bs_tb_body.svh: end-to-end test bench body for ra_bs_top, shared by the
// reduced-size and the full-size test benches. The including module defines
// the localparams TB_B and TB_U (antennas and UEs of the instantiated top)
// and calls the tasks below.
//
// Link model and reference: for each operating point (q, k, B', U) the bench
// draws a Rayleigh channel H, computes the L-MMSE matrix
// (H^H H + N0/Es I)^-1 H^H over the B' centre antennas in floating point,
// rounds each row to W_W bits, sets the ADC step to the MSE-optimal uniform
// step for a Gaussian input (Max's values) and gives the receiver the exact
// channel in ADC half-steps. It then sends QPSK vectors y = H s + n, or
// 16-QAM vectors (levels +-1, +-3 per part) while qam16 is set.
// Every output is compared bit for bit with a model written here from the
// defining formulas (midrise quantizers with floor, exact integer inner
// products, exact division for the scaling factors), and the hard decisions
// are compared with the transmitted symbols.

  import ra_pkg::*;

  localparam int unsigned UWt  = (TB_U > 1) ? $clog2(TB_U) : 1;
  localparam int unsigned BWt  = (TB_B > 1) ? $clog2(TB_B) : 1;
  localparam int unsigned BCWt = $clog2(TB_B + 1);
  localparam int unsigned UCWt = $clog2(TB_U + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  cfg_we, recal_req, y_valid, in_ready, chan_update;
  logic [3:0]            cfg_q, cfg_k, act_q, act_k;
  logic [BCWt-1:0]       cfg_bact, act_bact;
  logic [UCWt-1:0]       cfg_u, act_u;
  logic [TB_B-1:0]       ant_mask;
  logic [Q_MAX-1:0]      ppac_en;
  logic [SAMPLE_W-1:0]   adc_delta;
  logic signed [SAMPLE_W-1:0] y_re [TB_B], y_im [TB_B];
  logic                  w_valid, w_ready, w_last, s_valid;
  logic [UWt-1:0]        w_ue;
  logic [BWt-1:0]        w_ant;
  logic signed [W_W-1:0] w_re, w_im;
  logic signed [H_W-1:0] h_re, h_im;
  logic signed [OUT_W-1:0] s_re [TB_U], s_im [TB_U];

  int checks = 0, failures = 0, cycle = 0;
  // how often each mechanism happened
  int n_stall = 0, n_switch = 0, n_update = 0, n_clip = 0, n_ant_off = 0;
  int n_ppac_off = 0, n_b2b = 0, n_vec = 0, n_out = 0, n_sym = 0, n_symerr = 0;
  int n_sym16 = 0, n_symerr16 = 0;
  // modulation of the following operating points: 0 QPSK, 1 16-QAM
  bit qam16 = 0;
  real es = 2.0;                 // symbol energy of the current modulation

  // model state of the operating point in force
  int mq, mk, mb, mu_n, first;
  real hre [TB_B][TB_U], him [TB_B][TB_U];
  int nre [TB_U][TB_B], nim [TB_U][TB_B];
  longint mant_re [TB_U], mant_im [TB_U];
  int mexp [TB_U];
  int delta;
  real sigma;

  typedef struct {
    int t_in;
    longint er [TB_U];
    longint ei [TB_U];
    int sr [TB_U];
    int si [TB_U];
    int nu;
    bit hi_res;
    bit q16;
  } exp_t;
  exp_t expq [$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // MSE-optimal step of a uniform quantizer for a unit-variance Gaussian
  function automatic real max_step(input int bits);
    case (bits)
      1: return 1.596; 2: return 0.996; 3: return 0.586; 4: return 0.335;
      5: return 0.188; 6: return 0.104; 7: return 0.057; default: return 0.031;
    endcase
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int floor_code(input int y, input int d, input int bits);
    int m;
    m = int'($floor(real'(y) / real'(d)));
    if (m > (1 << (bits - 1)) - 1) m = (1 << (bits - 1)) - 1;
    if (m < -(1 << (bits - 1))) m = -(1 << (bits - 1));
    return m;
  endfunction

  function automatic longint scale_ref(input real p, input int e);
    real r;
    r = $floor(p / (2.0 ** e) + 0.5);
    if (r > real'((1 << (OUT_W - 1)) - 1)) r = real'((1 << (OUT_W - 1)) - 1);
    if (r < -real'(1 << (OUT_W - 1))) r = -real'(1 << (OUT_W - 1));
    return longint'(r);
  endfunction

  function automatic int clip_int(input real v, input int bits);
    int r;
    r = int'(v);
    if (r > (1 << (bits - 1)) - 1) r = (1 << (bits - 1)) - 1;
    if (r < -(1 << (bits - 1))) r = -(1 << (bits - 1));
    return r;
  endfunction

  // hard decision of one estimate part (OUT_FRAC fractional bits)
  function automatic int slice(input longint v, input bit q16);
    if (!q16) return (v >= 0) ? 1 : -1;
    if (v < -(2 <<< OUT_FRAC)) return -3;
    if (v < 0) return -1;
    if (v < (2 <<< OUT_FRAC)) return 1;
    return 3;
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && s_valid) begin
      exp_t e;
      n_out++;
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        e = expq.pop_front();
        check(cycle - e.t_in == int'(act_q) + 2,
              $sformatf("latency %0d, expected q+2=%0d", cycle - e.t_in, act_q + 2));
        for (int u = 0; u < TB_U; u++) begin
          check(longint'(s_re[u]) == e.er[u] && longint'(s_im[u]) == e.ei[u],
                $sformatf("ue %0d: got (%0d,%0d) expected (%0d,%0d)", u, s_re[u], s_im[u],
                          e.er[u], e.ei[u]));
          if (u < e.nu && e.hi_res) begin
            bit wrong;
            wrong = slice(s_re[u], e.q16) != e.sr[u] || slice(s_im[u], e.q16) != e.si[u];
            if (e.q16) begin n_sym16++; if (wrong) n_symerr16++; end
            else begin n_sym++; if (wrong) n_symerr++; end
          end
        end
      end
    end
  end

  // complex Gauss-Jordan inverse of an n x n matrix (in place)
  task automatic cinv(inout real ar [TB_U][TB_U], inout real ai [TB_U][TB_U], input int n);
    real br [TB_U][TB_U], bi [TB_U][TB_U];
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
      br[i][j] = (i == j) ? 1.0 : 0.0; bi[i][j] = 0.0;
    end
    for (int c = 0; c < n; c++) begin
      real pr, pi, den, ir, ii;
      pr = ar[c][c]; pi = ai[c][c];
      den = pr * pr + pi * pi;
      ir = pr / den; ii = -pi / den;
      for (int j = 0; j < n; j++) begin
        real t1, t2;
        t1 = ar[c][j] * ir - ai[c][j] * ii; t2 = ar[c][j] * ii + ai[c][j] * ir;
        ar[c][j] = t1; ai[c][j] = t2;
        t1 = br[c][j] * ir - bi[c][j] * ii; t2 = br[c][j] * ii + bi[c][j] * ir;
        br[c][j] = t1; bi[c][j] = t2;
      end
      for (int r = 0; r < n; r++) if (r != c) begin
        real fr, fi;
        fr = ar[r][c]; fi = ai[r][c];
        for (int j = 0; j < n; j++) begin
          ar[r][j] -= fr * ar[c][j] - fi * ai[c][j];
          ai[r][j] -= fr * ai[c][j] + fi * ar[c][j];
          br[r][j] -= fr * br[c][j] - fi * bi[c][j];
          bi[r][j] -= fr * bi[c][j] + fi * br[c][j];
        end
      end
    end
    ar = br; ai = bi;
  endtask

  // switch the operating point and load the matching matrix, while the
  // sender keeps offering a vector (the input must stall meanwhile)
  task automatic switch_point(input int q, input int k, input int bact, input int nu, input real snr_db);
    real gr [TB_U][TB_U], gi [TB_U][TB_U], wr [TB_U][TB_B], wi [TB_U][TB_B];
    real amp, n0;
    int wfr [TB_U][TB_B], wfi [TB_U][TB_B], hfr [TB_B], hfi [TB_B];
    int stall_seen;
    mq = q; mk = k; mb = bact; mu_n = nu;
    first = (TB_B - bact) / 2;
    if (bact < TB_B) n_ant_off++;
    if (q < Q_MAX) n_ppac_off++;
    es = qam16 ? 10.0 : 2.0;
    amp = 4000.0 / $sqrt(real'(nu) * es / 2.0);
    for (int b = 0; b < TB_B; b++) for (int u = 0; u < TB_U; u++) begin
      hre[b][u] = amp * gauss() / $sqrt(2.0);
      him[b][u] = amp * gauss() / $sqrt(2.0);
    end
    sigma = amp * $sqrt(real'(nu) * es / 2.0);   // per-component std of H s
    n0 = 2.0 * (sigma * sigma) / (10.0 ** (snr_db / 10.0));
    delta = int'(max_step(q) * $sqrt(sigma * sigma + n0 / 2.0) + 0.5);
    if (delta < 1) delta = 1;
    // L-MMSE over the active antennas: (H^H H + N0/Es I)^-1 H^H
    for (int i = 0; i < nu; i++) for (int j = 0; j < nu; j++) begin
      gr[i][j] = 0.0; gi[i][j] = 0.0;
      for (int b = first; b < first + bact; b++) begin
        gr[i][j] += hre[b][i] * hre[b][j] + him[b][i] * him[b][j];
        gi[i][j] += hre[b][i] * him[b][j] - him[b][i] * hre[b][j];
      end
      if (i == j) gr[i][j] += n0 / es;
    end
    cinv(gr, gi, nu);
    for (int u = 0; u < nu; u++) begin
      real mx;
      mx = 0.0;
      for (int b = first; b < first + bact; b++) begin
        wr[u][b] = 0.0; wi[u][b] = 0.0;
        for (int j = 0; j < nu; j++) begin
          wr[u][b] += gr[u][j] * hre[b][j] + gi[u][j] * him[b][j];
          wi[u][b] += gi[u][j] * hre[b][j] - gr[u][j] * him[b][j];
        end
        if (rabs(wr[u][b]) > mx) mx = rabs(wr[u][b]);
        if (rabs(wi[u][b]) > mx) mx = rabs(wi[u][b]);
      end
      for (int b = first; b < first + bact; b++) begin
        wfr[u][b] = clip_int(wr[u][b] / mx * 2047.0, W_W);
        wfi[u][b] = clip_int(-wi[u][b] / mx * 2047.0, W_W);   // column of W = conj(row of W^H)
      end
    end
    // reference: FL-MMSE codes and scaling factors
    for (int u = 0; u < nu; u++) begin
      int m;
      longint dr, di;
      logic [127:0] ar, ai, den;
      int p;
      m = 0;
      for (int b = first; b < first + bact; b++) begin
        if ((wfr[u][b] < 0 ? -wfr[u][b] : wfr[u][b]) > m) m = (wfr[u][b] < 0 ? -wfr[u][b] : wfr[u][b]);
        if ((wfi[u][b] < 0 ? -wfi[u][b] : wfi[u][b]) > m) m = (wfi[u][b] < 0 ? -wfi[u][b] : wfi[u][b]);
      end
      dr = 0; di = 0;
      for (int b = first; b < first + bact; b++) begin
        real dl;
        longint xr, xi, hr, hi;
        dl = real'(m) * (2.0 ** (1 - k));
        nre[u][b] = (m == 0) ? 0 : clip_int($floor(real'(wfr[u][b]) / dl), k);
        nim[u][b] = (m == 0) ? 0 : clip_int($floor(real'(wfi[u][b]) / dl), k);
        hfr[b] = clip_int($floor(hre[b][u] * 2.0 / real'(delta) * (2.0 ** H_FRAC) + 0.5), H_W);
        hfi[b] = clip_int($floor(him[b][u] * 2.0 / real'(delta) * (2.0 ** H_FRAC) + 0.5), H_W);
        xr = 2 * nre[u][b] + 1; xi = 2 * nim[u][b] + 1; hr = hfr[b]; hi = hfi[b];
        dr += xr * hr + xi * hi;
        di += xr * hi - xi * hr;
      end
      ar = 128'(dr < 0 ? -dr : dr);
      ai = 128'(di < 0 ? -di : di);
      p = 0;
      for (int j = 0; j < 64; j++) if (ar[j] || ai[j]) p = j;
      den = ar * ar + ai * ai;
      if (den == 0) begin
        mant_re[u] = 0; mant_im[u] = 0; mexp[u] = 0;
      end else begin
        mant_re[u] = (dr < 0 ? -1 : 1) * longint'((ar << (p + OUT_FRAC)) / den);
        mant_im[u] = (di < 0 ? 1 : -1) * longint'((ai << (p + OUT_FRAC)) / den);
        mexp[u] = (p > H_FRAC) ? p - H_FRAC : 0;
      end
      // send this row, with the channel estimate
      @(negedge clk);
      if (u == 0) begin
        cfg_we = 1; cfg_q = 4'(q); cfg_k = 4'(k); cfg_bact = BCWt'(bact); cfg_u = UCWt'(nu);
        chan_update = 1;
        y_valid = 1;             // a vector is offered during the whole switch
        @(negedge clk);
        cfg_we = 0;
      end
      for (int b = first; b < first + bact; b++) begin
        w_valid = 1; w_ue = UWt'(u); w_ant = BWt'(b); w_last = (b == first + bact - 1);
        w_re = W_W'(wfr[u][b]); w_im = W_W'(wfi[u][b]);
        h_re = H_W'(hfr[b]); h_im = H_W'(hfi[b]);
        #1;
        while (!w_ready) begin
          if (y_valid && !in_ready) n_stall++;
          @(negedge clk); #1;
        end
        if (y_valid && !in_ready) n_stall++;
        @(negedge clk);
      end
      w_valid = 0; w_last = 0;
    end
    chan_update = 0;
    stall_seen = 0;
    while (!in_ready) begin
      @(negedge clk);
      stall_seen++;
      if (y_valid) n_stall++;
    end
    check(act_q == 4'(q) && act_k == 4'(k) && act_bact == BCWt'(bact) && act_u == UCWt'(nu),
          $sformatf("operating point q=%0d k=%0d B'=%0d U=%0d not in force", q, k, bact, nu));
    check(ppac_en == Q_MAX'((1 << q) - 1), $sformatf("ppac_en %b for q=%0d", ppac_en, q));
    for (int b = 0; b < TB_B; b++)
      check(ant_mask[b] == (b >= first && b < first + bact), "antenna mask");
    n_switch++;
    n_update++;
  endtask

  // offer one vector; it is taken when in_ready is high
  task automatic send_vector(input real snr_db);
    exp_t e;
    int zr [TB_B], zi [TB_B];
    int sr [TB_U], si [TB_U];
    real n0;
    n0 = 2.0 * (sigma * sigma) / (10.0 ** (snr_db / 10.0));
    for (int u = 0; u < TB_U; u++) begin
      if (qam16) begin
        sr[u] = 2 * int'($urandom_range(0, 3)) - 3;
        si[u] = 2 * int'($urandom_range(0, 3)) - 3;
      end else begin
        sr[u] = ($urandom_range(0, 1) != 0) ? 1 : -1;
        si[u] = ($urandom_range(0, 1) != 0) ? 1 : -1;
      end
    end
    for (int b = 0; b < TB_B; b++) begin
      real vr, vi;
      int yr, yi;
      vr = $sqrt(n0 / 2.0) * gauss();
      vi = $sqrt(n0 / 2.0) * gauss();
      for (int u = 0; u < mu_n; u++) begin
        vr += hre[b][u] * sr[u] - him[b][u] * si[u];
        vi += hre[b][u] * si[u] + him[b][u] * sr[u];
      end
      yr = clip_int($floor(vr + 0.5), SAMPLE_W);
      yi = clip_int($floor(vi + 0.5), SAMPLE_W);
      y_re[b] = SAMPLE_W'(yr); y_im[b] = SAMPLE_W'(yi);
      zr[b] = floor_code(yr, delta, mq);
      zi[b] = floor_code(yi, delta, mq);
      if (b >= first && b < first + mb)
        if (zr[b] == (1 << (mq - 1)) - 1 || zr[b] == -(1 << (mq - 1))) n_clip++;
    end
    for (int u = 0; u < TB_U; u++) begin
      longint ar, ai;
      ar = 0; ai = 0;
      if (u < mu_n) begin
        for (int b = first; b < first + mb; b++) begin
          longint xr, xi, z1, z2;
          xr = 2 * nre[u][b] + 1; xi = 2 * nim[u][b] + 1;
          z1 = 2 * zr[b] + 1; z2 = 2 * zi[b] + 1;
          ar += xr * z1 + xi * z2;
          ai += xr * z2 - xi * z1;
        end
        e.er[u] = scale_ref(real'(ar) * real'(mant_re[u]) - real'(ai) * real'(mant_im[u]), mexp[u]);
        e.ei[u] = scale_ref(real'(ar) * real'(mant_im[u]) + real'(ai) * real'(mant_re[u]), mexp[u]);
      end else begin
        e.er[u] = 0; e.ei[u] = 0;
      end
      e.sr[u] = sr[u]; e.si[u] = si[u];
    end
    e.nu = mu_n;
    e.q16 = qam16;
    e.hi_res = qam16 ? (mq >= 6 && mk >= 5) : (mq >= 4 && mk >= 4);
    y_valid = 1;
    #1;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk); #1;
    end
    @(posedge clk);
    e.t_in = cycle;
    expq.push_back(e);
    n_vec++;
    @(negedge clk);
    y_valid = 0;
  endtask

  task automatic burst(input int n, input real snr_db);
    for (int i = 0; i < n; i++) begin
      send_vector(snr_db);
      if (i > 0) n_b2b++;
    end
  endtask

  task automatic tb_init();
    cfg_we = 0; recal_req = 0; y_valid = 0; chan_update = 0; w_valid = 0; w_last = 0;
    cfg_q = 0; cfg_k = 0; cfg_bact = 0; cfg_u = 0; adc_delta = 1;
    w_ue = 0; w_ant = 0; w_re = 0; w_im = 0; h_re = 0; h_im = 0;
    for (int b = 0; b < TB_B; b++) begin y_re[b] = 0; y_im[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
  endtask

  // raise a change of operating point while a vector is waiting
  task automatic point(input int q, input int k, input int bact, input int nu,
                       input int nvec, input real snr_db);
    switch_point(q, k, bact, nu, snr_db);
    adc_delta = SAMPLE_W'(delta);
    y_valid = 0;
    burst(nvec, snr_db);
    repeat (12) @(negedge clk);
    check(expq.size() == 0, "results missing after drain");
  endtask

  task automatic tb_finish();
    check(n_out == n_vec && n_vec > 0, $sformatf("%0d vectors in, %0d out", n_vec, n_out));
    check(n_sym > 0 && n_symerr * 50 <= n_sym,
          $sformatf("%0d of %0d QPSK decisions wrong at q,k >= 4", n_symerr, n_sym));
    check(n_sym16 > 0 && n_symerr16 * 50 <= n_sym16,
          $sformatf("%0d of %0d 16-QAM decisions wrong at q >= 6, k >= 5", n_symerr16, n_sym16));
    $display("mechanisms: stalls=%0d switches=%0d matrix_updates=%0d adc_clips=%0d antennas_off=%0d ppac_gated=%0d back_to_back=%0d",
             n_stall, n_switch, n_update, n_clip, n_ant_off, n_ppac_off, n_b2b);
    $display("decisions: QPSK %0d of %0d wrong, 16-QAM %0d of %0d wrong",
             n_symerr, n_sym, n_symerr16, n_sym16);
    check(n_stall > 0, "input stall never happened");
    check(n_switch > 1, "operating-point switch never happened");
    check(n_update > 0, "matrix update never happened");
    check(n_clip > 0, "ADC clipping never happened");
    check(n_ant_off > 0, "antenna deactivation never happened");
    check(n_ppac_off > 0, "PPAC instance gating never happened");
    check(n_b2b > 0, "back-to-back vectors never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
