// tb_ra_ctrl: self-checking test of the controller.
//
// Checks the reset operating point and its calibration, the centred
// contiguous antenna mask and the UE mask for many (B', U), clamping of
// out-of-range requests, and the reconfiguration sequence: stall as soon as a
// change is requested, no change while the equalizer is busy, writes allowed
// only once drained, the new point installed before the single calibration
// cycle, and the stall released right after it. Matrix updates (upd_busy) and
// recalibration requests take the same path.
module tb_ra_ctrl;
  import ra_pkg::*;

  localparam int unsigned B = 20, U = 8, QM = 8, KM = 6;
  localparam int unsigned BCW = $clog2(B + 1), UCW = $clog2(U + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, recal_req, upd_busy, eq_idle, stall, x_wr_allow, cal;
  logic [3:0] cfg_q, cfg_k, act_q, act_k, tgt_k;
  logic [BCW-1:0] cfg_bact, act_bact;
  logic [UCW-1:0] cfg_u, act_u;
  logic [B-1:0] ant_mask;
  logic [U-1:0] ue_mask;

  ra_ctrl #(.B(B), .U(U), .QM(QM), .KM(KM)) dut (.*);

  int checks = 0, failures = 0, cals = 0;

  always @(posedge clk) if (rst_n && cal) cals++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expect_masks(input int bact, input int u);
    int first = (B - bact) / 2;
    logic [B-1:0] am;
    logic [U-1:0] um;
    for (int b = 0; b < B; b++) am[b] = (b >= first && b < first + bact);
    for (int i = 0; i < U; i++) um[i] = (i < u);
    check(ant_mask == am, $sformatf("antenna mask %b for B'=%0d, expected %b", ant_mask, bact, am));
    check(ue_mask == um, $sformatf("UE mask %b for U=%0d", ue_mask, u));
  endtask

  // request a point, hold the equalizer busy for a while, then release it
  task automatic reconfigure(input int q, input int k, input int bact, input int u,
                             input int eq, input int ek, input int eb, input int eu);
    int c0, n;
    @(negedge clk);
    cfg_we = 1; cfg_q = 4'(q); cfg_k = 4'(k); cfg_bact = BCW'(bact); cfg_u = UCW'(u);
    eq_idle = 0;
    @(negedge clk);
    cfg_we = 0;
    check(stall, "stall must rise after the write");
    check(tgt_k == 4'(ek), "tgt_k must show the requested k");
    c0 = cals;
    n = int'($urandom_range(1, 6));
    repeat (n) begin
      @(negedge clk);
      check(stall && !x_wr_allow && !cal && cals == c0, "must wait while the equalizer is busy");
    end
    eq_idle = 1;
    while (!cal && n < 20) begin
      @(negedge clk); n++;
      check(stall, "stall must stay high until calibration");
    end
    check(cal && int'(act_q) == eq && int'(act_k) == ek && int'(act_bact) == eb && int'(act_u) == eu,
          $sformatf("cal with point q=%0d k=%0d B'=%0d U=%0d, expected %0d %0d %0d %0d",
                    act_q, act_k, act_bact, act_u, eq, ek, eb, eu));
    expect_masks(eb, eu);
    @(negedge clk);
    check(!stall && !cal && cals == c0 + 1, "exactly one calibration, then run");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; recal_req = 0; upd_busy = 0; eq_idle = 1;
    cfg_q = 0; cfg_k = 0; cfg_bact = 0; cfg_u = 0;
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    repeat (3) @(negedge clk);
    check(act_q == 4'(RESET_Q) && act_k == 4'(RESET_K) && act_bact == BCW'(B) && act_u == UCW'(U),
          "reset operating point");
    check(cals == 1 && !stall, "one calibration after reset, then run");
    expect_masks(B, U);
    reconfigure(3, 2, 15, 4, 3, 2, 15, 4);
    reconfigure(1, 1, 1, 1, 1, 1, 1, 1);
    reconfigure(0, 0, 0, 0, 1, 1, 1, 1);          // clamped up
    reconfigure(15, 15, 31, 15, QM, KM, B, U);    // clamped down
    for (int i = 0; i < 30; i++) begin
      int q = int'($urandom_range(1, QM)), k = int'($urandom_range(1, KM));
      int b = int'($urandom_range(1, B)), u = int'($urandom_range(1, U));
      reconfigure(q, k, b, u, q, k, b, u);
    end
    // matrix update: writes allowed only once drained, cal after it ends
    begin
      int c0;
      c0 = cals;
      @(negedge clk);
      upd_busy = 1; eq_idle = 0;
      #1 check(stall, "stall on matrix update");
      repeat (3) @(negedge clk);
      check(!x_wr_allow, "writes held while equalizer busy");
      eq_idle = 1;
      repeat (2) @(negedge clk);
      check(x_wr_allow && stall, "writes allowed once drained");
      repeat (5) @(negedge clk);
      check(x_wr_allow && cals == c0, "no calibration during the update");
      upd_busy = 0;
      repeat (3) @(negedge clk);
      check(!stall && cals == c0 + 1, "one calibration after the update");
    end
    // recalibration request
    begin
      int c0;
      c0 = cals;
      @(negedge clk); recal_req = 1;
      @(negedge clk); recal_req = 0;
      repeat (5) @(negedge clk);
      check(!stall && cals == c0 + 1, "recalibration request served once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
