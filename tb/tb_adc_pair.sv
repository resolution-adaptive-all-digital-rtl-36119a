// tb_adc_pair: self-checking test of the behavioural I/Q converter model.
//
// Drives random samples, step sizes and resolutions q = 1..8 and compares the
// registered codes with floor(y/Delta) clipped to the q-bit range, computed
// here in real arithmetic. Also checks the one-cycle latency, clipping of
// overdriven inputs at both ends, and the zero code when powered down.
module tb_adc_pair;
  import ra_pkg::*;

  localparam int unsigned SW = 16, QM = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic [3:0] q;
  logic [SW-1:0] delta;
  logic signed [SW-1:0] y_re, y_im;
  logic [QM-1:0] z_re, z_im;

  adc_pair #(.SW(SW), .QM(QM)) dut (.*);

  int checks = 0, failures = 0, clipped = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expect_code(input int y, input int d, input int bits);
    real r;
    int m;
    r = $floor(real'(y) / real'(d));
    m = int'(r);
    if (m > (1 << (bits - 1)) - 1) m = (1 << (bits - 1)) - 1;
    if (m < -(1 << (bits - 1))) m = -(1 << (bits - 1));
    return m;
  endfunction

  task automatic one(input int yr, input int yi, input int d, input int bits);
    int er, ei;
    y_re = SW'(yr); y_im = SW'(yi); delta = SW'(d); q = 4'(bits); en = 1;
    @(posedge clk);
    #1;
    er = expect_code(yr, d, bits);
    ei = expect_code(yi, d, bits);
    if (er == (1 << (bits - 1)) - 1 || er == -(1 << (bits - 1))) clipped++;
    check($signed(z_re) == QM'(er) && $signed(z_im) == QM'(ei),
          $sformatf("y=(%0d,%0d) d=%0d q=%0d: got (%0d,%0d) expected (%0d,%0d)",
                    yr, yi, d, bits, $signed(z_re), $signed(z_im), er, ei));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; q = 7; delta = 100; y_re = 0; y_im = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fixed points: levels either side of zero and the range edges
    one(0, -1, 100, 3);
    one(99, -100, 100, 3);
    one(399, -400, 100, 3);
    one(32767, -32768, 100, 3);
    one(5, -5, 1, 1);
    for (int i = 0; i < 2000; i++) begin
      int bits = int'($urandom_range(1, QM));
      int d = int'($urandom_range(1, 3000));
      one(int'($urandom_range(0, 65535)) - 32768, int'($urandom_range(0, 65535)) - 32768, d, bits);
    end
    // power-down
    @(negedge clk);
    y_re = 1234; y_im = -1234; en = 0;
    @(posedge clk); #1;
    check(z_re == 0 && z_im == 0, "powered-down pair must output code 0");
    check(clipped > 10, "clipping never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
