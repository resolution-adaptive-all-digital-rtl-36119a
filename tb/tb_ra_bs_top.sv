// tb_ra_bs_top: end-to-end test of ra_bs_top at reduced size (32 antennas,
// 8 UEs), over operating points from the paper's worst case (q=7, k=6, all
// antennas) down to 1-bit converters and a 1-bit equalizer, with QPSK and
// then with 16-QAM. See
// ra_bs_tb_body.svh for the link model and the reference.
module tb_ra_bs_top;
  localparam int unsigned TB_B = 32, TB_U = 8;
  `include "ra_bs_tb_body.svh"

  ra_bs_top #(.B(TB_B), .U(TB_U)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_init();
    point(7, 6, 32, 8, 40, 30.0);
    point(8, 6, 32, 8, 30, 30.0);
    point(4, 4, 28, 4, 30, 30.0);
    point(1, 1, 30, 2, 30, 30.0);
    point(2, 3, 29, 8, 30, 30.0);
    point(3, 2, 32, 1, 30, 30.0);
    point(5, 5, 26, 6, 30, 30.0);
    qam16 = 1;
    point(7, 6, 32, 8, 40, 30.0);
    point(6, 5, 30, 4, 30, 30.0);
    tb_finish();
  end
endmodule
