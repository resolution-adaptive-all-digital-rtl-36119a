// tb_ra_bs_top_full: end-to-end test of ra_bs_top at its default size
// (256 antennas, up to 64 UEs, q up to 8, k up to 6). It runs the paper's
// worst-case operating point (64 UEs, q=7, k=6, all 256 antennas) and then
// a reduced point (16 UEs, q=4, k=3, 240 centre antennas) with QPSK, and the
// worst case again with 16-QAM, the modulation that sets it. See
// ra_bs_tb_body.svh for the link model and the reference.
module tb_ra_bs_top_full;
  import ra_pkg::*;
  localparam int unsigned TB_B = B_ANT, TB_U = U_MAX;
  `include "ra_bs_tb_body.svh"

  ra_bs_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tb_init();
    point(7, 6, 256, 64, 24, 30.0);
    point(4, 3, 240, 16, 24, 30.0);
    qam16 = 1;
    point(7, 6, 256, 64, 24, 30.0);
    tb_finish();
  end
endmodule
