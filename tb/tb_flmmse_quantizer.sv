// tb_flmmse_quantizer: self-checking test of the FL-MMSE row quantizer.
//
// Streams random L-MMSE rows (random length, antenna order and k = 1..6),
// with random stalls on the output, and compares each emitted code with
// floor(w / Delta), Delta = max|Re,Im| * 2^(1-k), clipped to k bits, worked
// out here in real arithmetic. Also checks that every entry comes out once,
// in order, with its antenna index, the last flag and the UE index, that the
// input is refused while a row is emitted, and that busy tracks the row.
module tb_flmmse_quantizer;
  import ra_pkg::*;

  localparam int unsigned B = 16, U = 4, KM = 6, WW = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] k;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last, busy;
  logic [1:0] in_ue, out_ue;
  logic [3:0] in_ant, out_ant;
  logic signed [WW-1:0] w_re, w_im;
  logic [KM-1:0] out_nre, out_nim;

  flmmse_quantizer #(.B(B), .U(U), .KM(KM), .WW(WW)) dut (.*);

  int checks = 0, failures = 0, refused = 0;
  int wr [B], wi [B], ant [B];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_q(input int w, input int m, input int kb);
    real delta;
    int n;
    if (m == 0) return 0;
    delta = real'(m) * (2.0 ** (1 - kb));
    n = int'($floor(real'(w) / delta));
    if (n > (1 << (kb - 1)) - 1) n = (1 << (kb - 1)) - 1;
    if (n < -(1 << (kb - 1))) n = -(1 << (kb - 1));
    return n;
  endfunction

  task automatic row(input int u, input int len, input int kb, input int amp);
    int m, perm [B], got;
    m = 0;
    for (int b = 0; b < B; b++) perm[b] = b;
    for (int b = B - 1; b > 0; b--) begin
      int j = int'($urandom_range(0, b));
      int tmp = perm[b]; perm[b] = perm[j]; perm[j] = tmp;
    end
    for (int i = 0; i < len; i++) begin
      wr[i] = int'($urandom_range(0, 2 * amp)) - amp;
      wi[i] = int'($urandom_range(0, 2 * amp)) - amp;
      ant[i] = perm[i];
      if ((wr[i] < 0 ? -wr[i] : wr[i]) > m) m = (wr[i] < 0 ? -wr[i] : wr[i]);
      if ((wi[i] < 0 ? -wi[i] : wi[i]) > m) m = (wi[i] < 0 ? -wi[i] : wi[i]);
    end
    k = 4'(kb);
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      in_valid = 1; in_ue = 2'(u); in_ant = 4'(ant[i]); in_last = (i == len - 1);
      w_re = WW'(wr[i]); w_im = WW'(wi[i]);
      #1;
      check(in_ready, "input refused while filling");
    end
    @(negedge clk);
    in_valid = 0;
    got = 0;
    while (got < len) begin
      out_ready = ($urandom_range(0, 3) != 0);
      in_valid = 1; in_last = 0;   // a new row must be held back while emitting
      #1;
      check(!in_ready, "input accepted during emission");
      if (!in_ready) refused++;
      check(busy, "busy low during emission");
      if (out_valid && out_ready) begin
        int er = ref_q(wr[got], m, kb), ei = ref_q(wi[got], m, kb);
        check($signed(out_nre) == KM'(er) && $signed(out_nim) == KM'(ei) &&
              out_ant == 4'(ant[got]) && out_ue == 2'(u) && out_last == (got == len - 1),
              $sformatf("k=%0d entry %0d w=(%0d,%0d) max=%0d: got (%0d,%0d) ant %0d, expected (%0d,%0d) ant %0d",
                        kb, got, wr[got], wi[got], m, $signed(out_nre), $signed(out_nim), out_ant,
                        er, ei, ant[got]));
        got++;
      end
      @(negedge clk);
      in_valid = 0;
    end
    out_ready = 0;
    #1;
    check(!busy && !out_valid && in_ready, "quantizer not back to idle after the row");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_last = 0; in_ue = 0; in_ant = 0; w_re = 0; w_im = 0; out_ready = 0; k = 6;
    repeat (2) @(negedge clk);
    rst_n = 1;
    row(0, B, 6, 2047);
    row(1, 1, 1, 100);
    row(2, 5, 3, 0);           // all-zero row
    for (int r = 0; r < 200; r++)
      row(int'($urandom_range(0, U - 1)), int'($urandom_range(1, B)), int'($urandom_range(1, KM)),
          int'($urandom_range(1, 2047)));
    check(refused > 0, "input was never refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
