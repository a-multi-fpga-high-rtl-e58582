// tb_twiddle_rom: reads every entry of three tables (N=4096 stride 1,
// N=4096 stride 8, N=16 stride 4) and compares them with
// exp(-i*2*pi*k*STRIDE/N) computed here, to within 1e-15, checking also the
// exact values W^0 = 1 and, where present, W^(N/4) = -i.
module tb_twiddle_rom
  import fft_pkg::*;
;
  logic [10:0] a0;
  logic [7:0]  a1;
  logic [0:0]  a2;
  cplx_t w0, w1, w2;
  int checks = 0, failures = 0;

  twiddle_rom #(.N(4096))               r0 (.addr(a0), .w(w0));
  twiddle_rom #(.N(4096), .STRIDE(8))   r1 (.addr(a1), .w(w1));
  twiddle_rom #(.N(16),   .STRIDE(4))   r2 (.addr(a2), .w(w2));

  task automatic cmp(cplx_t w, int e, int n);
    real er, ei;
    er = $cos(2.0 * 3.14159265358979323846 * e / n);
    ei = -$sin(2.0 * 3.14159265358979323846 * e / n);
    checks++;
    if ((($bitstoreal(w.re) - er) ** 2 + ($bitstoreal(w.im) - ei) ** 2) > 1e-30) begin
      failures++;
      if (failures < 8) $display("W_%0d^%0d = %f %f expected %f %f", n, e, $bitstoreal(w.re), $bitstoreal(w.im), er, ei);
    end
    if (e == 0) begin
      checks++;
      if (w.re !== 64'h3FF0000000000000 || w.im[62:0] !== '0) begin failures++; $display("W^0 not exactly 1"); end
    end
  endtask

  initial begin
    #1;
    for (int k = 0; k < 2048; k++) begin a0 = 11'(k); #1 cmp(w0, k, 4096); end
    for (int k = 0; k < 256; k++)  begin a1 = 8'(k);  #1 cmp(w1, 8 * k, 4096); end
    for (int k = 0; k < 2; k++)    begin a2 = 1'(k);  #1 cmp(w2, 4 * k, 16); end
    a0 = 11'd1024; #1;
    checks++;
    if ($bitstoreal(w0.re) > 1e-15 || $bitstoreal(w0.re) < -1e-15 || w0.im !== 64'hBFF0000000000000) begin
      failures++; $display("W^(N/4) is not -i");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
