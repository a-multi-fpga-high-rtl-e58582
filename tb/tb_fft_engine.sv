// tb_fft_engine: runs the FFT engine in several configurations, each against
// a direct DFT, and checks the latency against the cycle counts of the
// engine's characterisation tables (N = 512, operator latency 3: 382, 254 and
// 190 cycles for R = 1, 2, 4; operator latency 6 and R = 1: 463; adders 14,
// multipliers 12, R = 2: 533), plus a small N = 16, R = 4 case where the
// rows are fixed-wired in two of the four stages. The last instance is the
// engine at its default size, N = 4096 and R = 4, whose table entry is 680
// cycles.
module tb_fft_engine;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NH = 7;
  int   c [NH], f [NH];
  logic d [NH];

  fft_engine_harness #(.N(512), .R(1), .EXP_LAT(382)) h0 (.clk, .checks(c[0]), .failures(f[0]), .done(d[0]));
  fft_engine_harness #(.N(512), .R(2), .EXP_LAT(254)) h1 (.clk, .checks(c[1]), .failures(f[1]), .done(d[1]));
  fft_engine_harness #(.N(512), .R(4), .EXP_LAT(190)) h2 (.clk, .checks(c[2]), .failures(f[2]), .done(d[2]));
  fft_engine_harness #(.N(512), .R(1), .LAT_ADD(6), .LAT_MUL(6), .EXP_LAT(463))
    h3 (.clk, .checks(c[3]), .failures(f[3]), .done(d[3]));
  fft_engine_harness #(.N(512), .R(2), .LAT_ADD(14), .LAT_MUL(12), .EXP_LAT(533))
    h4 (.clk, .checks(c[4]), .failures(f[4]), .done(d[4]));
  fft_engine_harness #(.N(16), .R(4), .EXP_LAT(4 * 14 + 2)) h5 (.clk, .checks(c[5]), .failures(f[5]), .done(d[5]));
  fft_engine_harness #(.N(4096), .R(4), .EXP_LAT(680)) h6 (.clk, .checks(c[6]), .failures(f[6]), .done(d[6]));

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    #1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && d[6]);
    checks = 0; failures = 0;
    for (int i = 0; i < NH; i++) begin
      checks += c[i];
      failures += f[i];
    end
    if (checks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
