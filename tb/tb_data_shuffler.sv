// tb_data_shuffler: runs the shuffler harness for delays L = 1, 2, 4 and 64
// and reports the summed checks.
module tb_data_shuffler;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  localparam int NI = 4;
  int   c [NI], f [NI];
  logic d [NI];

  shuffler_harness #(.L(1))  h0 (.clk, .checks(c[0]), .failures(f[0]), .done(d[0]));
  shuffler_harness #(.L(2))  h1 (.clk, .checks(c[1]), .failures(f[1]), .done(d[1]));
  shuffler_harness #(.L(4))  h2 (.clk, .checks(c[2]), .failures(f[2]), .done(d[2]));
  shuffler_harness #(.L(64)) h3 (.clk, .checks(c[3]), .failures(f[3]), .done(d[3]));

  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    #20;
    wait (d[0] && d[1] && d[2] && d[3]);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum());
    $finish;
  end
endmodule
