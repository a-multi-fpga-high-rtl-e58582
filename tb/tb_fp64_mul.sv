// tb_fp64_mul: checks the pipelined double multiplier bit for bit against the
// simulator's IEEE-754 double product for random normal operands, special
// values (zero, infinity, one) and back-to-back operation with the
// configured LAT-cycle latency.
module tb_fp64_mul;
  localparam int LAT = 3;
  logic clk = 0;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  fp64_mul #(.LAT(LAT)) dut (.clk, .a, .b, .y);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_fp(int emin, int span);
    logic [63:0] v;
    v[63]    = 1'($urandom);
    v[62:52] = 11'(emin + int'($urandom % span));
    v[51:0]  = {20'($urandom), 32'($urandom)};
    return v;
  endfunction

  task automatic apply(logic [63:0] ta, logic [63:0] tb);
    logic [63:0] exp_y;
    exp_y = $realtobits($bitstoreal(ta) * $bitstoreal(tb));
    @(negedge clk);
    a = ta; b = tb;
    repeat (LAT) @(negedge clk);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h : got %h exp %h", ta, tb, y, exp_y);
    end
  endtask

  initial begin
    a = '0; b = '0;
    for (int i = 0; i < 5000; i++) apply(rnd_fp(900, 240), rnd_fp(900, 240));
    apply(64'h3FF0000000000000, 64'h4008000000000000);   // 1*3
    apply(64'h0000000000000000, 64'hC008000000000000);   // 0*-3 = -0
    apply(64'h7FF0000000000000, 64'h4008000000000000);   // inf*3
    begin
      logic [63:0] qa [16], qb [16], qe [16];
      for (int i = 0; i < 16; i++) begin
        qa[i] = rnd_fp(1000, 20); qb[i] = rnd_fp(1000, 20);
        qe[i] = $realtobits($bitstoreal(qa[i]) * $bitstoreal(qb[i]));
      end
      for (int i = 0; i < 16 + LAT; i++) begin
        @(negedge clk);
        if (i >= LAT) begin
          checks++;
          if (y !== qe[i-LAT]) begin failures++; $display("FAIL pipelined %0d", i); end
        end
        if (i < 16) begin a = qa[i]; b = qb[i]; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
