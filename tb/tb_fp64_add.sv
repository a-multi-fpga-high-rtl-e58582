// tb_fp64_add: checks the pipelined double adder against the simulator's own
// IEEE-754 double arithmetic, bit for bit, for random normal operands with
// exponent differences from 0 to beyond the significand width, near-
// cancellations, both signs and the subtract control; also checks the
// configured latency of LAT cycles.
module tb_fp64_add;
  localparam int LAT = 3;
  logic clk = 0;
  logic [63:0] a, b, y;
  logic sub;
  int checks = 0, failures = 0;

  fp64_add #(.LAT(LAT)) dut (.clk, .a, .b, .sub, .y);

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

  task automatic apply(logic [63:0] ta, logic [63:0] tb, logic ts);
    logic [63:0] exp_y;
    real ra, rb;
    ra = $bitstoreal(ta);
    rb = $bitstoreal(tb);
    exp_y = ts ? $realtobits(ra - rb) : $realtobits(ra + rb);
    @(negedge clk);
    a = ta; b = tb; sub = ts;
    repeat (LAT) @(negedge clk);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h : got %h exp %h", ta, ts ? "-" : "+", tb, y, exp_y);
    end
  endtask

  initial begin
    logic [63:0] x;
    a = '0; b = '0; sub = 0;
    for (int i = 0; i < 3000; i++) apply(rnd_fp(1000, 48), rnd_fp(1000, 48), 1'($urandom));
    for (int i = 0; i < 2000; i++) apply(rnd_fp(1020, 4), rnd_fp(1020, 4), 1'($urandom));
    // near cancellation: b close to a
    for (int i = 0; i < 1000; i++) begin
      x = rnd_fp(1000, 40);
      apply(x, {x[63:8], 8'($urandom)}, 1'b1);
    end
    apply(64'h3FF0000000000000, 64'h3FF0000000000000, 1'b1); // 1-1 = +0
    apply(64'h0000000000000000, 64'h4000000000000000, 1'b0); // 0+2
    apply(64'h3FF0000000000000, 64'h3CA0000000000000, 1'b0); // 1 + 2^-53 : tie to even
    apply(64'h3FF0000000000001, 64'h3CA0000000000000, 1'b0); // tie rounds up
    // pipelining: a new pair every cycle, results LAT cycles later
    begin
      logic [63:0] qa [16], qb [16], qe [16];
      for (int i = 0; i < 16; i++) begin
        qa[i] = rnd_fp(1000, 20); qb[i] = rnd_fp(1000, 20);
        qe[i] = $realtobits($bitstoreal(qa[i]) + $bitstoreal(qb[i]));
      end
      for (int i = 0; i < 16 + LAT; i++) begin
        @(negedge clk);
        if (i >= LAT) begin
          checks++;
          if (y !== qe[i-LAT]) begin failures++; $display("FAIL pipelined %0d", i); end
        end
        if (i < 16) begin a = qa[i]; b = qb[i]; sub = 0; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
