// tb_butterfly: drives random pairs and twiddles into two butterflies, one
// at latency 3/3 and one at 14/12 (adder/multiplier), every cycle with random
// idle cycles between, and checks each result bit for bit against the same
// operation order done in IEEE double arithmetic:
//   Xi = xi + xj
//   Re Xj = (Re xi - Re xj) Re W - (Im xi - Im xj) Im W
//   Im Xj = (Re xi - Re xj) Im W + (Im xi - Im xj) Re W
// and that out_valid follows in_valid by exactly 2*LAT_ADD + LAT_MUL + 4
// cycles (l_but).
module tb_butterfly
  import fft_pkg::*;
;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic  rst, in_valid;
  cplx_t xi, xj, w;
  logic  ov0, ov1;
  cplx_t yi0, yj0, yi1, yj1;
  int    checks = 0, failures = 0;
  int    cyc = 0;

  localparam int LB0 = 2 * 3 + 3 + 4;
  localparam int LB1 = 2 * 14 + 12 + 4;

  butterfly #(.LAT_ADD(3),  .LAT_MUL(3))  d0 (.clk, .rst, .in_valid, .xi, .xj, .w, .out_valid(ov0), .yi(yi0), .yj(yj0));
  butterfly #(.LAT_ADD(14), .LAT_MUL(12)) d1 (.clk, .rst, .in_valid, .xi, .xj, .w, .out_valid(ov1), .yi(yi1), .yj(yj1));

  typedef struct { int t; cplx_t yi; cplx_t yj; } exp_t;
  exp_t q0 [$], q1 [$];

  function automatic fp64_t rnd_fp();
    fp64_t v;
    v[63]    = 1'($urandom);
    v[62:52] = 11'(1013 + int'($urandom % 20));
    v[51:0]  = {20'($urandom), 32'($urandom)};
    return v;
  endfunction

  function automatic fp64_t r2b(real r);
    return $realtobits(r);
  endfunction

  function automatic real b2r(fp64_t b);
    return $bitstoreal(b);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic ov, input cplx_t yi, input cplx_t yj, ref exp_t q [$], input int lb);
    if (ov) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("lat %0d: unexpected output", lb);
      end else begin
        exp_t e;
        e = q.pop_front();
        if (cyc - e.t != lb) begin
          failures++;
          $display("lat %0d: latency %0d", lb, cyc - e.t);
        end
        if (yi !== e.yi || yj !== e.yj) begin
          failures++;
          if (failures < 8)
            $display("lat %0d: got %h %h exp %h %h", lb, yj.re, yj.im, e.yj.re, e.yj.im);
        end
      end
    end
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      check(ov0, yi0, yj0, q0, LB0);
      check(ov1, yi1, yj1, q1, LB1);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; xi = '0; xj = '0; w = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      xi = '{re: rnd_fp(), im: rnd_fp()};
      xj = '{re: rnd_fp(), im: rnd_fp()};
      w  = twiddle($urandom % 512, 512);
      if (in_valid) begin
        exp_t e;
        real a2, a4;
        a2 = b2r(xi.re) - b2r(xj.re);
        a4 = b2r(xi.im) - b2r(xj.im);
        e.t = cyc;
        e.yi = '{re: r2b(b2r(xi.re) + b2r(xj.re)), im: r2b(b2r(xi.im) + b2r(xj.im))};
        e.yj = '{re: r2b(a2 * b2r(w.re) - a4 * b2r(w.im)), im: r2b(a2 * b2r(w.im) + a4 * b2r(w.re))};
        q0.push_back(e);
        q1.push_back(e);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LB1 + 5) @(negedge clk);
    checks++;
    if (q0.size() != 0 || q1.size() != 0) begin
      failures++;
      $display("results missing: %0d %0d", q0.size(), q1.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
