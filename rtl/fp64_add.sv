// fp64_add: double-precision floating-point adder with programmable latency.
//
// Computes y = a + b (or a - b when `sub` is set) in IEEE-754 binary64 with
// round-to-nearest-even. The sum is formed combinationally with the usual
// align / add-or-subtract / normalise / round sequence using guard, round and
// sticky bits, then passes through LAT pipeline registers, so a new operand
// pair can be applied on every clock and the result appears LAT cycles later
// (LAT = 0 gives a purely combinational unit). This matches the operator the
// butterfly needs: fully pipelined, one operation per cycle, latency set at
// design time (0 to 14 cycles in the FFT engine's characterisation).
// Design choices of this implementation: subnormal inputs are read as zero
// and subnormal results are flushed to zero; an exact cancellation gives +0;
// any NaN operand, or inf - inf, gives the quiet NaN 0x7FF8000000000000.
module fp64_add #(
  parameter int LAT = 3
) (
  input  logic        clk,
  input  logic [63:0] a,
  input  logic [63:0] b,
  input  logic        sub,
  output logic [63:0] y
);

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic [63:0] res;

  always_comb begin
    logic        sa, sb, sl, ss;
    logic [10:0] ea, eb, el, es;
    logic [51:0] fa, fb;
    logic [52:0] ml, ms;
    logic [55:0] xl, xs, shifted;
    logic [56:0] sum;
    logic [55:0] m;
    logic        sticky;
    logic [11:0] d;
    logic signed [13:0] e;
    logic [53:0] rnd;
    int          lz;
    logic        a_inf, b_inf, a_nan, b_nan, a_zero, b_zero;

    sa = a[63];
    sb = b[63] ^ sub;
    ea = a[62:52];
    eb = b[62:52];
    fa = a[51:0];
    fb = b[51:0];
    a_nan  = (ea == 11'h7FF) && (fa != '0);
    b_nan  = (eb == 11'h7FF) && (fb != '0);
    a_inf  = (ea == 11'h7FF) && (fa == '0);
    b_inf  = (eb == 11'h7FF) && (fb == '0);
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    res = '0;
    sum = '0;
    m = '0;
    e = '0;
    rnd = '0;
    lz = 0;
    sticky = 1'b0;
    shifted = '0;

    // Order the operands by magnitude: l is the larger one.
    if ({ea, fa} >= {eb, fb}) begin
      sl = sa; el = ea; ml = {1'b1, fa};
      ss = sb; es = eb; ms = {1'b1, fb};
    end else begin
      sl = sb; el = eb; ml = {1'b1, fb};
      ss = sa; es = ea; ms = {1'b1, fa};
    end
    d  = {1'b0, el} - {1'b0, es};
    xl = {ml, 3'b000};
    xs = {ms, 3'b000};

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      res = QNAN;
    end else if (a_inf) begin
      res = {sa, 11'h7FF, 52'd0};
    end else if (b_inf) begin
      res = {sb, 11'h7FF, 52'd0};
    end else if (a_zero && b_zero) begin
      res = {sa & sb, 63'd0};
    end else if (b_zero) begin
      res = {sa, a[62:0]};
    end else if (a_zero) begin
      res = {sb, b[62:0]};
    end else begin
      // Align the smaller operand, collecting the bits shifted out as sticky.
      if (d >= 12'd56) begin
        shifted = '0;
        sticky  = 1'b1;
      end else begin
        shifted = xs >> d;
        sticky  = ((shifted << d) != xs);
      end
      shifted[0] = shifted[0] | sticky;
      e = 14'(el);
      if (sl == ss) begin
        sum = {1'b0, xl} + {1'b0, shifted};
        if (sum[56]) begin
          m = sum[56:1];
          m[0] = m[0] | sum[0];
          e = e + 14'sd1;
        end else begin
          m = sum[55:0];
        end
      end else begin
        m = xl - shifted;
        lz = 0;
        for (int i = 55; i >= 0; i--) begin
          if (m[i]) break;
          lz++;
        end
        m = m << lz;
        e = e - 14'(lz);
      end
      if (m == '0) begin
        res = '0;
      end else begin
        // Round to nearest, ties to even, on guard/round/sticky.
        rnd = {1'b0, m[55:3]};
        if (m[2] && (m[1] || m[0] || m[3])) rnd = rnd + 54'd1;
        if (rnd[53]) begin
          rnd = rnd >> 1;
          e = e + 14'sd1;
        end
        if (e <= 0)            res = {sl, 63'd0};
        else if (e >= 14'sd2047) res = {sl, 11'h7FF, 52'd0};
        else                   res = {sl, e[10:0], rnd[51:0]};
      end
    end
  end

  generate
    if (LAT == 0) begin : g_comb
      assign y = res;
    end else begin : g_pipe
      logic [63:0] pipe [LAT];
      always_ff @(posedge clk) begin
        pipe[0] <= res;
        for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
      end
      assign y = pipe[LAT-1];
    end
  endgenerate

endmodule
