// fp64_mul: double-precision floating-point multiplier with programmable latency.
//
// Computes y = a * b in IEEE-754 binary64 with round-to-nearest-even. The
// 53x53-bit significand product is normalised (it lies in [1,4)), rounded on
// guard and sticky bits and re-packed combinationally, then delayed by LAT
// pipeline registers: one product per clock, result LAT cycles later
// (0 to 12 cycles in the FFT engine's characterisation).
// Design choices of this implementation: subnormal inputs read as zero,
// subnormal results flush to signed zero, overflow gives a signed infinity,
// NaN inputs and 0 * inf give the quiet NaN 0x7FF8000000000000.
module fp64_mul #(
  parameter int LAT = 3
) (
  input  logic        clk,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  logic [63:0] res;

  always_comb begin
    logic        s;
    logic [10:0] ea, eb;
    logic [51:0] fa, fb;
    logic [105:0] p;
    logic [52:0]  mant;
    logic         g, st;
    logic [53:0]  rnd;
    logic signed [13:0] e;
    logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

    s  = a[63] ^ b[63];
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
    p    = {53'd1, fa} * {53'd1, fb};
    mant = '0;
    g    = 1'b0;
    st   = 1'b0;
    rnd  = '0;
    e    = 14'(ea) + 14'(eb) - 14'sd1023;
    res  = '0;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      res = QNAN;
    end else if (a_inf || b_inf) begin
      res = {s, 11'h7FF, 52'd0};
    end else if (a_zero || b_zero) begin
      res = {s, 63'd0};
    end else begin
      if (p[105]) begin
        mant = p[105:53];
        g    = p[52];
        st   = (p[51:0] != '0);
        e    = e + 14'sd1;
      end else begin
        mant = p[104:52];
        g    = p[51];
        st   = (p[50:0] != '0);
      end
      rnd = {1'b0, mant};
      if (g && (st || mant[0])) rnd = rnd + 54'd1;
      if (rnd[53]) begin
        rnd = rnd >> 1;
        e = e + 14'sd1;
      end
      if (e <= 0)              res = {s, 63'd0};
      else if (e >= 14'sd2047) res = {s, 11'h7FF, 52'd0};
      else                     res = {s, e[10:0], rnd[51:0]};
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
