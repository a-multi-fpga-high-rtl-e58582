// butterfly: radix-2 decimation-in-frequency butterfly in double precision.
//
// Given the pair (xi, xj) and the twiddle factor W it produces
//   Xi = xi + xj
//   Xj = (xi - xj) * W
// with four adders/subtractors, four multipliers and two more adders, all
// fully pipelined, so a new pair is accepted on every clock.
// The work is split in three stages separated by registers:
//   stage A  A1 = Re(xi)+Re(xj)  A2 = Re(xi)-Re(xj)
//            A3 = Im(xi)+Im(xj)  A4 = Im(xi)-Im(xj)   (W delayed alongside)
//   stage B  B1 = A2*Re(W)  B2 = A4*Im(W)  B3 = A2*Im(W)  B4 = A4*Re(W)
//            (A1, A3 delayed alongside)
//   stage C  C1 = B1 - B2 = Re(Xj)   C2 = B3 + B4 = Im(Xj)
// Inputs are registered once on entry and each stage result once on exit,
// so the latency is l_but = LAT_ADD + LAT_MUL + LAT_ADD + 4 cycles.
// The stage structure, the operator counts and the latency formula follow the
// published design. Its stage-C listing pairs the products differently
// (C1 = B1 - B4, C2 = B2 + B3), which does not give the butterfly it defines
// with the B products listed; this module combines them as the butterfly
// equations require. in_valid is carried alongside the data.
module butterfly
  import fft_pkg::*;
#(
  parameter int LAT_ADD = 3,
  parameter int LAT_MUL = 3
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cplx_t xi,
  input  cplx_t xj,
  input  cplx_t w,
  output logic  out_valid,
  output cplx_t yi,
  output cplx_t yj
);

  localparam int LBUT = 2 * LAT_ADD + LAT_MUL + 4;

  // input registration
  cplx_t xi_r, xj_r, w_r;
  always_ff @(posedge clk) begin
    xi_r <= xi;
    xj_r <= xj;
    w_r  <= w;
  end

  // ---- stage A ----
  fp64_t a1, a2, a3, a4;
  fp64_t a1_r, a2_r, a3_r, a4_r;
  fp64_add #(.LAT(LAT_ADD)) u_a1 (.clk, .a(xi_r.re), .b(xj_r.re), .sub(1'b0), .y(a1));
  fp64_add #(.LAT(LAT_ADD)) u_a2 (.clk, .a(xi_r.re), .b(xj_r.re), .sub(1'b1), .y(a2));
  fp64_add #(.LAT(LAT_ADD)) u_a3 (.clk, .a(xi_r.im), .b(xj_r.im), .sub(1'b0), .y(a3));
  fp64_add #(.LAT(LAT_ADD)) u_a4 (.clk, .a(xi_r.im), .b(xj_r.im), .sub(1'b1), .y(a4));

  // W delayed by the adder latency plus the stage register
  cplx_t w_a;
  generate
    if (LAT_ADD == 0) begin : g_wa0
      assign w_a = w_r;
    end else begin : g_wa
      cplx_t wd [LAT_ADD];
      always_ff @(posedge clk) begin
        wd[0] <= w_r;
        for (int i = 1; i < LAT_ADD; i++) wd[i] <= wd[i-1];
      end
      assign w_a = wd[LAT_ADD-1];
    end
  endgenerate

  cplx_t w_ar;
  always_ff @(posedge clk) begin
    a1_r <= a1; a2_r <= a2; a3_r <= a3; a4_r <= a4;
    w_ar <= w_a;
  end

  // ---- stage B ----
  fp64_t b1, b2, b3, b4;
  fp64_t b1_r, b2_r, b3_r, b4_r;
  fp64_mul #(.LAT(LAT_MUL)) u_b1 (.clk, .a(a2_r), .b(w_ar.re), .y(b1));
  fp64_mul #(.LAT(LAT_MUL)) u_b2 (.clk, .a(a4_r), .b(w_ar.im), .y(b2));
  fp64_mul #(.LAT(LAT_MUL)) u_b3 (.clk, .a(a2_r), .b(w_ar.im), .y(b3));
  fp64_mul #(.LAT(LAT_MUL)) u_b4 (.clk, .a(a4_r), .b(w_ar.re), .y(b4));
  always_ff @(posedge clk) begin
    b1_r <= b1; b2_r <= b2; b3_r <= b3; b4_r <= b4;
  end

  // ---- stage C ----
  fp64_t c1, c2;
  fp64_add #(.LAT(LAT_ADD)) u_c1 (.clk, .a(b1_r), .b(b2_r), .sub(1'b1), .y(c1));
  fp64_add #(.LAT(LAT_ADD)) u_c2 (.clk, .a(b3_r), .b(b4_r), .sub(1'b0), .y(c2));

  // A1 and A3 travel through stages B and C on register chains
  localparam int LSUM = LAT_MUL + 1 + LAT_ADD + 1;
  cplx_t sd [LSUM];
  always_ff @(posedge clk) begin
    sd[0] <= '{re: a1_r, im: a3_r};
    for (int i = 1; i < LSUM; i++) sd[i] <= sd[i-1];
  end

  always_ff @(posedge clk) begin
    yj <= '{re: c1, im: c2};
  end
  assign yi = sd[LSUM-1];

  // valid travels with the data
  logic [LBUT-1:0] vd;
  always_ff @(posedge clk) begin
    if (rst) vd <= '0;
    else     vd <= {vd[LBUT-2:0], in_valid};
  end
  assign out_valid = vd[LBUT-1];

endmodule
