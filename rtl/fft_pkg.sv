// fft_pkg: types and constant functions shared by the 3D FFT node.
//
// A data point is a complex number held as two IEEE-754 binary64 words
// (double precision, the arithmetic the design is built around). The
// twiddle factor W_N^e = exp(-i*2*pi*e/N) is evaluated here at elaboration
// time so that every twiddle ROM is a constant table; no file is read.
// Node coordinates and grid coordinates travel with each data word in the
// transposition network as 16-bit fields, enough for N up to 65536.
package fft_pkg;

  typedef logic [63:0] fp64_t;

  typedef struct packed {
    fp64_t re;
    fp64_t im;
  } cplx_t;

  // A data word with its global grid coordinates (x, y, z) after the
  // transform that produced it, and the node it is addressed to.
  typedef struct packed {
    logic [7:0]  dst_u;
    logic [7:0]  dst_v;
    logic [15:0] cx;
    logic [15:0] cy;
    logic [15:0] cz;
    cplx_t       data;
  } net_word_t;

  // Write request towards the local (HBM) memory.
  typedef struct packed {
    logic        en;
    logic [31:0] addr;
    cplx_t       data;
  } mem_wr_t;

  localparam real PI = 3.14159265358979323846;

  // W_N^e as a pair of doubles.
  function automatic cplx_t twiddle(input int unsigned e, input int unsigned n);
    real ang;
    cplx_t w;
    ang  = -2.0 * PI * real'(e) / real'(n);
    w.re = $realtobits($cos(ang));
    w.im = $realtobits($sin(ang));
    return w;
  endfunction

  // Reverse the low `bits` bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int bits);
    int unsigned r;
    r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

endpackage
