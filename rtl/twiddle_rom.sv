// twiddle_rom: constant table of the twiddle factors used by one butterfly.
//
// Entry k holds W_N^(k*STRIDE) = exp(-i*2*pi*k*STRIDE/N) as two doubles, for
// k = 0 .. DEPTH-1. A butterfly of stage s works on sub-transforms of size
// N/2^(s-1) and needs W_N at multiples of STRIDE = 2^(s-1), so each stage gets
// only the DEPTH = N/2^s entries it reads. The table is computed at
// elaboration from cos/sin (no data file); the read is combinational, the
// butterfly registers the factor on entry.
// That the factors come from a predefined ROM addressed by pipeline step and
// row follows the published design; one table per butterfly is a choice of
// this implementation.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int N      = 4096,
  parameter int STRIDE = 1,
  parameter int DEPTH  = N / (2 * STRIDE)
) (
  input  logic [$clog2(DEPTH > 1 ? DEPTH : 2)-1:0] addr,
  output cplx_t                                    w
);

  cplx_t table_q [DEPTH];

  for (genvar k = 0; k < DEPTH; k++) begin : g_entry
    localparam cplx_t ENTRY = twiddle(k * STRIDE, N);
    assign table_q[k] = ENTRY;
  end

  assign w = table_q[addr];

endmodule
