// fft_engine: N-point radix-2 DIF FFT in double precision, parallel-pipelined
// with R rows (2R complex words in and out per clock).
//
// The engine is a chain of S = log2(N) stages; each stage has R butterfly
// units (one per row) with their twiddle ROMs. Input lane 2r carries
// x[r*N/(2R) + t] and lane 2r+1 carries x[r*N/(2R) + t + N/2] at step t of a
// frame of F = N/(2R) consecutive cycles, one frame per transform.
//  * Stages 1 .. log2(R): the two halves of each butterfly group are
//    exchanged between rows by fixed wiring (a perfect shuffle of the rows of
//    the group), after one register.
//  * Stages log2(R)+1 .. S-1: each row is followed by a data shuffler with
//    L(s) = N/2^(s+1) (N/(4R) down to 1).
//  * Stage S: one output register.
// One input register completes the chain, so the latency from the first input
// pair of a frame to the first output pair is
//   1 + S*l_but + S + N/(2R) - 1,   l_but = 2*LAT_ADD + LAT_MUL + 4,
// which for R = 1 is l_FFT + 1 with l_FFT = (l_but + 1)*log2(N) + N/2 - 1.
// The throughput is one frame every N/(2R) cycles; frames may follow each
// other back to back or with gaps, but the cycles of one frame must be
// consecutive.
// Outputs come in bit-reversed order. Lane 2r at output step t holds bin
// bitrev(r*N/R + 2t) and lane 2r+1 bin bitrev(r*N/R + 2t + 1); the engine
// reports each lane's bin on out_bin so the memory writer downstream can put
// it at its natural place, which replaces a separate reordering buffer.
// Stage structure, shuffler lengths, the twiddle ROMs and the latency follow
// the published engine. The published figures for R = 2 also cross the rows
// between each butterfly and its shuffler, and label the last shuffler of a
// row L = 1 after stage S; here rows are independent after the fixed-wired
// stages and the shuffler lengths are those of the published latency
// formula. Bin tagging is a choice of this implementation.
module fft_engine
  import fft_pkg::*;
#(
  parameter int N       = 4096,
  parameter int R       = 4,
  parameter int LAT_ADD = 3,
  parameter int LAT_MUL = 3
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_valid,
  input  cplx_t                 in_data [2*R],
  output logic                  out_valid,
  output cplx_t                 out_data [2*R],
  output logic [$clog2(N)-1:0]  out_bin [2*R]
);

  localparam int S    = $clog2(N);
  localparam int MFIX = $clog2(R);
  localparam int F    = N / (2 * R);
  localparam int FW   = (F > 1) ? $clog2(F) : 1;

  // stage boundary signals: index 0 is the registered engine input
  logic  st_v [S+1];
  cplx_t st_d [S+1][2*R];

  always_ff @(posedge clk) begin
    if (rst) st_v[0] <= 1'b0;
    else     st_v[0] <= in_valid;
    st_d[0] <= in_data;
  end

  for (genvar i = 0; i < S; i++) begin : g_stage
    localparam int SN    = i + 1;                 // stage number s
    localparam int DEPTH = N >> SN;               // twiddles this stage reads
    localparam int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

    // position of the current pair in its frame
    logic [FW-1:0] pos;
    always_ff @(posedge clk) begin
      if (rst)          pos <= '0;
      else if (st_v[i]) pos <= (F > 1) ? pos + FW'(1) : '0;
    end

    logic  bf_v [R];
    cplx_t bf_a [R];
    cplx_t bf_b [R];

    for (genvar r = 0; r < R; r++) begin : g_row
      logic [AW-1:0] addr;
      cplx_t         w;
      if (SN <= MFIX) begin : g_fixaddr
        localparam int G  = R >> i;
        localparam int RR = r % G;
        assign addr = AW'(RR * F + int'(pos));
      end else begin : g_rowaddr
        assign addr = AW'(pos);
      end
      twiddle_rom #(.N(N), .STRIDE(1 << i), .DEPTH(DEPTH)) u_rom (.addr, .w);
      butterfly #(.LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_bf (
        .clk, .rst,
        .in_valid (st_v[i]),
        .xi       (st_d[i][2*r]),
        .xj       (st_d[i][2*r+1]),
        .w,
        .out_valid(bf_v[r]),
        .yi       (bf_a[r]),
        .yj       (bf_b[r])
      );
    end

    if (SN <= MFIX) begin : g_fixed
      // register, then perfect shuffle of the rows inside each group of G
      localparam int G = R >> i;
      localparam int H = G / 2;
      cplx_t ra [R];
      cplx_t rb [R];
      always_ff @(posedge clk) begin
        if (rst) st_v[i+1] <= 1'b0;
        else     st_v[i+1] <= bf_v[0];
        ra <= bf_a;
        rb <= bf_b;
      end
      for (genvar nr = 0; nr < R; nr++) begin : g_perm
        localparam int B = (nr / G) * G;
        localparam int J = nr % G;
        if (J < H) begin : g_even
          assign st_d[i+1][2*nr]   = ra[B + J];
          assign st_d[i+1][2*nr+1] = ra[B + J + H];
        end else begin : g_odd
          assign st_d[i+1][2*nr]   = rb[B + J - H];
          assign st_d[i+1][2*nr+1] = rb[B + J - H + H];
        end
      end
    end else if (SN < S) begin : g_shuf
      logic sh_v [R];
      for (genvar r = 0; r < R; r++) begin : g_row_sh
        data_shuffler #(.L(N >> (SN + 1))) u_sh (
          .clk, .rst,
          .in_valid (bf_v[r]),
          .in_a     (bf_a[r]),
          .in_b     (bf_b[r]),
          .out_valid(sh_v[r]),
          .out_a    (st_d[i+1][2*r]),
          .out_b    (st_d[i+1][2*r+1])
        );
      end
      assign st_v[i+1] = sh_v[0];
    end else begin : g_last
      always_ff @(posedge clk) begin
        if (rst) st_v[i+1] <= 1'b0;
        else     st_v[i+1] <= bf_v[0];
        for (int r = 0; r < R; r++) begin
          st_d[i+1][2*r]   <= bf_a[r];
          st_d[i+1][2*r+1] <= bf_b[r];
        end
      end
    end
  end

  // output position and bin tags
  logic [FW-1:0] opos;
  always_ff @(posedge clk) begin
    if (rst)          opos <= '0;
    else if (st_v[S]) opos <= (F > 1) ? opos + FW'(1) : '0;
  end

  assign out_valid = st_v[S];
  assign out_data  = st_d[S];
  always_comb begin
    for (int r = 0; r < R; r++) begin
      out_bin[2*r]   = S'(bitrev(r * (N / R) + 2 * int'(opos), S));
      out_bin[2*r+1] = S'(bitrev(r * (N / R) + 2 * int'(opos) + 1, S));
    end
  end

  initial begin
    assert (N >= 4 * R && (1 << S) == N && (1 << MFIX) == R)
      else $error("fft_engine: N and R must be powers of two with N >= 4R");
  end

endmodule
