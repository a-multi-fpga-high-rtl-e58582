// net_ctrl: network controller that follows an FFT engine and dispatches its
// results for the next global transposition.
//
// It counts output frames (one frame = one pencil of N points) to know which
// pencil the engine is emitting, combines that with each lane's frequency bin
// into global grid coordinates, and decides the node that owns the point in
// the next decomposition:
//   AXIS = 0 (after the X transform, "X-Y fold"): pencil p of node (u, v)
//     has y = u*N/PU + p mod (N/PU), z = v*N/PV + p div (N/PU), x = bin;
//     the owner is node (x div (N/PU), v), a node of the same grid row.
//   AXIS = 1 (after the Y transform, "Y-Z fold"): pencil p has
//     x = u*N/PU + p mod (N/PU), z = v*N/PV + p div (N/PU), y = bin;
//     the owner is node (u, y div (N/PV)), a node of the same grid column.
//   AXIS = 2 (after the Z transform): pencil p has x = u*N/PU + p mod (N/PU),
//     y = v*N/PV + p div (N/PU), z = bin; every word stays local and goes
//     back to the host.
// Words addressed to this node leave on the loc_* lanes, so the fraction
// 1/PU (or 1/PV) kept locally never enters the network; the rest leave on
// the tx_* lanes with their destination. Output is registered: one cycle.
// The row/column split of the traffic and the local fraction follow the
// published design; the word format and coordinate tagging are choices of
// this implementation.
// The coordinate fields are 16 bits wide for any N up to 65536; for a given
// N their upper bits are constant zero, which synthesis reports as constant
// outputs.
module net_ctrl
  import fft_pkg::*;
#(
  parameter int N    = 4096,
  parameter int R    = 4,
  parameter int PU   = 32,
  parameter int PV   = 32,
  parameter int AXIS = 0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [7:0]           my_u,
  input  logic [7:0]           my_v,
  input  logic                 in_valid,
  input  cplx_t                in_data [2*R],
  input  logic [$clog2(N)-1:0] in_bin [2*R],
  output logic                 loc_valid [2*R],
  output net_word_t            loc_word [2*R],
  output logic                 tx_valid [2*R],
  output net_word_t            tx_word [2*R]
);

  localparam int F   = N / (2 * R);
  localparam int FW  = (F > 1) ? $clog2(F) : 1;
  localparam int NU  = N / PU;      // grid points per node along u
  localparam int NV  = N / PV;      // grid points per node along v

  logic [FW-1:0] step;
  logic [31:0]   pencil;

  always_ff @(posedge clk) begin
    if (rst) begin
      step   <= '0;
      pencil <= '0;
    end else if (in_valid) begin
      if (int'(step) == F - 1) begin
        step   <= '0;
        pencil <= pencil + 32'd1;
      end else begin
        step <= step + FW'(1);
      end
    end
  end

  // coordinates of the current pencil
  logic [15:0] pa, pb;   // the two fixed coordinates of the pencil
  always_comb begin
    pa = 16'(int'(my_u) * NU + int'(pencil % NU));
    pb = 16'(int'(my_v) * NV + int'(pencil / NU));
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < 2 * R; l++) begin
      net_word_t wd;
      logic      local_w;
      wd.data = in_data[l];
      case (AXIS)
        0: begin
          wd.cx = 16'(in_bin[l]); wd.cy = pa; wd.cz = pb;
          wd.dst_u = 8'(int'(in_bin[l]) / NU); wd.dst_v = my_v;
        end
        1: begin
          wd.cx = pa; wd.cy = 16'(in_bin[l]); wd.cz = pb;
          wd.dst_u = my_u; wd.dst_v = 8'(int'(in_bin[l]) / NV);
        end
        default: begin
          wd.cx = pa; wd.cy = pb; wd.cz = 16'(in_bin[l]);
          wd.dst_u = my_u; wd.dst_v = my_v;
        end
      endcase
      local_w = (wd.dst_u == my_u) && (wd.dst_v == my_v);
      loc_word[l] <= wd;
      tx_word[l]  <= wd;
      if (rst) begin
        loc_valid[l] <= 1'b0;
        tx_valid[l]  <= 1'b0;
      end else begin
        loc_valid[l] <= in_valid && local_w;
        tx_valid[l]  <= in_valid && !local_w;
      end
    end
  end

endmodule
