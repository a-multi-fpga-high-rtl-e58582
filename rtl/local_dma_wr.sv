// local_dma_wr: local-memory write controller that performs a transposition.
//
// It accepts up to 4R words per cycle, 2R kept locally by this node's network
// controller and 2R received from the network, turns each word's global grid
// coordinates into a local memory address and issues one write per word on
// its own memory lane (the local memory offers many independent ports).
//   MODE = 0 (X-to-Y buffer): address = ((z - v*N/PV)*(N/PU) + (x - u*N/PU))*N + y
//     so that words arriving along x are written with stride N and Y pencils
//     can later be read with stride 1. A "plane" is one local z.
//   MODE = 1 (Y-to-Z buffer): address = ((y - v*N/PV)*(N/PU) + (x - u*N/PU))*N + z
//     so words arriving along y are written with stride N*N/PU and Z pencils
//     are read with stride 1. The whole buffer is one plane.
// It counts the words written to every plane and raises plane_ready[p] once
// plane p is complete; the matching reader starts a plane only then. This is
// what lets the Y transform begin after the first plane instead of after the
// whole volume. Writes take one cycle (registered). One transform per reset:
// the counters are cleared only by rst.
// Strided writes to local memory for the transposition follow the published
// design; its aggregation FIFOs for long bursts and clock-domain crossing
// are not modelled: this controller presents single-word writes on 4R lanes.
module local_dma_wr
  import fft_pkg::*;
#(
  parameter int N    = 4096,
  parameter int R    = 4,
  parameter int PU   = 32,
  parameter int PV   = 32,
  parameter int MODE = 0,
  localparam int NPLANES = (MODE == 0) ? N / PV : 1
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] my_u,
  input  logic [7:0] my_v,
  input  logic       in_valid [4*R],
  input  net_word_t  in_word [4*R],
  output mem_wr_t    mem_wr [4*R],
  output logic [NPLANES-1:0] plane_ready
);

  localparam int NU = N / PU;
  localparam int NV = N / PV;
  localparam longint PLANE_WORDS = (MODE == 0) ? longint'(N) * NU : longint'(N) * NU * NV;
  localparam int PLW = $clog2(PLANE_WORDS + 1);
  localparam int LW  = $clog2(4 * R + 1);

  logic [31:0] addr  [4*R];
  int unsigned plane [4*R];

  always_comb begin
    for (int l = 0; l < 4 * R; l++) begin
      int unsigned xl, pl, inner;
      xl = int'(in_word[l].cx) - int'(my_u) * NU;
      if (MODE == 0) begin
        pl    = int'(in_word[l].cz) - int'(my_v) * NV;
        inner = int'(in_word[l].cy);
        plane[l] = pl;
      end else begin
        pl    = int'(in_word[l].cy) - int'(my_v) * NV;
        inner = int'(in_word[l].cz);
        plane[l] = 0;
      end
      addr[l] = 32'((pl * NU + xl) * N + inner);
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < 4 * R; l++) begin
      mem_wr[l].addr <= addr[l];
      mem_wr[l].data <= in_word[l].data;
      if (rst) mem_wr[l].en <= 1'b0;
      else     mem_wr[l].en <= in_valid[l];
    end
  end

  // per-plane completion counters
  logic [PLW-1:0] cnt [NPLANES];
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPLANES; p++) begin
      logic [LW-1:0] inc;
      inc = '0;
      for (int l = 0; l < 4 * R; l++)
        if (in_valid[l] && plane[l] == p) inc = inc + LW'(1);
      if (rst) cnt[p] <= '0;
      else     cnt[p] <= cnt[p] + PLW'(inc);
    end
  end

  always_comb begin
    for (int p = 0; p < NPLANES; p++) plane_ready[p] = (cnt[p] == PLW'(PLANE_WORDS));
  end

  // every word must belong to this node
  for (genvar l = 0; l < 4 * R; l++) begin : g_chk
    assert property (@(posedge clk) disable iff (rst)
      in_valid[l] |-> (in_word[l].dst_u == my_u && in_word[l].dst_v == my_v));
  end

endmodule
