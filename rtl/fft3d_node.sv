// fft3d_node: the FPGA part of one computing node of the distributed 3D FFT
// machine, organised as the pipelined architecture.
//
// P = PU x PV nodes hold an N^3 grid in a 2D ("pencil") decomposition: node
// (u, v) starts with the X pencils for y in [u*N/PU, (u+1)*N/PU) and
// z in [v*N/PV, (v+1)*N/PV). Inside the node the data streams through
//   host in -> X FFT engine -> net_ctrl(u) -> [row network] -> local_dma_wr(Y)
//   -> local memory -> local_dma_rd -> Y FFT engine -> net_ctrl(v)
//   -> [column network] -> local_dma_wr(Z) -> local memory -> local_dma_rd
//   -> Z FFT engine -> net_ctrl(host) -> host out
// The X-to-Y exchange runs among the PU nodes of a grid row, the Y-to-Z
// exchange among the PV nodes of a grid column, and each network controller
// keeps its 1/PU (1/PV) share locally. Because the Y buffer tracks completion
// plane by plane, the Y transform starts as soon as the first z-plane of Y
// pencils is complete, while X pencils are still streaming in; the Z
// transform starts when the Z buffer is complete.
// Interfaces (plain arrays of structs):
//   host_in_*   X pencils from the host DMA, 2R words per cycle in engine lane
//               order, one pencil per N/(2R) consecutive cycles, pencils in
//               order y fastest then z. Real data have im = 0.
//   host_out_*  transformed points with their global (kx, ky, kz).
//   netu_*/netv_* transmit and receive lanes towards the row (u) and column
//               (v) networks; each word carries its destination node.
//   ymem_*/zmem_* write lanes (4R) and read port (2R lanes) of the two
//               transposition buffers in the node's local memory.
//   y_stall/z_stall  the Y (Z) reader is waiting for its buffer to fill;
//               busy: a pencil is still to be read or a point still to leave;
//               done: all N^3/P points have left towards the host.
// The host DMA, the network links and the HBM memory controller are outside
// this module. What follows the published design: the engine types, the two
// network controllers on row and column, the local-memory DMA controllers
// with strided writes and stride-1 reads, and the early start of the Y
// transform. Choices of this implementation: one X engine (the published
// main configuration uses two, Q = 4, to offset the real-to-complex
// reduction, which is not implemented here: data stay complex throughout and
// all N bins are kept), complete (not double-buffered) Y and Z buffers, and
// one transform per reset.
// Timing: results of a pencil leave about three engine latencies after it
// enters plus the wait for the Y plane and the full Z buffer; there is no
// back-pressure, so memories and links must take 2R words per lane per cycle.
// The last net_ctrl only tags results for the host, so its network outputs
// (zx_*) are left unused apart from an assertion that they never fire; the
// lint note that zx_word is unused is expected.
module fft3d_node
  import fft_pkg::*;
#(
  parameter int N       = 4096,
  parameter int R       = 4,
  parameter int PU      = 32,
  parameter int PV      = 32,
  parameter int LAT_ADD = 3,
  parameter int LAT_MUL = 3
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] my_u,
  input  logic [7:0] my_v,
  // host DMA stream
  input  logic       host_in_valid,
  input  cplx_t      host_in_data [2*R],
  output logic       host_out_valid [2*R],
  output net_word_t  host_out_word [2*R],
  // row (u) network
  output logic       netu_tx_valid [2*R],
  output net_word_t  netu_tx_word [2*R],
  input  logic       netu_rx_valid [2*R],
  input  net_word_t  netu_rx_word [2*R],
  // column (v) network
  output logic       netv_tx_valid [2*R],
  output net_word_t  netv_tx_word [2*R],
  input  logic       netv_rx_valid [2*R],
  input  net_word_t  netv_rx_word [2*R],
  // local memory, Y-pencil buffer
  output mem_wr_t    ymem_wr [4*R],
  output logic       ymem_rd_en,
  output logic [31:0] ymem_rd_addr [2*R],
  input  logic       ymem_rd_valid,
  input  cplx_t      ymem_rd_data [2*R],
  // local memory, Z-pencil buffer
  output mem_wr_t    zmem_wr [4*R],
  output logic       zmem_rd_en,
  output logic [31:0] zmem_rd_addr [2*R],
  input  logic       zmem_rd_valid,
  input  cplx_t      zmem_rd_data [2*R],
  // status
  output logic       y_stall,
  output logic       z_stall,
  output logic       busy,
  output logic       done
);

  localparam int S   = $clog2(N);
  localparam int NU  = N / PU;
  localparam int NV  = N / PV;
  localparam int NPEN = NU * NV;            // pencils per node in every phase
  localparam longint VOL = longint'(N) * NPEN;

  // ---------------- X phase ----------------
  logic         xo_valid;
  cplx_t        xo_data [2*R];
  logic [S-1:0] xo_bin [2*R];

  fft_engine #(.N(N), .R(R), .LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_fft_x (
    .clk, .rst, .in_valid(host_in_valid), .in_data(host_in_data),
    .out_valid(xo_valid), .out_data(xo_data), .out_bin(xo_bin));

  logic      xl_valid [2*R];
  net_word_t xl_word [2*R];
  net_ctrl #(.N(N), .R(R), .PU(PU), .PV(PV), .AXIS(0)) u_net_u (
    .clk, .rst, .my_u, .my_v,
    .in_valid(xo_valid), .in_data(xo_data), .in_bin(xo_bin),
    .loc_valid(xl_valid), .loc_word(xl_word),
    .tx_valid(netu_tx_valid), .tx_word(netu_tx_word));

  logic      yw_valid [4*R];
  net_word_t yw_word [4*R];
  always_comb begin
    for (int l = 0; l < 2 * R; l++) begin
      yw_valid[l]       = xl_valid[l];
      yw_word[l]        = xl_word[l];
      yw_valid[2*R + l] = netu_rx_valid[l];
      yw_word[2*R + l]  = netu_rx_word[l];
    end
  end

  logic [NV-1:0] y_plane_ready;
  local_dma_wr #(.N(N), .R(R), .PU(PU), .PV(PV), .MODE(0)) u_wr_y (
    .clk, .rst, .my_u, .my_v, .in_valid(yw_valid), .in_word(yw_word),
    .mem_wr(ymem_wr), .plane_ready(y_plane_ready));

  // ---------------- Y phase ----------------
  logic  yi_valid;
  cplx_t yi_data [2*R];
  logic  y_busy;
  local_dma_rd #(.N(N), .R(R), .NPENCILS(NPEN), .NPLANES(NV)) u_rd_y (
    .clk, .rst, .plane_ready(y_plane_ready),
    .rd_en(ymem_rd_en), .rd_addr(ymem_rd_addr), .rd_valid(ymem_rd_valid), .rd_data(ymem_rd_data),
    .out_valid(yi_valid), .out_data(yi_data), .stall(y_stall), .busy(y_busy));

  logic         yo_valid;
  cplx_t        yo_data [2*R];
  logic [S-1:0] yo_bin [2*R];
  fft_engine #(.N(N), .R(R), .LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_fft_y (
    .clk, .rst, .in_valid(yi_valid), .in_data(yi_data),
    .out_valid(yo_valid), .out_data(yo_data), .out_bin(yo_bin));

  logic      yl_valid [2*R];
  net_word_t yl_word [2*R];
  net_ctrl #(.N(N), .R(R), .PU(PU), .PV(PV), .AXIS(1)) u_net_v (
    .clk, .rst, .my_u, .my_v,
    .in_valid(yo_valid), .in_data(yo_data), .in_bin(yo_bin),
    .loc_valid(yl_valid), .loc_word(yl_word),
    .tx_valid(netv_tx_valid), .tx_word(netv_tx_word));

  logic      zw_valid [4*R];
  net_word_t zw_word [4*R];
  always_comb begin
    for (int l = 0; l < 2 * R; l++) begin
      zw_valid[l]       = yl_valid[l];
      zw_word[l]        = yl_word[l];
      zw_valid[2*R + l] = netv_rx_valid[l];
      zw_word[2*R + l]  = netv_rx_word[l];
    end
  end

  logic [0:0] z_ready;
  local_dma_wr #(.N(N), .R(R), .PU(PU), .PV(PV), .MODE(1)) u_wr_z (
    .clk, .rst, .my_u, .my_v, .in_valid(zw_valid), .in_word(zw_word),
    .mem_wr(zmem_wr), .plane_ready(z_ready));

  // ---------------- Z phase ----------------
  logic  zi_valid;
  cplx_t zi_data [2*R];
  logic  z_busy;
  local_dma_rd #(.N(N), .R(R), .NPENCILS(NPEN), .NPLANES(1)) u_rd_z (
    .clk, .rst, .plane_ready(z_ready),
    .rd_en(zmem_rd_en), .rd_addr(zmem_rd_addr), .rd_valid(zmem_rd_valid), .rd_data(zmem_rd_data),
    .out_valid(zi_valid), .out_data(zi_data), .stall(z_stall), .busy(z_busy));

  logic         zo_valid;
  cplx_t        zo_data [2*R];
  logic [S-1:0] zo_bin [2*R];
  fft_engine #(.N(N), .R(R), .LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) u_fft_z (
    .clk, .rst, .in_valid(zi_valid), .in_data(zi_data),
    .out_valid(zo_valid), .out_data(zo_data), .out_bin(zo_bin));

  logic      zx_valid [2*R];
  net_word_t zx_word [2*R];
  net_ctrl #(.N(N), .R(R), .PU(PU), .PV(PV), .AXIS(2)) u_host_tag (
    .clk, .rst, .my_u, .my_v,
    .in_valid(zo_valid), .in_data(zo_data), .in_bin(zo_bin),
    .loc_valid(host_out_valid), .loc_word(host_out_word),
    .tx_valid(zx_valid), .tx_word(zx_word));

  // completion: count points delivered to the host
  localparam int VW = $clog2(VOL + 1);
  logic [VW-1:0] out_cnt;
  always_ff @(posedge clk) begin
    if (rst) out_cnt <= '0;
    else begin
      logic [VW-1:0] inc;
      inc = '0;
      for (int l = 0; l < 2 * R; l++) inc = inc + VW'(host_out_valid[l]);
      out_cnt <= out_cnt + inc;
    end
  end
  assign done = (out_cnt == VW'(VOL));
  assign busy = y_busy || z_busy || !done;

  // the host-side controller never forwards anything to a network
  for (genvar l = 0; l < 2 * R; l++) begin : g_chk
    assert property (@(posedge clk) disable iff (rst) !zx_valid[l]);
  end

endmodule
