// local_dma_rd: local-memory read controller that feeds an FFT engine with
// pencils read at stride 1.
//
// Pencil p occupies addresses p*N .. p*N+N-1. For each pencil it issues
// N/(2R) read cycles of 2R addresses, lane 2r reading p*N + r*N/(2R) + t and
// lane 2r+1 reading p*N + r*N/(2R) + t + N/2, the order the engine expects.
// Returned words go into a FIFO of 2*N/(2R) entries; reads are issued only
// while the FIFO plus the reads in flight leave room, so any memory latency
// is tolerated. A pencil is sent to the engine as one frame of N/(2R)
// consecutive cycles, and only once the whole frame sits in the FIFO.
// Pencil p belongs to plane p div PPP; it is not started before
// plane_ready of that plane is set. Cycles spent waiting for a plane are
// flagged on `stall`. `busy` is high from reset until the last pencil has been
// handed to the engine.
// Stride-1 reads and the FIFO between the memory controller and the FFT
// logic follow the published design; the credit scheme and the frame-ready
// rule are choices of this implementation.
module local_dma_rd
  import fft_pkg::*;
#(
  parameter int N        = 4096,
  parameter int R        = 4,
  parameter int NPENCILS = 16384,
  parameter int NPLANES  = 128,
  localparam int PPP     = NPENCILS / NPLANES
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [NPLANES-1:0] plane_ready,
  // memory read port
  output logic               rd_en,
  output logic [31:0]        rd_addr [2*R],
  input  logic               rd_valid,
  input  cplx_t              rd_data [2*R],
  // to the FFT engine
  output logic               out_valid,
  output cplx_t              out_data [2*R],
  output logic               stall,
  output logic               busy
);

  localparam int F     = N / (2 * R);
  localparam int FW    = (F > 1) ? $clog2(F) : 1;
  localparam int DEPTH = 2 * F;
  localparam int DW    = $clog2(DEPTH);
  localparam int CW    = $clog2(DEPTH + 1);

  typedef cplx_t entry_t [2*R];

  // ---- issue side ----
  logic [31:0]   ipencil;
  logic [FW-1:0] istep;
  logic          idone;
  logic [CW-1:0] credits;       // free FIFO slots still unclaimed by a read
  logic          can_issue, plane_ok;

  assign plane_ok  = !idone && plane_ready[ipencil / PPP];
  assign can_issue = plane_ok && (credits != '0);
  assign stall     = !idone && !plane_ready[ipencil / PPP];

  always_ff @(posedge clk) begin
    if (rst) begin
      ipencil <= '0;
      istep   <= '0;
      idone   <= (NPENCILS == 0);
    end else if (can_issue) begin
      if (int'(istep) == F - 1) begin
        istep   <= '0;
        ipencil <= ipencil + 32'd1;
        if (int'(ipencil) == NPENCILS - 1) idone <= 1'b1;
      end else begin
        istep <= istep + FW'(1);
      end
    end
  end

  always_comb begin
    rd_en = can_issue;
    for (int r = 0; r < R; r++) begin
      rd_addr[2*r]   = ipencil * N + 32'(r * F) + 32'(istep);
      rd_addr[2*r+1] = ipencil * N + 32'(r * F) + 32'(istep) + 32'(N / 2);
    end
  end

  // ---- FIFO ----
  cplx_t         mem_q [DEPTH][2*R];
  logic [DW-1:0] wp, rp;
  logic [CW-1:0] count;
  logic          pop;
  logic [FW-1:0] ostep;
  logic          in_frame;
  logic [31:0]   opencil;

  assign pop = in_frame || (count >= CW'(F));

  always_ff @(posedge clk) begin
    if (rd_valid) mem_q[wp] <= rd_data;
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      credits  <= CW'(DEPTH);
      in_frame <= 1'b0;
      ostep    <= '0;
      opencil  <= '0;
    end else begin
      if (rd_valid) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + DW'(1);
      if (pop)      rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + DW'(1);
      count   <= count + CW'(rd_valid) - CW'(pop);
      credits <= credits - CW'(can_issue) + CW'(pop);
      if (pop) begin
        if (int'(ostep) == F - 1) begin
          ostep    <= '0;
          in_frame <= 1'b0;
          opencil  <= opencil + 32'd1;
        end else begin
          ostep    <= ostep + FW'(1);
          in_frame <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    out_data <= mem_q[rp];
    if (rst) out_valid <= 1'b0;
    else     out_valid <= pop;
  end

  assign busy = (opencil != 32'(NPENCILS));

  assert property (@(posedge clk) disable iff (rst) pop |-> count != '0);
  assert property (@(posedge clk) disable iff (rst) rd_valid |-> count < CW'(DEPTH));

endmodule
