// local_mem_model: behavioural stand-in for the node's local memory (the
// HBM stacks and their controller). WL write lanes and one read port of RL
// words; writes of a cycle are applied before the reads of the same cycle,
// and read data returns in request order after LAT cycles. A read of an
// address never written is counted in bad_reads.
module local_mem_model
  import fft_pkg::*;
#(
  parameter int WL    = 8,
  parameter int RL    = 4,
  parameter int DEPTH = 1024,
  parameter int LAT   = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  mem_wr_t     wr [WL],
  input  logic        rd_en,
  input  logic [31:0] rd_addr [RL],
  output logic        rd_valid,
  output cplx_t       rd_data [RL],
  output int          bad_reads
);
  cplx_t mem [DEPTH];
  logic  written [DEPTH];
  logic  pv [LAT];
  cplx_t pd [LAT][RL];

  initial begin
    bad_reads = 0;
    for (int a = 0; a < DEPTH; a++) written[a] = 1'b0;
    for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
  end

  always @(posedge clk) begin
    for (int l = 0; l < WL; l++)
      if (!rst && wr[l].en) begin
        if (wr[l].addr >= DEPTH) bad_reads++;
        else begin
          mem[wr[l].addr]     = wr[l].data;
          written[wr[l].addr] = 1'b1;
        end
      end
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= !rst && pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= !rst && rd_en;
    for (int l = 0; l < RL; l++) begin
      if (!rst && rd_en && (rd_addr[l] >= DEPTH || !written[rd_addr[l]])) bad_reads++;
      pd[0][l] <= (rd_addr[l] < DEPTH) ? mem[rd_addr[l]] : '0;
    end
  end
  assign rd_valid = pv[LAT-1];
  assign rd_data  = pd[LAT-1];
endmodule
