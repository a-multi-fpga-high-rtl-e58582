// tb_local_dma_rd: a read controller for N = 16, R = 2 (frames of 4 steps,
// FIFO of 8 entries) over 8 pencils in 4 planes of 2 pencils. A memory with
// a fixed read latency of 5 cycles returns a value made from the address.
// Plane p is made ready only at cycle 40 + 50p, so the reader has to stall.
// Checked: no read of a plane before it is ready, stall high exactly when
// pencils remain and the next one's plane is not ready, every frame leaves
// as N/(2R) consecutive valid steps with lane 2r = word r*F + t and lane
// 2r+1 = word r*F + t + N/2 of its pencil, and busy falls after the last.
module tb_local_dma_rd
  import fft_pkg::*;
;
  localparam int N = 16, R = 2, NP = 8, NPL = 4, F = N / (2 * R), MLAT = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  int   checks = 0, failures = 0, cyc = 0;

  logic [NPL-1:0] plane_ready;
  logic           rd_en, rd_valid, out_valid, stall, busy;
  logic [31:0]    rd_addr [2*R];
  cplx_t          rd_data [2*R], out_data [2*R];

  local_dma_rd #(.N(N), .R(R), .NPENCILS(NP), .NPLANES(NPL)) dut (
    .clk, .rst, .plane_ready, .rd_en, .rd_addr, .rd_valid, .rd_data, .out_valid, .out_data, .stall, .busy);

  function automatic cplx_t mval(int a);
    return '{re: 64'(a) * 64'h9E3779B97F4A7C15, im: ~64'(a)};
  endfunction

  // memory: read pipeline of MLAT stages
  logic  pv [MLAT];
  cplx_t pd [MLAT][2*R];
  always @(posedge clk) begin
    for (int i = MLAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= !rst && rd_en;
    for (int l = 0; l < 2 * R; l++) pd[0][l] <= mval(rd_addr[l]);
  end
  assign rd_valid = pv[MLAT-1];
  assign rd_data  = pd[MLAT-1];

  int n_stall = 0, ostep = 0, opencil = 0, next_pencil = 0;
  logic in_frame = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NPL; p++) plane_ready[p] <= !rst && (cyc >= 40 + 50 * p);
  end

  always @(posedge clk) begin
    if (!rst) begin
      // reads only from ready planes
      if (rd_en) begin
        int p;
        p = rd_addr[0] / N;
        checks++;
        if (p >= NP || !plane_ready[p / (NP / NPL)]) begin
          failures++; $display("read of pencil %0d before its plane was ready", p);
        end
      end
      checks++;
      if (stall !== (next_pencil < NP && !plane_ready[next_pencil / (NP / NPL)])) begin
        failures++; $display("cycle %0d: stall %0d wrong (next pencil %0d)", cyc, stall, next_pencil);
      end
      if (stall) n_stall++;
      if (rd_en && rd_addr[0] % N == F - 1) next_pencil++;
      if (out_valid) begin
        for (int r = 0; r < R; r++) begin
          checks++;
          if (out_data[2*r] !== mval(opencil * N + r * F + ostep) ||
              out_data[2*r+1] !== mval(opencil * N + r * F + ostep + N / 2)) begin
            failures++; $display("pencil %0d step %0d row %0d: wrong data", opencil, ostep, r);
          end
        end
        if (ostep == F - 1) begin ostep = 0; opencil++; in_frame = 1'b0; end
        else begin ostep++; in_frame = 1'b1; end
      end else if (in_frame) begin
        checks++; failures++;
        $display("frame of pencil %0d broken at step %0d", opencil, ostep);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst = 1'b1;
    for (int i = 0; i < MLAT; i++) pv[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (400) @(negedge clk);
    checks += 3;
    if (opencil != NP) begin failures++; $display("%0d of %0d pencils delivered", opencil, NP); end
    if (busy)          begin failures++; $display("busy after the last pencil"); end
    if (n_stall == 0)  begin failures++; $display("the reader never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
