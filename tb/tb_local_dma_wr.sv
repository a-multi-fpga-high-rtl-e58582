// tb_local_dma_wr: two write controllers (MODE 0, X-to-Y layout, and MODE 1,
// Y-to-Z layout) of node (1,0) in a 2 x 2 grid with N = 16 and R = 1 (4
// input lanes). Every word the node must receive is sent once, in random
// order, on random lanes with random idle slots. Checked: each write leaves
// one cycle later with the right address and data, every address of the
// buffer is written exactly once, and each plane_ready flag is low until the
// cycle after the last word of its plane was accepted and high from then on.
module tb_local_dma_wr
  import fft_pkg::*;
;
  localparam int N = 16, R = 1, PU = 2, PV = 2, NU = N / PU, NV = N / PV;
  localparam logic [7:0] MU = 8'd1, MV = 8'd0;
  localparam int VOLN = N * NU * NV;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  int checks = 0, failures = 0;

  logic      iv [2][4*R];
  net_word_t iw [2][4*R];
  mem_wr_t   mw [2][4*R];
  logic [NV-1:0] pr0;
  logic [0:0]    pr1;

  local_dma_wr #(.N(N), .R(R), .PU(PU), .PV(PV), .MODE(0)) d0 (
    .clk, .rst, .my_u(MU), .my_v(MV), .in_valid(iv[0]), .in_word(iw[0]), .mem_wr(mw[0]), .plane_ready(pr0));
  local_dma_wr #(.N(N), .R(R), .PU(PU), .PV(PV), .MODE(1)) d1 (
    .clk, .rst, .my_u(MU), .my_v(MV), .in_valid(iv[1]), .in_word(iw[1]), .mem_wr(mw[1]), .plane_ready(pr1));

  // expected write per lane for the cycle after, and per-plane counts
  logic  e_en [2][4*R];
  int    e_addr [2][4*R];
  cplx_t e_data [2][4*R];
  int    pcnt [2][NV];
  int    written [2][VOLN];

  always @(posedge clk) begin
    if (!rst) begin
      for (int m = 0; m < 2; m++) begin
        for (int l = 0; l < 4 * R; l++) begin
          checks++;
          if (mw[m][l].en !== e_en[m][l] ||
              (e_en[m][l] && (mw[m][l].addr != 32'(e_addr[m][l]) || mw[m][l].data !== e_data[m][l]))) begin
            failures++;
            if (failures < 8) $display("mode %0d lane %0d: write %0d @%0d expected %0d @%0d", m, l,
                                       mw[m][l].en, mw[m][l].addr, e_en[m][l], e_addr[m][l]);
          end
          if (mw[m][l].en && mw[m][l].addr < VOLN) written[m][mw[m][l].addr]++;
        end
      end
      for (int p = 0; p < NV; p++) begin
        checks++;
        if (pr0[p] !== (pcnt[0][p] == N * NU)) begin
          failures++; $display("plane %0d ready %0d with %0d words", p, pr0[p], pcnt[0][p]);
        end
      end
      checks++;
      if (pr1[0] !== (pcnt[1][0] == N * NU * NV)) begin
        failures++; $display("Z buffer ready %0d with %0d words", pr1[0], pcnt[1][0]);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  net_word_t words [2][$];

  initial begin
    rst = 1'b1;
    for (int m = 0; m < 2; m++) begin
      for (int l = 0; l < 4 * R; l++) begin iv[m][l] = 1'b0; iw[m][l] = '0; e_en[m][l] = 1'b0; e_addr[m][l] = 0; e_data[m][l] = '0; end
      for (int p = 0; p < NV; p++) pcnt[m][p] = 0;
      for (int a = 0; a < VOLN; a++) written[m][a] = 0;
    end
    // all words of each buffer, in random order
    for (int a = 0; a < NU; a++)
      for (int b = 0; b < NV; b++)
        for (int c = 0; c < N; c++) begin
          net_word_t w0, w1;
          w0.dst_u = MU; w0.dst_v = MV;
          w0.data = '{re: {$urandom, $urandom}, im: {$urandom, $urandom}};
          w1 = w0;
          w0.cx = 16'(MU * NU + a); w0.cz = 16'(MV * NV + b); w0.cy = 16'(c);
          w1.cx = 16'(MU * NU + a); w1.cy = 16'(MV * NV + b); w1.cz = 16'(c);
          words[0].push_back(w0);
          words[1].push_back(w1);
        end
    words[0].shuffle();
    words[1].shuffle();
    repeat (3) @(negedge clk);
    rst = 1'b0;
    while (words[0].size() != 0 || words[1].size() != 0) begin
      @(negedge clk);
      for (int m = 0; m < 2; m++) begin
        // the words presented before this edge were accepted on it
        for (int l = 0; l < 4 * R; l++) if (iv[m][l]) begin
          if (m == 0) pcnt[0][iw[m][l].cz - MV * NV]++;
          else        pcnt[1][0]++;
        end
        for (int l = 0; l < 4 * R; l++) begin
          e_en[m][l] = iv[m][l];
          if (m == 0) e_addr[m][l] = ((iw[m][l].cz - MV * NV) * NU + (iw[m][l].cx - MU * NU)) * N + iw[m][l].cy;
          else        e_addr[m][l] = ((iw[m][l].cy - MV * NV) * NU + (iw[m][l].cx - MU * NU)) * N + iw[m][l].cz;
          e_data[m][l] = iw[m][l].data;
          iv[m][l] = 1'b0;
          if (words[m].size() != 0 && ($urandom % 4) != 0) begin
            iv[m][l] = 1'b1;
            iw[m][l] = words[m].pop_front();
          end
        end
      end
    end
    repeat (3) begin
      @(negedge clk);
      for (int m = 0; m < 2; m++)
        for (int l = 0; l < 4 * R; l++) begin
          if (iv[m][l]) begin
            if (m == 0) pcnt[0][iw[m][l].cz - MV * NV]++;
            else        pcnt[1][0]++;
          end
          e_en[m][l] = iv[m][l];
          if (m == 0) e_addr[m][l] = ((iw[m][l].cz - MV * NV) * NU + (iw[m][l].cx - MU * NU)) * N + iw[m][l].cy;
          else        e_addr[m][l] = ((iw[m][l].cy - MV * NV) * NU + (iw[m][l].cx - MU * NU)) * N + iw[m][l].cz;
          e_data[m][l] = iw[m][l].data;
          iv[m][l] = 1'b0;
        end
    end
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < VOLN; a++) begin
        checks++;
        if (written[m][a] != 1) begin
          failures++;
          if (failures < 8) $display("mode %0d address %0d written %0d times", m, a, written[m][a]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
