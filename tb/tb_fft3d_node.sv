// tb_fft3d_node: end-to-end run of a distributed 3D FFT on a PU x PV grid of
// nodes. Each node is a full fft3d_node with its own Y and Z buffer
// memories; a switch model per row and per column delivers network words to
// their destination after NET_LAT cycles, at most 2R words per node and
// cycle. The host of every node streams the node's X pencils of a random
// complex N^3 field, with random idle cycles between frames. Checked:
//   - every (kx,ky,kz) leaves exactly once, from the node that owns it, and
//     matches a 3D DFT computed here to 1e-9 relative to the field size;
//   - the X engine of node 0 produces its first output exactly
//     S*(l_but+1) + N/(2R) cycles after its first input;
//   - no read of an unwritten buffer word, no word sent out of its row or
//     column;
//   - each mechanism happened at least once: local and remote words in both
//     exchanges, Y reader stall, Z reader stall, Y transform running while
//     the same node's X input is still streaming (overlap), and done/busy.
module tb_fft3d_node
  import fft_pkg::*;
;
  localparam int N = 32, R = 2, PU = 2, PV = 4, LA = 3, LM = 3;
  localparam int NP = PU * PV, NU = N / PU, NV = N / PV, F = N / (2 * R);
  localparam int NPEN = NU * NV, VOLN = N * NPEN, S = $clog2(N);
  localparam int NET_LAT = 12;
  localparam int XLAT = S * (2 * LA + LM + 5) + F;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic      hi_valid [NP];
  cplx_t     hi_data [NP][2*R];
  logic      ho_valid [NP][2*R];
  net_word_t ho_word [NP][2*R];
  logic      ut_v [NP][2*R], ur_v [NP][2*R], vt_v [NP][2*R], vr_v [NP][2*R];
  net_word_t ut_w [NP][2*R], ur_w [NP][2*R], vt_w [NP][2*R], vr_w [NP][2*R];
  mem_wr_t   ymw [NP][4*R], zmw [NP][4*R];
  logic      yre [NP], zre [NP], yrv [NP], zrv [NP];
  logic [31:0] yra [NP][2*R], zra [NP][2*R];
  cplx_t     yrd [NP][2*R], zrd [NP][2*R];
  logic      ys [NP], zs [NP], bz [NP], dn [NP];
  int        ybad [NP], zbad [NP];
  logic      xlv [NP][2*R], ylv [NP][2*R], zbz [NP], yiv [NP], xov [NP];

  for (genvar n = 0; n < NP; n++) begin : g_node
    fft3d_node #(.N(N), .R(R), .PU(PU), .PV(PV), .LAT_ADD(LA), .LAT_MUL(LM)) dut (
      .clk, .rst, .my_u(8'(n % PU)), .my_v(8'(n / PU)),
      .host_in_valid(hi_valid[n]), .host_in_data(hi_data[n]),
      .host_out_valid(ho_valid[n]), .host_out_word(ho_word[n]),
      .netu_tx_valid(ut_v[n]), .netu_tx_word(ut_w[n]), .netu_rx_valid(ur_v[n]), .netu_rx_word(ur_w[n]),
      .netv_tx_valid(vt_v[n]), .netv_tx_word(vt_w[n]), .netv_rx_valid(vr_v[n]), .netv_rx_word(vr_w[n]),
      .ymem_wr(ymw[n]), .ymem_rd_en(yre[n]), .ymem_rd_addr(yra[n]), .ymem_rd_valid(yrv[n]), .ymem_rd_data(yrd[n]),
      .zmem_wr(zmw[n]), .zmem_rd_en(zre[n]), .zmem_rd_addr(zra[n]), .zmem_rd_valid(zrv[n]), .zmem_rd_data(zrd[n]),
      .y_stall(ys[n]), .z_stall(zs[n]), .busy(bz[n]), .done(dn[n]));
    local_mem_model #(.WL(4*R), .RL(2*R), .DEPTH(VOLN), .LAT(8)) ymem (
      .clk, .rst, .wr(ymw[n]), .rd_en(yre[n]), .rd_addr(yra[n]), .rd_valid(yrv[n]), .rd_data(yrd[n]), .bad_reads(ybad[n]));
    local_mem_model #(.WL(4*R), .RL(2*R), .DEPTH(VOLN), .LAT(8)) zmem (
      .clk, .rst, .wr(zmw[n]), .rd_en(zre[n]), .rd_addr(zra[n]), .rd_valid(zrv[n]), .rd_data(zrd[n]), .bad_reads(zbad[n]));
    // internal signals observed for the mechanism counters
    assign xlv[n] = dut.xl_valid;
    assign ylv[n] = dut.yl_valid;
    assign zbz[n] = dut.z_busy;
    assign yiv[n] = dut.yi_valid;
    assign xov[n] = dut.xo_valid;
  end

  // ---------------------------------------------------------------- field
  real xr [N][N][N], xi [N][N][N];    // [x][y][z]
  real kr [N][N][N], ki [N][N][N];    // transformed, [kx][ky][kz]
  int  seen [N][N][N];

  task automatic dft_axis(int axis);
    real tr [N], ti [N];
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        for (int k = 0; k < N; k++) begin
          tr[k] = 0.0; ti[k] = 0.0;
          for (int j = 0; j < N; j++) begin
            real c, s, vr, vi;
            c = $cos(2.0 * PI * j * k / N); s = -$sin(2.0 * PI * j * k / N);
            case (axis)
              0: begin vr = kr[j][a][b]; vi = ki[j][a][b]; end
              1: begin vr = kr[a][j][b]; vi = ki[a][j][b]; end
              default: begin vr = kr[a][b][j]; vi = ki[a][b][j]; end
            endcase
            tr[k] += vr * c - vi * s;
            ti[k] += vr * s + vi * c;
          end
        end
        for (int k = 0; k < N; k++)
          case (axis)
            0: begin kr[k][a][b] = tr[k]; ki[k][a][b] = ti[k]; end
            1: begin kr[a][k][b] = tr[k]; ki[a][k][b] = ti[k]; end
            default: begin kr[a][b][k] = tr[k]; ki[a][b][k] = ti[k]; end
          endcase
      end
  endtask

  // ---------------------------------------------------------- counters
  int checks = 0, failures = 0;
  int n_xloc = 0, n_xrem = 0, n_yloc = 0, n_yrem = 0, n_ystall = 0, n_zstall = 0, n_overlap = 0;
  int n_out = 0, n_xin_first = -1, n_xout_first = -1;
  logic x_streaming [NP];
  int   n_fed = 0;

  // --------------------------------------------------------- switches
  typedef struct { int t; net_word_t w; } pkt_t;
  pkt_t uq [NP][$], vq [NP][$];

  always @(posedge clk) begin
    if (!rst) begin
      for (int n = 0; n < NP; n++)
        for (int l = 0; l < 2 * R; l++) begin
          if (ut_v[n][l]) begin
            pkt_t p;
            int d;
            p.t = cyc + NET_LAT; p.w = ut_w[n][l];
            d = int'(p.w.dst_v) * PU + int'(p.w.dst_u);
            n_xrem++;
            if (p.w.dst_v != 8'(n / PU) || int'(p.w.dst_u) >= PU || d == n) begin
              failures++; $display("row network word from %0d to (%0d,%0d)", n, p.w.dst_u, p.w.dst_v);
            end else uq[d].push_back(p);
          end
          if (vt_v[n][l]) begin
            pkt_t p;
            int d;
            p.t = cyc + NET_LAT; p.w = vt_w[n][l];
            d = int'(p.w.dst_v) * PU + int'(p.w.dst_u);
            n_yrem++;
            if (p.w.dst_u != 8'(n % PU) || int'(p.w.dst_v) >= PV || d == n) begin
              failures++; $display("column network word from %0d to (%0d,%0d)", n, p.w.dst_u, p.w.dst_v);
            end else vq[d].push_back(p);
          end
          if (xlv[n][l]) n_xloc++;
          if (ylv[n][l]) n_yloc++;
        end
    end
  end

  always @(negedge clk) begin
    for (int n = 0; n < NP; n++)
      for (int l = 0; l < 2 * R; l++) begin
        ur_v[n][l] = 1'b0; ur_w[n][l] = '0;
        vr_v[n][l] = 1'b0; vr_w[n][l] = '0;
        if (!rst && uq[n].size() != 0 && uq[n][0].t <= cyc) begin
          pkt_t p;
          p = uq[n].pop_front();
          ur_v[n][l] = 1'b1; ur_w[n][l] = p.w;
        end
        if (!rst && vq[n].size() != 0 && vq[n][0].t <= cyc) begin
          pkt_t p;
          p = vq[n].pop_front();
          vr_v[n][l] = 1'b1; vr_w[n][l] = p.w;
        end
      end
  end

  // ------------------------------------------------------ output check
  always @(posedge clk) begin
    if (!rst) begin
      for (int n = 0; n < NP; n++) begin
        if (ys[n] && bz[n]) n_ystall++;
        if (zs[n] && zbz[n]) n_zstall++;
        if (x_streaming[n] && yiv[n]) n_overlap++;
        for (int l = 0; l < 2 * R; l++) if (ho_valid[n][l]) begin
          net_word_t w;
          int ox, oy, oz;
          real er, ei, gr, gi, tol;
          w = ho_word[n][l];
          ox = int'(w.cx); oy = int'(w.cy); oz = int'(w.cz);
          n_out++;
          checks++;
          if (ox >= N || oy >= N || oz >= N || ox / NU != n % PU || oy / NV != n / PU) begin
            failures++; $display("node %0d delivered (%0d,%0d,%0d), not its own", n, ox, oy, oz);
          end else begin
            seen[ox][oy][oz]++;
            er = kr[ox][oy][oz]; ei = ki[ox][oy][oz];
            gr = $bitstoreal(w.data.re); gi = $bitstoreal(w.data.im);
            tol = 1e-9 * N * N * N;
            if ((gr - er) * (gr - er) + (gi - ei) * (gi - ei) > tol * tol) begin
              failures++;
              if (failures < 10) $display("X[%0d,%0d,%0d] = (%f, %f) expected (%f, %f)", ox, oy, oz, gr, gi, er, ei);
            end
          end
        end
      end
      if (n_xout_first < 0 && xov[0]) n_xout_first = cyc;
    end
  end

  // ---------------------------------------------------------- host feed
  task automatic feed(int n);
    int u, v;
    u = n % PU; v = n / PU;
    for (int p = 0; p < NPEN; p++) begin
      int y, z;
      y = u * NU + p % NU;
      z = v * NV + p / NU;
      while (($urandom % 4) == 0) begin
        @(negedge clk);
        hi_valid[n] = 1'b0;
      end
      for (int t = 0; t < F; t++) begin
        @(negedge clk);
        hi_valid[n] = 1'b1;
        x_streaming[n] = 1'b1;
        if (n == 0 && n_xin_first < 0) n_xin_first = cyc;
        for (int r = 0; r < R; r++) begin
          hi_data[n][2*r]   = '{re: $realtobits(xr[r*F+t][y][z]),       im: $realtobits(xi[r*F+t][y][z])};
          hi_data[n][2*r+1] = '{re: $realtobits(xr[r*F+t+N/2][y][z]),   im: $realtobits(xi[r*F+t+N/2][y][z])};
        end
      end
    end
    @(negedge clk);
    hi_valid[n] = 1'b0;
    x_streaming[n] = 1'b0;
    n_fed++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: %0d of %0d points out", n_out, N * N * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst = 1'b1;
    for (int n = 0; n < NP; n++) begin
      hi_valid[n] = 1'b0; x_streaming[n] = 1'b0;
      for (int l = 0; l < 2 * R; l++) begin hi_data[n][l] = '0; ur_v[n][l] = 1'b0; vr_v[n][l] = 1'b0; ur_w[n][l] = '0; vr_w[n][l] = '0; end
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++)
        for (int c = 0; c < N; c++) begin
          xr[a][b][c] = real'(int'($urandom % 2001) - 1000) / 1000.0;
          xi[a][b][c] = real'(int'($urandom % 2001) - 1000) / 1000.0;
          kr[a][b][c] = xr[a][b][c]; ki[a][b][c] = xi[a][b][c];
          seen[a][b][c] = 0;
        end
    dft_axis(0); dft_axis(1); dft_axis(2);
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (2) @(negedge clk);
    for (int n = 0; n < NP; n++)
      fork
        automatic int nn = n;
        feed(nn);
      join_none
    wait (n_fed == NP);
    wait (dn.and() == 1'b1);
    repeat (20) @(negedge clk);

    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++)
        for (int c = 0; c < N; c++) begin
          checks++;
          if (seen[a][b][c] != 1) begin
            failures++;
            if (failures < 20) $display("point (%0d,%0d,%0d) delivered %0d times", a, b, c, seen[a][b][c]);
          end
        end
    checks++;
    if (n_xout_first - n_xin_first != XLAT) begin
      failures++; $display("X engine latency %0d, expected %0d", n_xout_first - n_xin_first, XLAT);
    end
    for (int n = 0; n < NP; n++) begin
      checks += 2;
      if (ybad[n] + zbad[n] != 0) begin failures++; $display("node %0d read unwritten buffer words", n); end
      if (bz[n]) begin failures++; $display("node %0d still busy", n); end
    end
    $display("mechanisms: x-local %0d x-remote %0d y-local %0d y-remote %0d y-stall %0d z-stall %0d overlap %0d",
             n_xloc, n_xrem, n_yloc, n_yrem, n_ystall, n_zstall, n_overlap);
    checks += 7;
    if (n_xloc == 0)    begin failures++; $display("no local word in the X-to-Y exchange"); end
    if (n_xrem == 0)    begin failures++; $display("no remote word in the X-to-Y exchange"); end
    if (n_yloc == 0)    begin failures++; $display("no local word in the Y-to-Z exchange"); end
    if (n_yrem == 0)    begin failures++; $display("no remote word in the Y-to-Z exchange"); end
    if (n_ystall == 0)  begin failures++; $display("the Y reader never stalled"); end
    if (n_zstall == 0)  begin failures++; $display("the Z reader never stalled"); end
    if (n_overlap == 0) begin failures++; $display("Y never overlapped X"); end
    $display("finished at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
