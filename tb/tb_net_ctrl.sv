// tb_net_ctrl: three network controllers (X-to-Y, Y-to-Z and final) of a
// 16-point, 2-row engine on node (u,v) = (1,2) of a 2 x 4 grid. Random
// data words with random bins arrive in frames of N/(2R) valid steps with
// random idle cycles; each lane's output one cycle later must carry the
// right (x,y,z), the right destination node, and be flagged local exactly
// when the destination is this node, network otherwise.
module tb_net_ctrl
  import fft_pkg::*;
;
  localparam int N = 16, R = 2, PU = 2, PV = 4;
  localparam int NU = N / PU, NV = N / PV, F = N / (2 * R);
  localparam logic [7:0] MU = 8'd1, MV = 8'd2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic      rst, in_valid;
  cplx_t     in_data [2*R];
  logic [3:0] in_bin [2*R];
  logic      lv [3][2*R], tv [3][2*R];
  net_word_t lw [3][2*R], tw [3][2*R];
  int checks = 0, failures = 0;
  int n_local = 0, n_remote = 0;

  for (genvar a = 0; a < 3; a++) begin : g_dut
    net_ctrl #(.N(N), .R(R), .PU(PU), .PV(PV), .AXIS(a)) dut (
      .clk, .rst, .my_u(MU), .my_v(MV), .in_valid, .in_data, .in_bin,
      .loc_valid(lv[a]), .loc_word(lw[a]), .tx_valid(tv[a]), .tx_word(tw[a]));
  end

  // values presented in the previous cycle, with the pencil they belong to
  logic  p_valid;
  cplx_t p_data [2*R];
  int    p_bin [2*R];
  int    p_pencil, pencil, step;

  always @(posedge clk) begin
    if (!rst && p_valid) begin
      for (int a = 0; a < 3; a++) begin
        for (int l = 0; l < 2 * R; l++) begin
          int pa, pb, ex, ey, ez, du, dv;
          logic loc;
          net_word_t w;
          pa = MU * NU + p_pencil % NU;
          pb = MV * NV + p_pencil / NU;
          case (a)
            0: begin ex = p_bin[l]; ey = pa; ez = pb; du = p_bin[l] / NU; dv = MV; end
            1: begin ex = pa; ey = p_bin[l]; ez = pb; du = MU; dv = p_bin[l] / NV; end
            default: begin ex = pa; ey = pb; ez = p_bin[l]; du = MU; dv = MV; end
          endcase
          loc = (du == MU) && (dv == MV);
          w = loc ? lw[a][l] : tw[a][l];
          checks++;
          if (lv[a][l] !== loc || tv[a][l] !== !loc || w.cx != 16'(ex) || w.cy != 16'(ey) ||
              w.cz != 16'(ez) || w.dst_u != 8'(du) || w.dst_v != 8'(dv) || w.data !== p_data[l]) begin
            failures++;
            if (failures < 8) $display("axis %0d lane %0d pencil %0d bin %0d: wrong word", a, l, p_pencil, p_bin[l]);
          end
          if (a == 0 && loc) n_local++;
          if (a == 0 && !loc) n_remote++;
        end
      end
    end else if (!rst) begin
      for (int a = 0; a < 3; a++)
        for (int l = 0; l < 2 * R; l++) begin
          checks++;
          if (lv[a][l] || tv[a][l]) begin failures++; $display("valid without input"); end
        end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; p_valid = 1'b0; pencil = 0; step = 0; p_pencil = 0;
    for (int l = 0; l < 2 * R; l++) begin in_data[l] = '0; in_bin[l] = '0; p_bin[l] = 0; p_data[l] = '0; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    while (pencil < NU * NV) begin
      @(negedge clk);
      p_valid = in_valid;
      p_pencil = pencil;
      for (int l = 0; l < 2 * R; l++) begin p_data[l] = in_data[l]; p_bin[l] = in_bin[l]; end
      if (in_valid) begin
        if (step == F - 1) begin step = 0; pencil++; end else step++;
      end
      in_valid = ($urandom % 3) != 0;
      for (int l = 0; l < 2 * R; l++) begin
        in_data[l] = '{re: {$urandom, $urandom}, im: {$urandom, $urandom}};
        in_bin[l]  = 4'($urandom);
      end
      if (pencil == NU * NV) in_valid = 1'b0;
    end
    @(negedge clk);
    p_valid = in_valid;
    @(negedge clk);
    checks++;
    if (n_local == 0 || n_remote == 0) begin
      failures++; $display("local %0d remote %0d: a path never used", n_local, n_remote);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
