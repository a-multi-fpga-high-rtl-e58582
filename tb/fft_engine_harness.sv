// fft_engine_harness: drives one fft_engine configuration with random frames
// and checks it against a direct DFT computed in real arithmetic.
// Frames 0 and 1 are sent back to back, frame 2 after an idle gap. Each output
// word is placed by the bin tag the engine reports and compared with the
// reference with a tolerance of 1e-9 * N. The latency from the first input
// pair to the first output pair is compared with EXP_LAT. Results are
// returned through `checks`/`failures` once `done` rises.
module fft_engine_harness
  import fft_pkg::*;
#(
  parameter int N       = 16,
  parameter int R       = 1,
  parameter int LAT_ADD = 3,
  parameter int LAT_MUL = 3,
  parameter int EXP_LAT = 0
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int F  = N / (2 * R);
  localparam int NF = 3;
  localparam int S  = $clog2(N);

  logic  rst;
  logic  in_valid;
  cplx_t in_data [2*R];
  logic  out_valid;
  cplx_t out_data [2*R];
  logic [S-1:0] out_bin [2*R];

  fft_engine #(.N(N), .R(R), .LAT_ADD(LAT_ADD), .LAT_MUL(LAT_MUL)) dut (
    .clk, .rst, .in_valid, .in_data, .out_valid, .out_data, .out_bin);

  real xr [NF][N], xi [NF][N];
  real yr [NF][N], yi [NF][N];
  logic got [NF][N];
  int cyc = 0, t_in = -1, t_out = -1, nout = 0;

  always @(posedge clk) cyc++;

  // collect outputs
  always @(negedge clk) begin
    if (!rst && out_valid) begin
      int fr;
      if (t_out < 0) t_out = cyc;
      fr = nout / F;
      if (fr < NF) begin
        for (int l = 0; l < 2 * R; l++) begin
          yr[fr][out_bin[l]] = $bitstoreal(out_data[l].re);
          yi[fr][out_bin[l]] = $bitstoreal(out_data[l].im);
          if (got[fr][out_bin[l]]) begin
            failures++;
            $display("FAIL N=%0d R=%0d bin %0d of frame %0d delivered twice", N, R, out_bin[l], fr);
          end
          got[fr][out_bin[l]] = 1'b1;
        end
      end
      nout++;
    end
  end

  task automatic send_frame(int fr);
    for (int t = 0; t < F; t++) begin
      @(negedge clk);
      if (t_in < 0) t_in = cyc;
      in_valid = 1'b1;
      for (int r = 0; r < R; r++) begin
        in_data[2*r].re   = $realtobits(xr[fr][r*F + t]);
        in_data[2*r].im   = $realtobits(xi[fr][r*F + t]);
        in_data[2*r+1].re = $realtobits(xr[fr][r*F + t + N/2]);
        in_data[2*r+1].im = $realtobits(xi[fr][r*F + t + N/2]);
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    rst = 1; in_valid = 0;
    for (int l = 0; l < 2 * R; l++) in_data[l] = '0;
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
        xi[f][n] = (real'($urandom % 2000001) - 1000000.0) / 1000000.0;
        got[f][n] = 1'b0;
      end
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    send_frame(0);
    send_frame(1);
    @(negedge clk);
    in_valid = 0;
    repeat (7) @(negedge clk);
    send_frame(2);
    @(negedge clk);
    in_valid = 0;
    wait (nout >= NF * F);
    repeat (3) @(negedge clk);
    // latency
    checks++;
    if (t_out - t_in != EXP_LAT) begin
      failures++;
      $display("FAIL N=%0d R=%0d latency %0d expected %0d", N, R, t_out - t_in, EXP_LAT);
    end
    // values
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < N; k++) begin
        real sr, si, err;
        sr = 0.0; si = 0.0;
        for (int n = 0; n < N; n++) begin
          real ang;
          ang = -2.0 * PI * real'((n * k) % N) / real'(N);
          sr += xr[f][n] * $cos(ang) - xi[f][n] * $sin(ang);
          si += xr[f][n] * $sin(ang) + xi[f][n] * $cos(ang);
        end
        err = (yr[f][k] - sr) * (yr[f][k] - sr) + (yi[f][k] - si) * (yi[f][k] - si);
        checks++;
        if (!got[f][k] || err > (1e-9 * N) * (1e-9 * N)) begin
          failures++;
          if (failures < 8)
            $display("FAIL N=%0d R=%0d frame %0d bin %0d got (%f,%f) exp (%f,%f)",
                     N, R, f, k, yr[f][k], yi[f][k], sr, si);
        end
      end
    done = 1;
  end
endmodule
