// shuffler_harness: drives one data_shuffler of delay L with three frames of
// 2L random pairs (two back to back, one after an idle gap) and checks that
// each frame comes out as (a[k], a[k+L]) for k < L followed by
// (b[k], b[k+L]), that the first pair of the first frame leaves exactly L+1
// cycles after it entered, and that out_valid is high only for real pairs.
module shuffler_harness
  import fft_pkg::*;
#(
  parameter int L = 4
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  logic  rst, in_valid, out_valid;
  initial done = 1'b0;
  cplx_t in_a, in_b, out_a, out_b;
  cplx_t exp_a [$], exp_b [$];
  int    t_first_in = -1, t_first_out = -1, cyc = 0;
  int    ck_a = 0, fl_a = 0, ck_e = 0, fl_e = 0;
  assign checks   = ck_a + ck_e;
  assign failures = fl_a + fl_e;

  data_shuffler #(.L(L)) dut (.clk, .rst, .in_valid, .in_a, .in_b, .out_valid, .out_a, .out_b);

  always @(posedge clk) cyc <= cyc + 1;

  function automatic cplx_t rnd();
    return '{re: {$urandom, $urandom}, im: {$urandom, $urandom}};
  endfunction

  task automatic send_frame();
    cplx_t fa [2*L], fb [2*L];
    for (int t = 0; t < 2 * L; t++) begin fa[t] = rnd(); fb[t] = rnd(); end
    for (int k = 0; k < L; k++) begin exp_a.push_back(fa[k]); exp_b.push_back(fa[k+L]); end
    for (int k = 0; k < L; k++) begin exp_b.push_back(fb[k+L]); exp_a.push_back(fb[k]); end
    for (int t = 0; t < 2 * L; t++) begin
      @(negedge clk);
      in_valid = 1'b1; in_a = fa[t]; in_b = fb[t];
      if (t_first_in < 0) t_first_in = cyc;
    end
  endtask

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (t_first_out < 0) begin
        t_first_out = cyc;
        ck_a++;
        if (t_first_out - t_first_in != L + 1) begin
          fl_a++;
          $display("L=%0d latency %0d expected %0d", L, t_first_out - t_first_in, L + 1);
        end
      end
      ck_a++;
      if (exp_a.size() == 0) begin
        fl_a++;
        $display("L=%0d unexpected output", L);
      end else begin
        cplx_t ea, eb;
        ea = exp_a.pop_front(); eb = exp_b.pop_front();
        if (out_a !== ea || out_b !== eb) begin
          fl_a++;
          if (fl_a < 6) $display("L=%0d pair mismatch", L);
        end
      end
    end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_a = '0; in_b = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (2) @(negedge clk);
    send_frame();
    send_frame();
    @(negedge clk) in_valid = 1'b0;
    repeat (5) @(negedge clk);
    send_frame();
    @(negedge clk) in_valid = 1'b0;
    repeat (4 * L + 10) @(negedge clk);
    ck_e++;
    if (exp_a.size() != 0) begin
      fl_e++;
      $display("L=%0d %0d pairs never came out", L, exp_a.size());
    end
    done = 1'b1;
  end
endmodule
