// data_shuffler: delay-commutator that reorders two data streams between two
// butterfly stages of the pipelined FFT.
//
// Structure (two 2:1 multiplexers, two delay lines of length L):
//   upper out = delay_L( sel ? delay_L(lower in) : upper in )
//   lower out =          sel ? upper in          : delay_L(lower in)
// sel is the most significant bit of a counter running over 0 .. 2L-1.
// If the upper stream carries a[0], a[1], ... and the lower one b[0], b[1], ...
// in windows of 2L words, the outputs carry the pairs (a[k], a[k+L]) for
// k = 0..L-1 followed by (b[k], b[k+L]): exactly the pairing the next
// radix-2 DIF stage needs.
// Both outputs get one extra register, so the delay is L+1 cycles.
// Timing: a frame is a run of consecutive valid input pairs whose length is
// a multiple of 2L. The counter restarts on the first valid pair after an
// idle cycle and otherwise runs freely, so the tail of a frame drains out of
// the delay lines during any idle cycles that follow.
// The circuit and the L+1 delay follow the published design; the restart
// rule and the valid flag carried through the delay lines are choices of
// this implementation. Delay lines are circular buffers so that long ones map
// onto RAM.
module data_shuffler
  import fft_pkg::*;
#(
  parameter int L = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  cplx_t in_a,
  input  cplx_t in_b,
  output logic  out_valid,
  output cplx_t out_a,
  output cplx_t out_b
);

  localparam int CW = (L > 1) ? $clog2(2 * L) : 1;
  localparam int PW = (L > 1) ? $clog2(L) : 1;

  // window counter and select
  logic [CW-1:0] cnt;
  logic          prev_valid;
  logic          restart;
  logic          sel;
  assign restart = in_valid && !prev_valid;
  assign sel     = restart ? 1'b0 : ((L > 1) ? cnt[CW-1] : cnt[0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt        <= '0;
      prev_valid <= 1'b0;
    end else begin
      prev_valid <= in_valid;
      if (restart) cnt <= CW'(1);
      else         cnt <= cnt + CW'(1);
    end
  end

  // delay line on the lower input (before the multiplexers)
  // and on the upper output (after the multiplexer)
  cplx_t lo_mem [L];
  cplx_t up_mem [L];
  logic [L-1:0] lo_v, up_v;
  logic [PW-1:0] ptr;

  cplx_t lo_d, up_d;
  logic  lo_dv, up_dv;
  assign lo_d  = lo_mem[ptr];
  assign up_d  = up_mem[ptr];
  assign lo_dv = lo_v[L-1];
  assign up_dv = up_v[L-1];

  cplx_t mux_up, mux_lo;
  logic  mux_up_v, mux_lo_v;
  always_comb begin
    mux_up   = sel ? lo_d  : in_a;
    mux_up_v = sel ? lo_dv : in_valid;
    mux_lo   = sel ? in_a  : lo_d;
    mux_lo_v = sel ? in_valid : lo_dv;
  end

  always_ff @(posedge clk) begin
    lo_mem[ptr] <= in_b;
    up_mem[ptr] <= mux_up;
  end

  always_ff @(posedge clk) begin
    if (rst || L == 1)          ptr <= '0;
    else if (ptr == PW'(L - 1)) ptr <= '0;
    else                        ptr <= ptr + PW'(1);
  end

  generate
    if (L > 1) begin : g_vl
      always_ff @(posedge clk) begin
        if (rst) begin
          lo_v <= '0;
          up_v <= '0;
        end else begin
          lo_v <= {lo_v[L-2:0], in_valid};
          up_v <= {up_v[L-2:0], mux_up_v};
        end
      end
    end else begin : g_v1
      always_ff @(posedge clk) begin
        if (rst) begin
          lo_v <= '0;
          up_v <= '0;
        end else begin
          lo_v <= in_valid;
          up_v <= mux_up_v;
        end
      end
    end
  endgenerate

  // output registration; the valid of the pair is that of the upper word
  always_ff @(posedge clk) begin
    out_a <= up_d;
    out_b <= mux_lo;
    if (rst) out_valid <= 1'b0;
    else     out_valid <= up_dv;
  end

  // Both outputs of a pair belong to the same frame.
  property p_pair_valid;
    @(posedge clk) disable iff (rst) up_dv |-> mux_lo_v;
  endproperty
  assert property (p_pair_valid);

endmodule
