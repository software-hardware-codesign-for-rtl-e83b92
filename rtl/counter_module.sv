// counter_module: counter for a counter-unambiguous bounded repetition r{m,n}.
//
// Ports follow the published counter: inputs pre (STE right before the
// repetition), fst (first STE of r) and lst (last STE of r); outputs en_fst
// (re-enables the first STE, closing the loop) and en_out (enables the STE
// right after the repetition). Inside are a synchronous counting unit and two
// comparators, as published:
//   * reset to 0 when pre was active in the previous step and fst is active now
//     (pre is delayed by one step in the register pre_q);
//   * increment by 1 when fst is active and pre was not active in the previous step;
//   * en_out = lst & (lo <= count <= hi);
//   * en_fst = lst & (count <= hi).
// The counter therefore holds (iterations - 1) while the repetition runs, and
// the compiler programs lo = m-1, hi = n-1. A loop that starts an (n+1)-th
// iteration dies at its lst because count then exceeds hi. The count
// saturates instead of wrapping (own choice).
//
// Timing: all state advances only in cycles with step = 1 (a symbol is being
// processed). The comparators look at the count after this step's update, so
// the outputs are valid in the same cycle as lst and feed the next-vector
// logic combinationally; a single-STE repetition (fst = lst) works too.
// Configuration: cfg_we with cfg_sel = 0 writes lo, cfg_sel = 1 writes hi.
module counter_module #(
  parameter int unsigned CNT_W = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic             cfg_sel,
  input  logic [CNT_W-1:0] cfg_data,
  input  logic             step,
  input  logic             pre,
  input  logic             fst,
  input  logic             lst,
  output logic             en_fst,
  output logic             en_out,
  output logic [CNT_W-1:0] count
);
  logic [CNT_W-1:0] lo, hi, cnt_q, cnt_d;
  logic             pre_q;
  logic             do_reset, do_incr, ge_lo, le_hi;

  assign do_reset = pre_q & fst;
  assign do_incr  = fst & ~pre_q;

  always_comb begin
    cnt_d = cnt_q;
    if (do_reset)                 cnt_d = '0;
    else if (do_incr && ~&cnt_q)  cnt_d = cnt_q + 1'b1;
  end

  assign ge_lo  = (cnt_d >= lo);
  assign le_hi  = (cnt_d <= hi);
  assign en_out = step & lst & ge_lo & le_hi;
  assign en_fst = step & lst & le_hi;
  assign count  = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo    <= '0;
      hi    <= '0;
      cnt_q <= '0;
      pre_q <= 1'b0;
    end else begin
      if (cfg_we) begin
        if (cfg_sel) hi <= cfg_data;
        else         lo <= cfg_data;
      end
      if (step) begin
        cnt_q <= cnt_d;
        pre_q <= pre;
      end
    end
  end
endmodule
