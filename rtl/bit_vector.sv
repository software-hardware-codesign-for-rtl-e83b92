// bit_vector: bit-vector module for a counter-ambiguous repetition sigma{m,n}.
//
// Bit i of the vector is 1 when a token with counter value i+1 sits on the
// repeated STE (the STE wired to fst). The core is a serial-in parallel-out
// shift register of LEN bits with the four published operations:
//   reset    - fst inactive: the repeated STE did not match, all tokens die;
//   setFirst - fst active and pre was active in the previous step: shift by
//              one with a 1 entering bit 0 (a new token with value 1);
//   shift    - fst active and pre was not active: shift by one with a 0
//              entering (every token's value goes up by one);
//   disjunct - en_out = OR of bits lo..hi of the updated vector.
// Bits shifted past LEN-1 are dropped, which bounds the counter.
// setFirst is read here as "shift in a 1", so that tokens already present
// advance in the same step a new one enters; this is what the token semantics
// of the repetition requires. The compiler programs lo = m-1, hi = n-1.
//
// Timing: the vector advances only in cycles with step = 1; en_out is
// computed from the value being written this step, in the same cycle,
// and feeds the next-vector logic. Configuration: cfg_we with cfg_sel = 0
// writes lo, cfg_sel = 1 writes hi.
//
// The published 2000-bit vector can also be split into segments used by
// separate small repetitions; this module is one unsegmented vector.
module bit_vector #(
  parameter int unsigned LEN = 2000,
  localparam int unsigned IW = $clog2(LEN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_we,
  input  logic           cfg_sel,
  input  logic [IW-1:0]  cfg_data,
  input  logic           step,
  input  logic           pre,
  input  logic           fst,
  output logic           en_out,
  output logic [LEN-1:0] vec
);
  logic [LEN-1:0] v_q, v_d, win;
  logic [IW-1:0]  lo, hi;
  logic           pre_q;

  always_comb begin
    if (!fst) v_d = '0;                           // reset
    else      v_d = {v_q[LEN-2:0], pre_q};        // setFirst (pre_q=1) / shift
  end

  // window of bits lo..hi
  assign win    = ({LEN{1'b1}} << lo) & ({LEN{1'b1}} >> (LEN - 1 - 32'(hi)));
  assign en_out = step & |(v_d & win);
  assign vec    = v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      lo    <= '0;
      hi    <= '0;
      pre_q <= 1'b0;
    end else begin
      if (cfg_we) begin
        if (cfg_sel) hi <= cfg_data;
        else         lo <= cfg_data;
      end
      if (step) begin
        v_q   <= v_d;
        pre_q <= pre;
      end
    end
  end
endmodule
