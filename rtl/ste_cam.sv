// ste_cam: state-matching content-addressable memory of one CAM array.
//
// Each of the NSTE entries is one State Transition Element (STE) and holds a
// 16-bit word that encodes the STE's character class. Every cycle the input
// symbol is compared with all entries in parallel and one match bit per STE
// comes out, combinationally, in the same cycle (the state-matching phase).
//
// Entry encoding (this design's choice; the published architecture names a
// 256 x 16-bit CAM but takes its symbol encoding from earlier work): the
// word is {care[7:0], value[7:0]}, a ternary pattern over the 8-bit symbol.
// The STE matches when (sym ^ value) & care == 0. care = 0 gives the class
// "any symbol"; care = 8'hFF gives a single symbol. A class that is not one
// ternary pattern is spread over several STEs by the compiler.
//
// Interface: one write port (wr_en/wr_idx/wr_word, written at the clock edge),
// search input sym and output match[NSTE]. Reset clears all entries.
module ste_cam #(
  parameter int unsigned NSTE   = 256,
  parameter int unsigned WORD_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(NSTE)-1:0] wr_idx,
  input  logic [WORD_W-1:0]       wr_word,
  input  logic [WORD_W/2-1:0]     sym,
  output logic [NSTE-1:0]         match
);
  localparam int unsigned SW = WORD_W / 2;

  logic [WORD_W-1:0] mem [NSTE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSTE; i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_idx] <= wr_word;
    end
  end

  always_comb begin
    for (int i = 0; i < NSTE; i++) begin
      match[i] = ~|((sym ^ mem[i][SW-1:0]) & mem[i][WORD_W-1:SW]);
    end
  end
endmodule
