// cama_bank: one bank of the counter- and bit-vector-augmented in-memory
// automata processor (top level).
//
// The bank matches a stream of 8-bit symbols against automata programmed into
// NARR processing arrays, one symbol per clock cycle. Each array holds NPE
// processing elements; each PE holds 2 x 256 STEs in CAMs, two local
// switches, 8 counters for counter-unambiguous repetitions and a bit vector
// for counter-ambiguous ones. All arrays see the same symbol; each array is
// an independent group of automata. The input/output buffer feeds symbols in
// and collects report records (symbol offset and a mask of reporting PEs).
//
// Interface: cfg (cama_pkg::cfg_t) programs CAM entries, STE attributes,
// switches, counter and bit-vector thresholds and global-port choices, one
// write per cycle; it should be used while no symbols flow. Symbols enter with
// in_valid/in_ready; records leave with out_valid/out_ready. stall is 1 in a
// cycle where a symbol waits but the output buffer is full.
// Sizes default to the published bank: 16 arrays x 8 PEs.
module cama_bank
  import cama_pkg::*;
#(
  parameter int unsigned NARR      = cama_pkg::N_ARRAYS,
  parameter int unsigned NPE       = cama_pkg::N_PES,
  parameter int unsigned NSTE      = cama_pkg::N_STE,
  parameter int unsigned NCNT      = cama_pkg::N_CNT,
  parameter int unsigned CNTW      = cama_pkg::CNT_W,
  parameter int unsigned BVLEN     = cama_pkg::BV_LEN,
  parameter bit          HAS_BV    = 1'b1,
  parameter int unsigned NGP       = cama_pkg::N_GPORT,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [SYM_W-1:0]     in_sym,
  input  logic                 in_first,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [31:0]          out_offset,
  output logic [NARR*NPE-1:0]  out_report,
  output logic                 stall
);
  logic             step, first;
  logic [SYM_W-1:0] sym;
  logic [NARR*NPE-1:0] report;

  io_buffer #(.RPT_W(NARR*NPE), .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_io (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_sym, .in_first,
    .step, .first, .sym, .report,
    .out_valid, .out_ready, .out_offset, .out_report, .stall
  );

  for (genvar a = 0; a < NARR; a++) begin : g_arr
    processing_array #(
      .NPE(NPE), .NSTE(NSTE), .NCNT(NCNT), .CNTW(CNTW), .BVLEN(BVLEN),
      .HAS_BV(HAS_BV), .NGP(NGP)
    ) u_arr (
      .clk, .rst_n,
      .cfg,
      .cfg_sel(cfg.array_id == 8'(a)),
      .step, .first, .sym,
      .report (report[a*NPE +: NPE])
    );
  end
endmodule
