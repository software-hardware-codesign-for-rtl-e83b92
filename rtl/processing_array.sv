// processing_array: NPE processing elements joined by one global switch.
//
// All PEs see the same symbol and step. Each PE's NGP global outputs go into
// the global switch and the switch's outputs come back as that PE's global
// inputs, so an STE in one PE can enable STEs in another PE for the next
// symbol. Configuration writes reach PE p when cfg.pe_id == p; CFG_GSWITCH
// writes go to the global switch. report[p] is PE p's report flag.
module processing_array
  import cama_pkg::*;
#(
  parameter int unsigned NPE    = cama_pkg::N_PES,
  parameter int unsigned NSTE   = cama_pkg::N_STE,
  parameter int unsigned NCNT   = cama_pkg::N_CNT,
  parameter int unsigned CNTW   = cama_pkg::CNT_W,
  parameter int unsigned BVLEN  = cama_pkg::BV_LEN,
  parameter bit          HAS_BV = 1'b1,
  parameter int unsigned NGP    = cama_pkg::N_GPORT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              cfg_sel,
  input  logic              step,
  input  logic              first,
  input  logic [SYM_W-1:0]  sym,
  output logic [NPE-1:0]    report
);
  logic [NPE*NGP-1:0] gout, gin;

  global_switch #(.NPE(NPE), .NGP(NGP), .DW(CFG_DW)) u_gsw (
    .clk, .rst_n,
    .wr_en  (cfg.we && cfg_sel && cfg.tgt == CFG_GSWITCH),
    .wr_row (cfg.index[$clog2(NPE*NGP)-1:0]),
    .wr_word(cfg.word),
    .wr_data(cfg.data),
    .gout,
    .gin
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    processing_element #(
      .NSTE(NSTE), .NCNT(NCNT), .CNTW(CNTW), .BVLEN(BVLEN),
      .HAS_BV(HAS_BV), .NGP(NGP)
    ) u_pe (
      .clk, .rst_n,
      .cfg,
      .cfg_sel(cfg_sel && cfg.tgt != CFG_GSWITCH && cfg.pe_id == 8'(p)),
      .step, .first, .sym,
      .gin    (gin[p*NGP +: NGP]),
      .gout   (gout[p*NGP +: NGP]),
      .report (report[p]),
      .active ()
    );
  end
endmodule
