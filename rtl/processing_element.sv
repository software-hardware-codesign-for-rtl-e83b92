// processing_element: one PE of the augmented in-memory automata array.
//
// A PE holds two CAM arrays of NSTE STEs (CAM 0 and CAM 1), one local switch
// per CAM array, NCNT counter modules and, when HAS_BV = 1, one bit-vector
// module. Every processed symbol (step = 1) goes through two phases in one
// clock cycle:
//   1. state matching: both CAMs are searched with the symbol; an STE is
//      active when it matches and was enabled (en_q, its start attribute, or
//      start_first on the first symbol of a stream; on the first symbol of
//      a stream the enables left over from the previous stream are ignored);
//   2. state transition: the active STEs, the counter and bit-vector outputs
//      and the global inputs go through the local switches and give the
//      enables for the next symbol, which are registered in en_q.
// Counters and the bit vector update in the same cycle.
//
// Port wiring (published: fixed STE groups, each STE passes its signal to
// the port only when its enable bit is set). Counter c sits on CAM 1:
//   pre = OR of STEs 24c+0..7, fst = STEs 24c+8..15, lst = STEs 24c+16..23
// (GRP = 8 STEs per group). The bit vector sits on CAM 0 with pre = STEs 0..7
// and fst = STEs 8..15; that group choice is this design's own.
// Both local switches see the same extra sources: en_out and en_fst of all
// counters, the bit-vector output and the global inputs (own choice; the
// published figure draws the counters beside one switch and the bit vector
// beside the other).
// Global outputs: port j carries the active bit of the STE chosen by gsel[j]
// (STE index over both CAMs, 0..2*NSTE-1). The global-port scheme is own.
// report: OR of the active STEs that have the report attribute.
//
// Configuration: cfg_sel qualifies cfg (see cama_pkg::cfg_tgt_e); writes take
// effect at the clock edge. Reset clears all state and configuration.
module processing_element
  import cama_pkg::*;
#(
  parameter int unsigned NSTE   = cama_pkg::N_STE,
  parameter int unsigned NCNT   = cama_pkg::N_CNT,
  parameter int unsigned CNTW   = cama_pkg::CNT_W,
  parameter int unsigned BVLEN  = cama_pkg::BV_LEN,
  parameter bit          HAS_BV = 1'b1,
  parameter int unsigned NGP    = cama_pkg::N_GPORT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  input  logic                  cfg_sel,
  input  logic                  step,
  input  logic                  first,
  input  logic [SYM_W-1:0]      sym,
  input  logic [NGP-1:0]        gin,
  output logic [NGP-1:0]        gout,
  output logic                  report,
  output logic [2*NSTE-1:0]     active
);
  localparam int unsigned LW   = $clog2(NSTE);
  localparam int unsigned NSRC = sw_src(NSTE, NCNT, NGP);
  localparam int unsigned BVW  = $clog2(BVLEN);

  // 3 groups of GRP STEs per counter must fit in CAM 1
  initial assert (3 * GRP * NCNT <= NSTE) else $error("counter groups exceed CAM size");

  logic             we;
  assign we = cfg.we & cfg_sel;

  // ---------------- configuration registers -----------------------------
  ste_attr_t              attr [2*NSTE];
  logic [LW:0]            gsel [NGP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2*NSTE; i++) attr[i] <= '0;
      for (int j = 0; j < NGP; j++)    gsel[j] <= '0;
    end else if (we) begin
      if (cfg.tgt == CFG_ATTR) attr[cfg.index[LW:0]] <= ste_attr_t'(cfg.data[3:0]);
      if (cfg.tgt == CFG_GSEL && 32'(cfg.index) < NGP)
        gsel[cfg.index[$clog2(NGP)-1:0]] <= cfg.data[LW:0];
    end
  end

  // ---------------- state matching -------------------------------------
  logic [NSTE-1:0] match  [2];
  logic [NSTE-1:0] en_q   [2];
  logic [NSTE-1:0] act    [2];
  logic [NSTE-1:0] nxt    [2];

  for (genvar k = 0; k < 2; k++) begin : g_cam
    ste_cam #(.NSTE(NSTE), .WORD_W(CAM_WORD_W)) u_cam (
      .clk, .rst_n,
      .wr_en  (we && cfg.tgt == CFG_CAM && cfg.index[LW] == 1'(k)),
      .wr_idx (cfg.index[LW-1:0]),
      .wr_word(cfg.data[CAM_WORD_W-1:0]),
      .sym,
      .match  (match[k])
    );

    always_comb begin
      for (int i = 0; i < NSTE; i++) begin
        act[k][i] = step & match[k][i] &
                    ((en_q[k][i] & ~first) | attr[k*NSTE+i].start_all |
                     (first & attr[k*NSTE+i].start_first));
      end
    end
  end

  assign active = {act[1], act[0]};

  // ---------------- counters on CAM 1 -----------------------------------
  logic [NCNT-1:0] c_pre, c_fst, c_lst, c_en_fst, c_en_out;

  always_comb begin
    for (int c = 0; c < NCNT; c++) begin
      c_pre[c] = 1'b0; c_fst[c] = 1'b0; c_lst[c] = 1'b0;
      for (int g = 0; g < GRP; g++) begin
        c_pre[c] |= act[1][3*GRP*c + g]         & attr[NSTE + 3*GRP*c + g].port_en;
        c_fst[c] |= act[1][3*GRP*c + GRP + g]   & attr[NSTE + 3*GRP*c + GRP + g].port_en;
        c_lst[c] |= act[1][3*GRP*c + 2*GRP + g] & attr[NSTE + 3*GRP*c + 2*GRP + g].port_en;
      end
    end
  end

  for (genvar c = 0; c < NCNT; c++) begin : g_cnt
    counter_module #(.CNT_W(CNTW)) u_cnt (
      .clk, .rst_n,
      .cfg_we  (we && cfg.tgt == CFG_COUNTER && cfg.index == 12'(c)),
      .cfg_sel (cfg.word[0]),
      .cfg_data(cfg.data[CNTW-1:0]),
      .step,
      .pre     (c_pre[c]),
      .fst     (c_fst[c]),
      .lst     (c_lst[c]),
      .en_fst  (c_en_fst[c]),
      .en_out  (c_en_out[c]),
      .count   ()
    );
  end

  // ---------------- bit vector on CAM 0 ---------------------------------
  logic bv_out;

  if (HAS_BV) begin : g_bv
    logic bv_pre, bv_fst;
    always_comb begin
      bv_pre = 1'b0; bv_fst = 1'b0;
      for (int g = 0; g < GRP; g++) begin
        bv_pre |= act[0][g]       & attr[g].port_en;
        bv_fst |= act[0][GRP + g] & attr[GRP + g].port_en;
      end
    end
    bit_vector #(.LEN(BVLEN)) u_bv (
      .clk, .rst_n,
      .cfg_we  (we && cfg.tgt == CFG_BV),
      .cfg_sel (cfg.word[0]),
      .cfg_data(cfg.data[BVW-1:0]),
      .step,
      .pre     (bv_pre),
      .fst     (bv_fst),
      .en_out  (bv_out),
      .vec     ()
    );
  end else begin : g_no_bv
    assign bv_out = 1'b0;
  end

  // ---------------- state transition ------------------------------------
  for (genvar k = 0; k < 2; k++) begin : g_sw
    logic [NSRC-1:0] src;
    assign src = {gin, bv_out, c_en_fst, c_en_out, act[k]};

    local_switch #(.NSRC(NSRC), .NDST(NSTE), .DW(CFG_DW)) u_sw (
      .clk, .rst_n,
      .wr_en  (we && cfg.tgt == CFG_SWITCH && cfg.index[LW] == 1'(k)),
      .wr_row (cfg.index[LW-1:0]),
      .wr_word(cfg.word),
      .wr_data(cfg.data),
      .src,
      .nxt    (nxt[k])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    en_q[k] <= '0;
      else if (step) en_q[k] <= nxt[k];
    end
  end

  // ---------------- global outputs and report ---------------------------
  always_comb begin
    for (int j = 0; j < NGP; j++) gout[j] = active[gsel[j]];
    report = 1'b0;
    for (int i = 0; i < 2*NSTE; i++) report |= active[i] & attr[i].report;
  end
endmodule
