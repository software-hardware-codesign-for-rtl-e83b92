// cama_pkg: sizes, configuration-bus types and source-index layout shared
// by the counter- and bit-vector-augmented in-memory automata bank.
//
// The bank sizes (16 arrays, 8 PEs per array, two 256-STE CAMs per PE,
// 8 counters of 17 bits, one 2000-bit vector per PE) follow the published
// architecture. The configuration bus, the STE attribute bits and the number
// of global ports per PE are this design's own choices; the architecture
// description does not give them.
package cama_pkg;

  // ---- published sizes ---------------------------------------------------
  localparam int unsigned N_ARRAYS   = 16;   // processing arrays per bank
  localparam int unsigned N_PES      = 8;    // PEs per array
  localparam int unsigned N_STE      = 256;  // STEs per CAM array
  localparam int unsigned CAM_WORD_W = 16;   // bits per CAM entry
  localparam int unsigned N_CNT      = 8;    // counters per PE
  localparam int unsigned CNT_W      = 17;   // counter width
  localparam int unsigned BV_LEN     = 2000; // bit-vector length
  localparam int unsigned GRP        = 8;    // STEs per counter port group

  // ---- own choices -------------------------------------------------------
  localparam int unsigned N_GPORT    = 16;   // global ports per PE (out and in)
  localparam int unsigned SYM_W      = 8;    // input symbol width
  localparam int unsigned CFG_DW     = 32;   // configuration data word

  // Per-STE attribute bits (written with CFG_ATTR).
  typedef struct packed {
    logic port_en;      // STE may drive the counter / bit-vector port of its group
    logic report;       // STE is a reporting (final) state
    logic start_first;  // STE is enabled for the first symbol of a stream
    logic start_all;    // STE is enabled for every symbol (unanchored start)
  } ste_attr_t;

  // What a configuration write addresses.
  typedef enum logic [2:0] {
    CFG_CAM     = 3'd0,  // index = STE (0..511), data[15:0] = {care, value}
    CFG_ATTR    = 3'd1,  // index = STE (0..511), data[3:0]  = ste_attr_t
    CFG_SWITCH  = 3'd2,  // index = {cam, dst STE}, word = 32-bit slice of the source row
    CFG_COUNTER = 3'd3,  // index = counter, word 0 = lo threshold, word 1 = hi threshold
    CFG_BV      = 3'd4,  // word 0 = lo bit index, word 1 = hi bit index
    CFG_GSEL    = 3'd5,  // index = global out port, data = STE (0..511) it carries
    CFG_GSWITCH = 3'd6   // array level: index = dst global input, word = slice of source row
  } cfg_tgt_e;

  typedef struct packed {
    logic        we;
    logic [7:0]  array_id;
    logic [7:0]  pe_id;
    cfg_tgt_e    tgt;
    logic [11:0] index;
    logic [7:0]  word;
    logic [CFG_DW-1:0] data;
  } cfg_t;

  // Number of switch sources seen by each local switch of a PE:
  // the 256 STEs of its own CAM, then en_out and en_fst of every counter,
  // then the bit-vector output, then the global inputs.
  function automatic int unsigned sw_src(int unsigned nste, int unsigned ncnt,
                                         int unsigned ngport);
    return nste + 2*ncnt + 1 + ngport;
  endfunction

endpackage
