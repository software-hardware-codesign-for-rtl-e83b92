// tb_processing_element: programs one PE with two automata and runs a random
// stream through it, checking the final STEs every symbol against references
// computed directly from the symbol history.
//   CAM 1, counter 0:  a(bc){M1,N1}d   STEs a=0 (pre group), b=8 (fst group),
//                      c=16 (lst group), d=30; b <- a, b <- en_fst0,
//                      c <- b, d <- en_out0.
//   CAM 0, bit vector: a[ab]{M2,N2}b   STEs a=0 (pre group), [ab] = STEs 8
//                      and 9 (both in the fst group), b=20; 8,9 <- 0,8,9,
//                      20 <- bit-vector output.
// Both start with an unanchored 'a' (start_all). Global port 0 is set to
// carry STE d and is checked too, as is the report flag.
module tb_processing_element;
  import cama_pkg::*;
  localparam int unsigned NSTE = 64, NCNT = 2, BVLEN = 64, NGP = 4;
  localparam int unsigned NSRC = NSTE + 2*NCNT + 1 + NGP;
  localparam int M1 = 2, N1 = 4, M2 = 3, N2 = 6;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic step = 0, first = 0;
  logic [7:0] sym = '0;
  logic [NGP-1:0] gin = '0, gout;
  logic report;
  logic [2*NSTE-1:0] active;
  int checks = 0, failures = 0, hits1 = 0, hits2 = 0;
  byte s [$];

  processing_element #(.NSTE(NSTE), .NCNT(NCNT), .CNTW(17), .BVLEN(BVLEN),
                       .HAS_BV(1'b1), .NGP(NGP)) dut (
    .clk, .rst_n, .cfg, .cfg_sel(1'b1), .step, .first, .sym, .gin, .gout,
    .report, .active);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(cfg_tgt_e tgt, int index, int word, int data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.tgt = tgt; cfg.index = 12'(index); cfg.word = 8'(word);
    cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic set_row(int cam, int dst, int srcs [$]);
    logic [((NSRC+31)/32)*32-1:0] row;
    row = '0;
    foreach (srcs[i]) row[srcs[i]] = 1'b1;
    for (int w = 0; w < (NSRC + 31) / 32; w++)
      wr(CFG_SWITCH, cam * NSTE + dst, w, int'(row[w*32 +: 32]));
  endtask

  function automatic bit ref1(int t);
    if (s[t] != "d") return 0;
    for (int k = M1; k <= N1; k++) begin
      bit ok;
      ok = (t - 1 - 2*k >= 0);
      if (ok && s[t-1-2*k] != "a") ok = 0;
      for (int j = 0; ok && j < k; j++)
        if (s[t-2*k+2*j] != "b" || s[t-2*k+2*j+1] != "c") ok = 0;
      if (ok) return 1;
    end
    return 0;
  endfunction

  function automatic bit ref2(int t);
    if (s[t] != "b") return 0;
    for (int k = M2; k <= N2; k++) begin
      bit ok;
      ok = (t - k - 1 >= 0);
      if (ok && s[t-k-1] != "a") ok = 0;
      for (int j = t - k; ok && j < t; j++) if (s[j] != "a" && s[j] != "b") ok = 0;
      if (ok) return 1;
    end
    return 0;
  endfunction

  byte pend [$];

  // mostly random letters; now and then a whole a(bc)^k d with k in 1..5
  function automatic byte next_sym();
    if (pend.size() == 0 && $urandom_range(0, 19) == 0) begin
      int k = $urandom_range(1, 5);
      pend.push_back("a");
      repeat (k) begin pend.push_back("b"); pend.push_back("c"); end
      pend.push_back("d");
    end
    if (pend.size() != 0) return pend.pop_front();
    case ($urandom_range(0, 9))
      0, 1, 2: return "a";
      3, 4:    return "b";
      5, 6:    return "c";
      7:       return "d";
      default: return byte'($urandom_range(0, 255));
    endcase
  endfunction

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // CAM 1: a(bc){M1,N1}d with counter 0
    wr(CFG_CAM,  NSTE + 0,  0, 16'hFF61); wr(CFG_ATTR, NSTE + 0,  0, 4'b1001);
    wr(CFG_CAM,  NSTE + 8,  0, 16'hFF62); wr(CFG_ATTR, NSTE + 8,  0, 4'b1000);
    wr(CFG_CAM,  NSTE + 16, 0, 16'hFF63); wr(CFG_ATTR, NSTE + 16, 0, 4'b1000);
    wr(CFG_CAM,  NSTE + 30, 0, 16'hFF64); wr(CFG_ATTR, NSTE + 30, 0, 4'b0100);
    set_row(1, 8,  '{0, NSTE + NCNT + 0});
    set_row(1, 16, '{8});
    set_row(1, 30, '{NSTE + 0});
    wr(CFG_COUNTER, 0, 0, M1 - 1); wr(CFG_COUNTER, 0, 1, N1 - 1);
    // CAM 0: a[ab]{M2,N2}b with the bit vector
    wr(CFG_CAM, 0,  0, 16'hFF61); wr(CFG_ATTR, 0,  0, 4'b1001);
    wr(CFG_CAM, 8,  0, 16'hFF61); wr(CFG_ATTR, 8,  0, 4'b1000);
    wr(CFG_CAM, 9,  0, 16'hFF62); wr(CFG_ATTR, 9,  0, 4'b1000);
    wr(CFG_CAM, 20, 0, 16'hFF62); wr(CFG_ATTR, 20, 0, 4'b0100);
    set_row(0, 8,  '{0, 8, 9});
    set_row(0, 9,  '{0, 8, 9});
    set_row(0, 20, '{NSTE + 2*NCNT});
    wr(CFG_BV, 0, 0, M2 - 1); wr(CFG_BV, 0, 1, N2 - 1);
    // global port 0 carries STE d of CAM 1
    wr(CFG_GSEL, 0, 0, NSTE + 30);

    for (int t = 0; t < 6000; t++) begin
      bit e1, e2;
      @(negedge clk);
      s.push_back(next_sym());
      sym = s[t]; step = 1; first = (t == 0);
      #1;
      e1 = ref1(t); e2 = ref2(t);
      hits1 += e1; hits2 += e2;
      checks += 4;
      if (active[NSTE + 30] !== e1) begin failures++; $display("t=%0d counter regex got %b exp %b", t, active[NSTE+30], e1); end
      if (active[20] !== e2)        begin failures++; $display("t=%0d bit-vector regex got %b exp %b", t, active[20], e2); end
      if (gout[0] !== e1)           begin failures++; $display("t=%0d gout[0] wrong", t); end
      if (report !== (e1 | e2))     begin failures++; $display("t=%0d report wrong", t); end
    end
    checks += 2;
    if (hits1 < 5) begin failures++; $display("counter regex matched only %0d times", hits1); end
    if (hits2 < 5) begin failures++; $display("bit-vector regex matched only %0d times", hits2); end
    $display("matches: counter regex %0d, bit-vector regex %0d", hits1, hits2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
