// tb_cama_bank: end-to-end test of a reduced bank (2 arrays x 2 PEs, 64-STE
// CAMs, 2 counters, 64-bit vectors, 4-entry buffers). Four automata are
// programmed through the configuration port:
//   report bit 0 (array 0, PE 0): a(bc){2,4}d      with counter 0
//   report bit 1 (array 0, PE 0 -> PE 1): xy        through the global switch
//   report bit 2 (array 1, PE 0): ^a                start_first (anchored)
//   report bit 3 (array 1, PE 1): a[ab]{3,6}b      with the bit vector
// Three streams of random symbols go in through the input buffer while the
// host drains the output buffer slowly, so the bank stalls. Every report
// record (stream offset and mask) is compared with references computed from
// the symbol history of the stream. Each mechanism is counted: counter reset,
// increment, loop cut by the upper bound, counter exit; bit-vector setFirst
// with tokens already present, shift, reset and disjunct; a global-switch
// transfer; an anchored start; an output-full stall. One that never happens
// counts as a failure.
module tb_cama_bank;
  import cama_pkg::*;
  localparam int unsigned NARR = 2, NPE = 2, NSTE = 64, NCNT = 2, BVLEN = 64, NGP = 4;
  localparam int unsigned NSRC = NSTE + 2*NCNT + 1 + NGP;
  localparam int M1 = 2, N1 = 4, M2 = 3, N2 = 6;
  localparam int STREAMS = 3, SLEN = 1500;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, in_first = 0;
  logic [7:0] in_sym = '0;
  logic out_valid, out_ready = 0, stall;
  logic [31:0] out_offset;
  logic [NARR*NPE-1:0] out_report;
  int checks = 0, failures = 0;
  byte s [$];
  byte pend [$];
  typedef struct { int off; int rpt; } rec_t;
  rec_t expq [$];

  cama_bank #(.NARR(NARR), .NPE(NPE), .NSTE(NSTE), .NCNT(NCNT), .CNTW(17),
              .BVLEN(BVLEN), .HAS_BV(1'b1), .NGP(NGP), .IN_DEPTH(4), .OUT_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (probe the hierarchy) --------------
  int n_creset, n_cincr, n_ccut, n_cout, n_bset, n_bshift, n_breset, n_bout;
  int n_global, n_anchor, n_stall;
  initial begin
    n_creset = 0; n_cincr = 0; n_ccut = 0; n_cout = 0; n_bset = 0; n_bshift = 0;
    n_breset = 0; n_bout = 0; n_global = 0; n_anchor = 0; n_stall = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.step) begin
      if (dut.g_arr[0].u_arr.g_pe[0].u_pe.g_cnt[0].u_cnt.do_reset) n_creset++;
      if (dut.g_arr[0].u_arr.g_pe[0].u_pe.g_cnt[0].u_cnt.do_incr)  n_cincr++;
      if (dut.g_arr[0].u_arr.g_pe[0].u_pe.g_cnt[0].u_cnt.lst &&
          !dut.g_arr[0].u_arr.g_pe[0].u_pe.g_cnt[0].u_cnt.le_hi)   n_ccut++;
      if (dut.g_arr[0].u_arr.g_pe[0].u_pe.g_cnt[0].u_cnt.en_out)   n_cout++;
      if (dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.fst &&
          dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.pre_q &&
          |dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.v_q)          n_bset++;
      if (dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.fst &&
          !dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.pre_q &&
          |dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.v_q)          n_bshift++;
      if (!dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.fst &&
          |dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.v_q)          n_breset++;
      if (dut.g_arr[1].u_arr.g_pe[1].u_pe.g_bv.u_bv.en_out)        n_bout++;
      if (|dut.g_arr[0].u_arr.gin)                                  n_global++;
      if (dut.report[2])                                            n_anchor++;
    end
    if (stall) n_stall++;
  end

  // ---------------- configuration ----------------------------------------
  task automatic wr(int arr, int pe, cfg_tgt_e tgt, int index, int word, int data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.array_id = 8'(arr); cfg.pe_id = 8'(pe); cfg.tgt = tgt;
    cfg.index = 12'(index); cfg.word = 8'(word); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic set_row(int arr, int pe, int cam, int dst, int srcs [$]);
    logic [((NSRC+31)/32)*32-1:0] row;
    row = '0;
    foreach (srcs[i]) row[srcs[i]] = 1'b1;
    for (int w = 0; w < (NSRC + 31) / 32; w++)
      wr(arr, pe, CFG_SWITCH, cam * NSTE + dst, w, int'(row[w*32 +: 32]));
  endtask

  // ---------------- references -------------------------------------------
  function automatic bit ref_cnt(int t);
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

  function automatic bit ref_bv(int t);
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

  function automatic byte next_sym();
    if (pend.size() == 0 && $urandom_range(0, 19) == 0) begin
      int k;
      k = $urandom_range(1, 6);
      pend.push_back("a");
      repeat (k) begin pend.push_back("b"); pend.push_back("c"); end
      pend.push_back("d");
    end
    if (pend.size() != 0) return pend.pop_front();
    case ($urandom_range(0, 11))
      0, 1, 2: return "a";
      3, 4:    return "b";
      5, 6:    return "c";
      7:       return "d";
      8:       return "x";
      9:       return "y";
      default: return byte'($urandom_range(0, 255));
    endcase
  endfunction

  // ---------------- host output side -------------------------------------
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rec_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected record off=%0d mask=%b", out_offset, out_report);
    end else begin
      e = expq.pop_front();
      if (out_offset !== 32'(e.off) || out_report !== (NARR*NPE)'(e.rpt)) begin
        failures++;
        $display("record got off=%0d mask=%b, expected off=%0d mask=%b",
                 out_offset, out_report, e.off, (NARR*NPE)'(e.rpt));
      end
    end
  end

  initial begin
    // the host drains in bursts: long pauses fill the output buffer
    forever begin
      repeat ($urandom_range(200, 600)) begin @(negedge clk); out_ready = 0; end
      repeat ($urandom_range(50, 200)) begin
        @(negedge clk); out_ready = ($urandom_range(0, 1) == 0);
      end
    end
  end

  // ---------------- main -------------------------------------------------
  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // array 0, PE 0, CAM 1: a(bc){M1,N1}d with counter 0
    wr(0, 0, CFG_CAM, NSTE + 0,  0, 16'hFF61); wr(0, 0, CFG_ATTR, NSTE + 0,  0, 4'b1001);
    wr(0, 0, CFG_CAM, NSTE + 8,  0, 16'hFF62); wr(0, 0, CFG_ATTR, NSTE + 8,  0, 4'b1000);
    wr(0, 0, CFG_CAM, NSTE + 16, 0, 16'hFF63); wr(0, 0, CFG_ATTR, NSTE + 16, 0, 4'b1000);
    wr(0, 0, CFG_CAM, NSTE + 30, 0, 16'hFF64); wr(0, 0, CFG_ATTR, NSTE + 30, 0, 4'b0100);
    set_row(0, 0, 1, 8,  '{0, NSTE + NCNT + 0});
    set_row(0, 0, 1, 16, '{8});
    set_row(0, 0, 1, 30, '{NSTE + 0});
    wr(0, 0, CFG_COUNTER, 0, 0, M1 - 1); wr(0, 0, CFG_COUNTER, 0, 1, N1 - 1);
    // array 0: x in PE 0 -> global switch -> y in PE 1
    wr(0, 0, CFG_CAM, 40, 0, 16'hFF78); wr(0, 0, CFG_ATTR, 40, 0, 4'b0001);
    wr(0, 0, CFG_GSEL, 0, 0, 40);
    wr(0, 0, CFG_GSWITCH, NGP + 1, 0, 1);
    wr(0, 1, CFG_CAM, 5, 0, 16'hFF79); wr(0, 1, CFG_ATTR, 5, 0, 4'b0100);
    set_row(0, 1, 0, 5, '{NSTE + 2*NCNT + 1 + 1});
    // array 1, PE 0: anchored a
    wr(1, 0, CFG_CAM, 2, 0, 16'hFF61); wr(1, 0, CFG_ATTR, 2, 0, 4'b0110);
    // array 1, PE 1, CAM 0: a[ab]{M2,N2}b with the bit vector
    wr(1, 1, CFG_CAM, 0,  0, 16'hFF61); wr(1, 1, CFG_ATTR, 0,  0, 4'b1001);
    wr(1, 1, CFG_CAM, 8,  0, 16'hFF61); wr(1, 1, CFG_ATTR, 8,  0, 4'b1000);
    wr(1, 1, CFG_CAM, 9,  0, 16'hFF62); wr(1, 1, CFG_ATTR, 9,  0, 4'b1000);
    wr(1, 1, CFG_CAM, 20, 0, 16'hFF62); wr(1, 1, CFG_ATTR, 20, 0, 4'b0100);
    set_row(1, 1, 0, 8,  '{0, 8, 9});
    set_row(1, 1, 0, 9,  '{0, 8, 9});
    set_row(1, 1, 0, 20, '{NSTE + 2*NCNT});
    wr(1, 1, CFG_BV, 0, 0, M2 - 1); wr(1, 1, CFG_BV, 0, 1, N2 - 1);

    for (int st = 0; st < STREAMS; st++) begin
      s.delete();
      pend.delete();
      for (int t = 0; t < SLEN; t++) begin
        int m;
        s.push_back(next_sym());
        if (t == 0 && st == 1) s[0] = "a";          // one anchored match
        m = 0;
        if (ref_cnt(t)) m |= 1;
        if (t > 0 && s[t-1] == "x" && s[t] == "y") m |= 2;
        if (t == 0 && s[0] == "a") m |= 4;
        if (ref_bv(t)) m |= 8;
        if (m != 0) expq.push_back('{t, m});
        @(negedge clk);
        in_valid = 1; in_sym = s[t]; in_first = (t == 0);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
    while (expq.size() != 0 && checks < 100000) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d records missing", expq.size()); end
    $display("mechanisms: counter reset %0d incr %0d loop-cut %0d exit %0d | bitvec setFirst %0d shift %0d reset %0d disjunct %0d | global %0d anchored %0d stall %0d",
             n_creset, n_cincr, n_ccut, n_cout, n_bset, n_bshift, n_breset, n_bout,
             n_global, n_anchor, n_stall);
    checks += 11;
    if (n_creset == 0) begin failures++; $display("counter reset never happened"); end
    if (n_cincr  == 0) begin failures++; $display("counter increment never happened"); end
    if (n_ccut   == 0) begin failures++; $display("counter loop cut never happened"); end
    if (n_cout   == 0) begin failures++; $display("counter exit never happened"); end
    if (n_bset   == 0) begin failures++; $display("bit-vector setFirst with tokens never happened"); end
    if (n_bshift == 0) begin failures++; $display("bit-vector shift never happened"); end
    if (n_breset == 0) begin failures++; $display("bit-vector reset never happened"); end
    if (n_bout   == 0) begin failures++; $display("bit-vector disjunct never fired"); end
    if (n_global == 0) begin failures++; $display("global transfer never happened"); end
    if (n_anchor == 0) begin failures++; $display("anchored start never happened"); end
    if (n_stall  == 0) begin failures++; $display("stall never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
