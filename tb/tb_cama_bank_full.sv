// tb_cama_bank_full: the bank at its default (paper) size, 16 arrays x 8 PEs,
// 2 x 256 STEs per PE, 8 x 17-bit counters and one 2000-bit vector per PE.
// Two automata with paper-scale bounds are programmed:
//   array 15, PE 7, CAM 1, counter 7: a(bc){1000}d     (report bit 127)
//   array 3,  PE 2, CAM 0, bit vector: a[ab]{1990,2000}b (report bit 26)
// Streams with 999, 1000 and 1001 repetitions and with long [ab] runs are fed
// in; each report record is compared with a reference. The engine takes one
// symbol per clock when neither buffer blocks it, so the cycle count of a
// stream with an always-ready host is checked against its symbol count.
module tb_cama_bank_full;
  import cama_pkg::*;
  localparam int unsigned NSTE = 256, NCNT = 8, NPE = 8, NARR = 16;
  localparam int CM = 1000, CN = 1000, BM = 1990, BN = 2000;
  localparam int CA = 15, CP = 7, CC = 7;              // counter automaton
  localparam int BA = 3,  BP = 2;                      // bit-vector automaton

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready, in_first = 0;
  logic [7:0] in_sym = '0;
  logic out_valid, out_ready = 1, stall;
  logic [31:0] out_offset;
  logic [NARR*NPE-1:0] out_report;
  int checks = 0, failures = 0;
  byte s [$];
  typedef struct { int off; int bit_i; } rec_t;
  rec_t expq [$];
  int run_start;                                       // start of the [ab] run ending at t-1

  cama_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int arr, int pe, cfg_tgt_e tgt, int index, int word, int data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.array_id = 8'(arr); cfg.pe_id = 8'(pe); cfg.tgt = tgt;
    cfg.index = 12'(index); cfg.word = 8'(word); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic set_row(int arr, int pe, int cam, int dst, int srcs [$]);
    logic [319:0] row;
    row = '0;
    foreach (srcs[i]) row[srcs[i]] = 1'b1;
    for (int w = 0; w < 10; w++) wr(arr, pe, CFG_SWITCH, cam * NSTE + dst, w, int'(row[w*32 +: 32]));
  endtask

  function automatic bit ref_cnt(int t);
    bit ok;
    if (s[t] != "d" || t - 1 - 2*CM < 0) return 0;
    for (int k = CM; k <= CN; k++) begin
      ok = (t - 1 - 2*k >= 0) && s[t-1-2*k] == "a";
      for (int j = 0; ok && j < k; j++)
        if (s[t-2*k+2*j] != "b" || s[t-2*k+2*j+1] != "c") ok = 0;
      if (ok) return 1;
    end
    return 0;
  endfunction

  function automatic bit ref_bv(int t);
    if (s[t] != "b") return 0;
    for (int k = BM; k <= BN; k++)
      if (t - k - 1 >= run_start && s[t-k-1] == "a") return 1;
    return 0;
  endfunction

  // one stream, symbols pushed with in_first on the first; returns cycles used
  task automatic run_stream(byte str [$]);
    int t0, t1;
    s.delete();
    run_start = 0;
    t0 = cyc;
    foreach (str[t]) begin
      s.push_back(str[t]);
      if (ref_cnt(t)) expq.push_back('{t, CA*NPE + CP});
      if (ref_bv(t))  expq.push_back('{t, BA*NPE + BP});
      if (s[t] != "a" && s[t] != "b") run_start = t + 1;
      @(negedge clk);
      in_valid = 1; in_sym = str[t]; in_first = (t == 0);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    // the stream is consumed one symbol per cycle
    while (dut.u_io.in_empty == 1'b0) @(posedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 > str.size() + 4) begin
      failures++;
      $display("stream of %0d symbols took %0d cycles", str.size(), t1 - t0);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rec_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected record off=%0d mask=%h", out_offset, out_report);
    end else begin
      e = expq.pop_front();
      if (out_offset !== 32'(e.off) || out_report !== ((NARR*NPE)'(1) << e.bit_i)) begin
        failures++;
        $display("record got off=%0d mask=%h, expected off=%0d bit %0d",
                 out_offset, out_report, e.off, e.bit_i);
      end
    end
  end

  initial begin
    byte str [$];
    int base;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // counter automaton: counter CC uses CAM-1 STE groups 3*8*CC + {0,8,16}
    base = 3 * 8 * CC;
    wr(CA, CP, CFG_CAM, NSTE + base,      0, 16'hFF61); wr(CA, CP, CFG_ATTR, NSTE + base,      0, 4'b1001);
    wr(CA, CP, CFG_CAM, NSTE + base + 8,  0, 16'hFF62); wr(CA, CP, CFG_ATTR, NSTE + base + 8,  0, 4'b1000);
    wr(CA, CP, CFG_CAM, NSTE + base + 16, 0, 16'hFF63); wr(CA, CP, CFG_ATTR, NSTE + base + 16, 0, 4'b1000);
    wr(CA, CP, CFG_CAM, NSTE + 200,       0, 16'hFF64); wr(CA, CP, CFG_ATTR, NSTE + 200,       0, 4'b0100);
    set_row(CA, CP, 1, base + 8,  '{base, NSTE + NCNT + CC});
    set_row(CA, CP, 1, base + 16, '{base + 8});
    set_row(CA, CP, 1, 200,       '{NSTE + CC});
    wr(CA, CP, CFG_COUNTER, CC, 0, CM - 1); wr(CA, CP, CFG_COUNTER, CC, 1, CN - 1);
    // bit-vector automaton on CAM 0
    wr(BA, BP, CFG_CAM, 0,  0, 16'hFF61); wr(BA, BP, CFG_ATTR, 0,  0, 4'b1001);
    wr(BA, BP, CFG_CAM, 8,  0, 16'hFF61); wr(BA, BP, CFG_ATTR, 8,  0, 4'b1000);
    wr(BA, BP, CFG_CAM, 9,  0, 16'hFF62); wr(BA, BP, CFG_ATTR, 9,  0, 4'b1000);
    wr(BA, BP, CFG_CAM, 20, 0, 16'hFF62); wr(BA, BP, CFG_ATTR, 20, 0, 4'b0100);
    set_row(BA, BP, 0, 8,  '{0, 8, 9});
    set_row(BA, BP, 0, 9,  '{0, 8, 9});
    set_row(BA, BP, 0, 20, '{NSTE + 2*NCNT});
    wr(BA, BP, CFG_BV, 0, 0, BM - 1); wr(BA, BP, CFG_BV, 0, 1, BN - 1);

    // stream 1: a(bc){999}d a(bc){1000}d a(bc){1001}d with random filler
    str.delete();
    for (int i = 0; i < 3; i++) begin
      int k;
      k = 999 + i;
      str.push_back("a");
      repeat (k) begin str.push_back("b"); str.push_back("c"); end
      str.push_back("d");
      repeat ($urandom_range(1, 5)) str.push_back("z");
    end
    run_stream(str);
    // stream 2: runs of random [ab] of several lengths around the bounds
    str.delete();
    for (int i = 0; i < 3; i++) begin
      int len;
      len = (i == 0) ? 1985 : (i == 1) ? 1995 : 2010;
      repeat (len) str.push_back(($urandom_range(0, 3) == 0) ? "b" : "a");
      str.push_back("b");
      str.push_back("z");
    end
    run_stream(str);
    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d records missing", expq.size()); end
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
