// tb_processing_array: checks the path between PEs through the global switch.
// PE 0 holds an unanchored 'x' whose activity leaves on its global port 0;
// the global switch sends that port to global input 1 of PE 2, which enables
// a reporting 'y' there. PE 1 holds an unanchored reporting 'z'. Expected per
// symbol: report[2] = (previous symbol 'x' and this one 'y'), report[1] =
// (this symbol 'z'), all other report bits 0.
module tb_processing_array;
  import cama_pkg::*;
  localparam int unsigned NPE = 4, NSTE = 64, NCNT = 2, BVLEN = 32, NGP = 4;
  localparam int unsigned NSRC = NSTE + 2*NCNT + 1 + NGP;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic step = 0, first = 0;
  logic [7:0] sym = '0;
  logic [NPE-1:0] report;
  int checks = 0, failures = 0, n_cross = 0;
  byte s [$];

  processing_array #(.NPE(NPE), .NSTE(NSTE), .NCNT(NCNT), .CNTW(17), .BVLEN(BVLEN),
                     .HAS_BV(1'b1), .NGP(NGP)) dut (
    .clk, .rst_n, .cfg, .cfg_sel(1'b1), .step, .first, .sym, .report);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int pe, cfg_tgt_e tgt, int index, int word, int data);
    @(negedge clk);
    cfg = '0;
    cfg.we = 1; cfg.pe_id = 8'(pe); cfg.tgt = tgt; cfg.index = 12'(index);
    cfg.word = 8'(word); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic set_row(int pe, int cam, int dst, int src);
    logic [((NSRC+31)/32)*32-1:0] row;
    row = '0;
    row[src] = 1'b1;
    for (int w = 0; w < (NSRC + 31) / 32; w++)
      wr(pe, CFG_SWITCH, cam * NSTE + dst, w, int'(row[w*32 +: 32]));
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(0, CFG_CAM, 0, 0, 16'hFF78); wr(0, CFG_ATTR, 0, 0, 4'b0001);   // 'x'
    wr(0, CFG_GSEL, 0, 0, 0);                                          // port 0 <- STE 0
    wr(0, CFG_GSWITCH, 2*NGP + 1, 0, 1);                               // PE2.in1 <- PE0.out0
    wr(2, CFG_CAM, 5, 0, 16'hFF79); wr(2, CFG_ATTR, 5, 0, 4'b0100);   // 'y', report
    set_row(2, 0, 5, NSTE + 2*NCNT + 1 + 1);                           // y <- global in 1
    wr(1, CFG_CAM, NSTE + 3, 0, 16'hFF7A); wr(1, CFG_ATTR, NSTE + 3, 0, 4'b0101); // 'z'

    for (int t = 0; t < 3000; t++) begin
      logic [NPE-1:0] e;
      @(negedge clk);
      s.push_back(byte'("x" + $urandom_range(0, 2)));
      sym = s[t]; step = ($urandom_range(0, 7) != 0); first = 0;
      #1;
      if (!step) begin
        void'(s.pop_back());
        t--;
        checks++;
        if (report !== '0) begin failures++; $display("report without step"); end
        continue;
      end
      e = '0;
      e[2] = (t > 0 && s[t-1] == "x" && s[t] == "y");
      e[1] = (s[t] == "z");
      n_cross += e[2];
      checks++;
      if (report !== e) begin failures++; $display("t=%0d report %b exp %b", t, report, e); end
    end
    checks++;
    if (n_cross < 10) begin failures++; $display("cross-PE match seen only %0d times", n_cross); end
    $display("cross-PE matches: %0d", n_cross);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
