// tb_microbench: the two microbenchmark shapes, b a{n} c and .* a{n} c, on one
// processing element at its default size (2 x 256 STEs, 8 x 17-bit counters,
// 2000-bit vector), with bounds beyond what a 16-bit counter or a shorter
// vector could hold.
//   * b a{N1} c (counter 0, report from STE 200 of CAM 1), N1 = 100000.
//     The repeated class is one character, so it must drive both fst and lst:
//     it is placed twice, STE 8 (fst group) and STE 16 (lst group), with the
//     same enable row, so both copies are always active together.
//   * .* a{N2} c (bit vector, report from STE 20 of CAM 0), N2 = 2000, the
//     full vector. pre is an always-on STE that matches every symbol.
// Runs of a of length N-1, N and N+1 (and random short ones) are fed in; the
// report bit is compared every symbol with a reference computed from the
// current run length of a.
module tb_microbench;
  import cama_pkg::*;
  localparam int NSTE = 256, NCNT = 8;
  localparam int N1 = 100000, N2 = 2000;

  logic clk = 0, rst_n = 0, step = 0, first = 0;
  cfg_t cfg;
  logic [7:0] sym = '0;
  logic [15:0] gin = '0, gout;
  logic report;
  logic [2*NSTE-1:0] active;
  int checks = 0, failures = 0;

  processing_element dut (
    .clk, .rst_n, .cfg, .cfg_sel(1'b1), .step, .first, .sym, .gin, .gout,
    .report, .active);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
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
    logic [319:0] row;
    row = '0;
    foreach (srcs[i]) row[srcs[i]] = 1'b1;
    for (int w = 0; w < 10; w++) wr(CFG_SWITCH, cam * NSTE + dst, w, int'(row[w*32 +: 32]));
  endtask

  // run state of the reference
  int  run_a;        // length of the current run of a
  byte prev;         // previous symbol of the stream (0 at the start)
  bit  after_b;      // the current run of a directly follows a b
  int  hits1, hits2;

  task automatic feed(byte c, bit f);
    bit exp1, exp2;
    if (f) begin run_a = 0; prev = 0; after_b = 0; end
    exp1 = (c == "c") && after_b && run_a == N1;
    exp2 = (c == "c") && run_a >= N2 && (t_in_stream - run_a - 1 >= 0);
    @(negedge clk);
    step = 1; first = f; sym = c;
    #1;                                   // report is combinational in the step
    checks++;
    if (report !== (exp1 | exp2)) begin
      failures++;
      if (failures < 10) $display("symbol %0d '%c': report %b, expected %b", t_in_stream, c, report, exp1 | exp2);
    end
    hits1 += int'(exp1); hits2 += int'(exp2);
    if (c == "a") run_a++;
    else begin after_b = (c == "b"); run_a = 0; end
    t_in_stream = f ? 1 : t_in_stream + 1;
    prev = c;
    @(posedge clk);
  endtask
  int t_in_stream = 0;

  task automatic run_of(byte lead, int n);
    feed(lead, 0);
    repeat (n) feed("a", 0);
    feed("c", 0);
  endtask

  initial begin
    cfg = '0;
    hits1 = 0; hits2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // b a{N1} c on counter 0 (CAM 1)
    wr(CFG_CAM, NSTE + 0,   0, 16'hFF62); wr(CFG_ATTR, NSTE + 0,   0, 4'b1001);
    wr(CFG_CAM, NSTE + 8,   0, 16'hFF61); wr(CFG_ATTR, NSTE + 8,   0, 4'b1000);
    wr(CFG_CAM, NSTE + 16,  0, 16'hFF61); wr(CFG_ATTR, NSTE + 16,  0, 4'b1000);
    wr(CFG_CAM, NSTE + 200, 0, 16'hFF63); wr(CFG_ATTR, NSTE + 200, 0, 4'b0100);
    set_row(1, 8,   '{0, NSTE + NCNT + 0});
    set_row(1, 16,  '{0, NSTE + NCNT + 0});
    set_row(1, 200, '{NSTE + 0});
    wr(CFG_COUNTER, 0, 0, N1 - 1); wr(CFG_COUNTER, 0, 1, N1 - 1);
    // .* a{N2} c on the bit vector (CAM 0); STE 0 matches every symbol
    wr(CFG_CAM, 0,  0, 16'h0000); wr(CFG_ATTR, 0,  0, 4'b1001);
    wr(CFG_CAM, 8,  0, 16'hFF61); wr(CFG_ATTR, 8,  0, 4'b1000);
    wr(CFG_CAM, 20, 0, 16'hFF63); wr(CFG_ATTR, 20, 0, 4'b0100);
    set_row(0, 8,  '{0});
    set_row(0, 20, '{NSTE + 2*NCNT});
    wr(CFG_BV, 0, 0, N2 - 1); wr(CFG_BV, 0, 1, N2 - 1);

    feed("z", 1);
    run_of("b", N1 - 1);
    run_of("b", N1);
    run_of("b", N1 + 1);
    run_of("z", N2 - 1);
    run_of("z", N2);
    run_of("z", N2 + 7);
    repeat (200) begin
      case ($urandom_range(0, 2))
        0: run_of("b", $urandom_range(0, 20));
        1: run_of("z", $urandom_range(0, 20));
        default: feed(byte'($urandom_range(97, 100)), 0);
      endcase
    end
    @(negedge clk); step = 0;
    $display("counter matches %0d, bit-vector matches %0d", hits1, hits2);
    checks++;
    if (hits1 != 1 || hits2 < 2) begin failures++; $display("expected matches missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
