// tb_ste_cam: writes random ternary entries and searches with random symbols.
// The expected match of each STE is worked out bit by bit: every symbol bit
// whose care bit is set must equal the stored value bit.
module tb_ste_cam;
  localparam int unsigned N = 256;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [7:0] wr_idx = '0;
  logic [15:0] wr_word = '0;
  logic [7:0] sym = '0;
  logic [N-1:0] match;
  logic [15:0] shadow [N];
  int checks = 0, failures = 0;

  ste_cam #(.NSTE(N), .WORD_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 8'(i);
      case ($urandom_range(0, 3))
        0:       wr_word = {8'hFF, 8'($urandom)};           // single symbol
        1:       wr_word = {8'h00, 8'($urandom)};           // any symbol
        default: wr_word = 16'($urandom);                   // ternary class
      endcase
      shadow[i] = wr_word;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      sym = (t < 256) ? 8'(t) : 8'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        bit e;
        e = 1;
        for (int b = 0; b < 8; b++)
          if (shadow[i][8 + b] && (sym[b] != shadow[i][b])) e = 0;
        checks++;
        if (match[i] !== e) begin
          failures++;
          if (failures < 10) $display("STE %0d sym %h got %b exp %b", i, sym, match[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
