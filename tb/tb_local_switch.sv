// tb_local_switch: programs random connection rows 32 bits at a time and
// checks every destination against the OR over its connected sources,
// computed source by source from a shadow copy of the rows.
module tb_local_switch;
  localparam int unsigned NSRC = 289, NDST = 256, NW = (NSRC + 31) / 32;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [7:0] wr_row = '0, wr_word = '0;
  logic [31:0] wr_data = '0;
  logic [NSRC-1:0] src = '0;
  logic [NDST-1:0] nxt;
  logic [NW*32-1:0] shadow [NDST];
  int checks = 0, failures = 0;

  local_switch #(.NSRC(NSRC), .NDST(NDST), .DW(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int d = 0; d < int'(NDST); d++) begin
      bit e;
      e = 0;
      for (int s = 0; s < int'(NSRC); s++) if (shadow[d][s] && src[s]) e = 1;
      checks++;
      if (nxt[d] !== e) begin
        failures++;
        if (failures < 10) $display("dst %0d got %b exp %b", d, nxt[d], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    src = {NSRC{1'b1}}; #1;
    for (int d = 0; d < int'(NDST); d++) shadow[d] = '0;
    check_all();                                  // reset leaves no connection
    for (int d = 0; d < int'(NDST); d++) begin
      for (int w = 0; w < int'(NW); w++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 8'(d); wr_word = 8'(w);
        // sparse rows: a few bits per word
        wr_data = $urandom & $urandom & $urandom & $urandom;
        shadow[d][w*32 +: 32] = wr_data;
      end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      src = '0;
      for (int k = 0; k < 6; k++) src[$urandom_range(0, NSRC-1)] = 1'b1;
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
