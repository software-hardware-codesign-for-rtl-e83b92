// tb_io_buffer: streams symbols through the input FIFO while a stand-in for
// the arrays reports on some symbols (report = symbol value when it is a
// multiple of 3). The host side drains records with a random out_ready, so
// the output FIFO fills and the engine stalls. Checked: every record's offset
// and mask against a queue built from the symbols sent, records in order,
// nothing lost, and that stalls happened.
module tb_io_buffer;
  localparam int unsigned RW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0;
  logic [7:0] in_sym = '0;
  logic step, first, stall;
  logic [7:0] sym;
  logic [RW-1:0] report;
  logic out_valid, out_ready = 0;
  logic [31:0] out_offset;
  logic [RW-1:0] out_report;
  int checks = 0, failures = 0, stalls = 0, steps = 0;
  typedef struct { int off; int rpt; } rec_t;
  rec_t expq [$];

  io_buffer #(.RPT_W(RW), .IN_DEPTH(4), .OUT_DEPTH(4)) dut (.*);

  always_comb report = (sym % 3 == 0) ? sym : '0;

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // counters of engine activity
  always @(posedge clk) if (rst_n) begin
    if (stall) stalls++;
    if (step)  steps++;
  end

  // host output side
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    rec_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected record off=%0d", out_offset);
    end else begin
      e = expq.pop_front();
      if (out_offset !== 32'(e.off) || out_report !== RW'(e.rpt)) begin
        failures++;
        $display("record mismatch got off=%0d rpt=%h exp off=%0d rpt=%h",
                 out_offset, out_report, e.off, e.rpt);
      end
    end
  end

  initial begin
    int off = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      forever begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) == 0);
      end
    join_none
    for (int i = 0; i < 2000; i++) begin
      bit f;
      logic [7:0] s;
      f = (i % 500 == 0);
      s = 8'($urandom);
      if (f) off = 0;
      if (s % 3 == 0 && s != 0) expq.push_back('{off, s});
      off++;
      @(negedge clk);
      in_valid = 1; in_sym = s; in_first = f;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (300) @(posedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("%0d records missing", expq.size()); end
    if (stalls == 0) begin failures++; $display("output-full stall never happened"); end
    if (steps != 2000) begin failures++; $display("steps %0d != 2000", steps); end
    checks++;
    $display("stalls=%0d steps=%0d", stalls, steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
