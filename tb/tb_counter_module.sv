// tb_counter_module: random pre/fst/lst sequences against an iteration-count
// reference. The reference counts iterations k of r{m,n} (k = 1 when fst
// follows pre, k+1 on each later fst) and expects, whenever lst is active,
// en_out = (m <= k <= n) and en_fst = (k <= n). The module is programmed with
// lo = m-1 and hi = n-1. Outputs are checked in the same cycle as lst.
module tb_counter_module;
  localparam int unsigned W = 17;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_sel = 0;
  logic [W-1:0] cfg_data = '0;
  logic step = 0, pre = 0, fst = 0, lst = 0;
  logic en_fst, en_out;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  counter_module #(.CNT_W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_thr(input int unsigned m, input int unsigned n);
    @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_data = W'(m - 1);
    @(negedge clk); cfg_sel = 1; cfg_data = W'(n - 1);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int unsigned m, input int unsigned n, input int cycles,
                     input int p_pre, input int p_fst);
    int k = 0; bit pre_prev = 0;
    for (int t = 0; t < cycles; t++) begin
      @(negedge clk);
      step = ($urandom_range(0, 9) != 0);
      pre  = ($urandom_range(0, 99) < p_pre);
      fst  = ($urandom_range(0, 99) < p_fst);
      lst  = ($urandom_range(0, 1) == 1);
      #1;
      if (step) begin
        if (fst) k = pre_prev ? 1 : k + 1;
        if (lst) begin
          checks += 2;
          if (en_out !== (k >= int'(m) && k <= int'(n))) begin
            failures++; $display("en_out mismatch t=%0d k=%0d got %b", t, k, en_out);
          end
          if (en_fst !== (k <= int'(n))) begin
            failures++; $display("en_fst mismatch t=%0d k=%0d got %b", t, k, en_fst);
          end
        end else begin
          checks++;
          if (en_out || en_fst) begin failures++; $display("output without lst t=%0d", t); end
        end
        pre_prev = pre;
      end else begin
        checks++;
        if (en_out || en_fst) begin failures++; $display("output without step t=%0d", t); end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    set_thr(2, 4);   run(2, 4, 4000, 10, 40);
    set_thr(1, 3);   run(1, 3, 4000, 20, 60);
    set_thr(5, 5);   run(5, 5, 4000, 5, 70);
    set_thr(30, 60); run(30, 60, 20000, 1, 90);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
