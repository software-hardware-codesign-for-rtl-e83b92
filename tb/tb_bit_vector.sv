// tb_bit_vector: random pre/fst sequences against a token-set reference.
// The reference keeps the set of counter values of the repeated state: when
// fst is active every value goes up by one (values above LEN are dropped) and
// value 1 is added if pre was active in the previous step; when fst is
// inactive the set empties. en_out must equal "some value lies in [m,n]",
// with the module programmed lo = m-1, hi = n-1, in the same cycle.
module tb_bit_vector;
  localparam int unsigned LEN = 2000;
  localparam int unsigned IW  = $clog2(LEN);
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_sel = 0;
  logic [IW-1:0] cfg_data = '0;
  logic step = 0, pre = 0, fst = 0;
  logic en_out;
  logic [LEN-1:0] vec;
  int checks = 0, failures = 0;
  bit tok [int];

  bit_vector #(.LEN(LEN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_thr(input int unsigned m, input int unsigned n);
    @(negedge clk); cfg_we = 1; cfg_sel = 0; cfg_data = IW'(m - 1);
    @(negedge clk); cfg_sel = 1; cfg_data = IW'(n - 1);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int unsigned m, input int unsigned n, input int cycles,
                     input int p_pre, input int p_fst);
    bit pre_prev = 0; bit exp_out;
    for (int t = 0; t < cycles; t++) begin
      @(negedge clk);
      step = ($urandom_range(0, 9) != 0);
      pre  = ($urandom_range(0, 99) < p_pre);
      fst  = ($urandom_range(0, 99) < p_fst);
      #1;
      exp_out = 0;
      if (step) begin
        bit nt [int];
        nt.delete();
        if (fst) begin
          foreach (tok[v]) if (v + 1 <= int'(LEN)) nt[v + 1] = 1;
          if (pre_prev) nt[1] = 1;
        end
        tok = nt;
        foreach (tok[v]) if (v >= int'(m) && v <= int'(n)) exp_out = 1;
        pre_prev = pre;
      end
      checks++;
      if (en_out !== exp_out) begin
        failures++; $display("en_out mismatch t=%0d got %b exp %b", t, en_out, exp_out);
      end
    end
    // the stored vector must match the token set after the run
    @(negedge clk); step = 0;
    checks++;
    begin
      bit ok;
      ok = 1;
      for (int i = 0; i < int'(LEN); i++) if (vec[i] !== tok.exists(i + 1)) ok = 0;
      if (!ok) begin failures++; $display("vector contents mismatch"); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    set_thr(3, 6);       run(3, 6, 3000, 30, 85);
    set_thr(1, 1);       run(1, 1, 2000, 50, 60);
    set_thr(1990, 2000); run(1990, 2000, 8000, 30, 99);
    set_thr(10, 40);     run(10, 40, 4000, 20, 95);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
