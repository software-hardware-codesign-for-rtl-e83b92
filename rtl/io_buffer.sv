// io_buffer: input/output buffer of a bank.
//
// Input side: the host pushes symbols (in_valid/in_ready/in_sym, in_first
// marks the first symbol of a new stream) into an input FIFO. The bank
// processes the head symbol in a cycle where step = 1; step is 1 when a
// symbol is waiting and the output FIFO has room for a report, so a full
// output FIFO stalls the engine (no symbol is consumed and no state moves).
// Output side: in every step where any PE reports, a record
// {offset, report mask} is pushed into the output FIFO; the host drains it
// with out_valid/out_ready. offset is the position of the symbol in its
// stream (0 for the symbol marked in_first).
// The published bank names an input/output buffer without details; FIFO
// depths, the record format and the stall rule are this design's own.
module io_buffer
  import cama_pkg::*;
#(
  parameter int unsigned RPT_W     = 128,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 16,
  parameter int unsigned OFF_W     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // host input
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [SYM_W-1:0]  in_sym,
  input  logic              in_first,
  // to the processing arrays
  output logic              step,
  output logic              first,
  output logic [SYM_W-1:0]  sym,
  input  logic [RPT_W-1:0]  report,
  // host output
  output logic              out_valid,
  input  logic              out_ready,
  output logic [OFF_W-1:0]  out_offset,
  output logic [RPT_W-1:0]  out_report,
  output logic              stall
);
  logic             in_full, in_empty, out_full, out_empty;
  logic [SYM_W:0]   head;
  logic [OFF_W-1:0] off_q, off_cur;

  sync_fifo #(.W(SYM_W+1), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n,
    .push   (in_valid),
    .wr_data({in_first, in_sym}),
    .full   (in_full),
    .pop    (step),
    .rd_data(head),
    .empty  (in_empty)
  );

  assign in_ready = ~in_full;
  assign step     = ~in_empty & ~out_full;
  assign stall    = ~in_empty &  out_full;
  assign first    = head[SYM_W];
  assign sym      = head[SYM_W-1:0];
  assign off_cur  = first ? '0 : off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    off_q <= '0;
    else if (step) off_q <= off_cur + 1'b1;
  end

  sync_fifo #(.W(OFF_W+RPT_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .push   (step && |report),
    .wr_data({off_cur, report}),
    .full   (out_full),
    .pop    (out_ready),
    .rd_data({out_offset, out_report}),
    .empty  (out_empty)
  );

  assign out_valid = ~out_empty;

  // a report record is never pushed into a full output FIFO (step guards it)
  assert property (@(posedge clk) !(step && out_full));
endmodule
