// local_switch: programmable connection matrix of one CAM array
// (the state-transition phase).
//
// Each destination STE d has a row of NSRC configuration bits. Its enable for
// the next cycle is the OR of all sources whose bit is set:
//     nxt[d] = |(row[d] & src)
// Sources are the active STEs of the CAM array followed by the counter,
// bit-vector and global-switch signals (layout in cama_pkg::sw_src).
// This is a full crossbar; the published design uses a reduced crossbar whose
// structure it takes from earlier work and does not describe, so this is the
// simplest circuit with the same function.
//
// Interface: rows are written 32 bits at a time (wr_en/wr_row/wr_word/wr_data);
// src -> nxt is combinational. Reset clears every connection.
module local_switch #(
  parameter int unsigned NSRC = 289,
  parameter int unsigned NDST = 256,
  parameter int unsigned DW   = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(NDST)-1:0] wr_row,
  input  logic [7:0]              wr_word,
  input  logic [DW-1:0]           wr_data,
  input  logic [NSRC-1:0]         src,
  output logic [NDST-1:0]         nxt
);
  localparam int unsigned NWORDS = (NSRC + DW - 1) / DW;
  localparam int unsigned PADW   = NWORDS * DW;

  logic [PADW-1:0] row [NDST];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NDST; d++) row[d] <= '0;
    end else if (wr_en && 32'(wr_word) < NWORDS) begin
      row[wr_row][wr_word*DW +: DW] <= wr_data;
    end
  end

  logic [PADW-1:0] src_pad;
  assign src_pad = PADW'(src);

  always_comb begin
    for (int d = 0; d < NDST; d++) nxt[d] = |(row[d] & src_pad);
  end
endmodule
