// global_switch: programmable interconnect between the PEs of one array.
//
// Each of the NPE PEs drives NGP global output ports and receives NGP global
// input ports. Every destination port d (d = pe*NGP + j) has a row of
// NPE*NGP configuration bits; it is driven by the OR of the source ports
// whose bit is set:  gin[d] = |(row[d] & gout).  The path is combinational, so
// a transition that crosses PEs takes effect for the next symbol like one
// inside a PE. The published architecture names the global switch but not its
// structure or port count; the full crossbar and NGP = 16 are this design's
// choices.
//
// Interface: rows are written 32 bits at a time; reset clears all connections.
module global_switch #(
  parameter int unsigned NPE = 8,
  parameter int unsigned NGP = 16,
  parameter int unsigned DW  = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(NPE*NGP)-1:0]  wr_row,
  input  logic [7:0]                  wr_word,
  input  logic [DW-1:0]               wr_data,
  input  logic [NPE*NGP-1:0]          gout,
  output logic [NPE*NGP-1:0]          gin
);
  localparam int unsigned N      = NPE * NGP;
  localparam int unsigned NWORDS = (N + DW - 1) / DW;
  localparam int unsigned PADW   = NWORDS * DW;

  logic [PADW-1:0] row [N];
  logic [PADW-1:0] src_pad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < N; d++) row[d] <= '0;
    end else if (wr_en && 32'(wr_word) < NWORDS) begin
      row[wr_row][wr_word*DW +: DW] <= wr_data;
    end
  end

  assign src_pad = PADW'(gout);

  always_comb begin
    for (int d = 0; d < N; d++) gin[d] = |(row[d] & src_pad);
  end
endmodule
