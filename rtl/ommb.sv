// ommb: output matrix memory backup.
//
// Holds the quantized (SINT16) output matrix of the last aggregation or
// combination step, one row of LANES values per graph node. It is written by
// the data mover, read back by the data mover to copy a tile into the DDM
// (after a combination) and by the external memory interface to store
// results. One write and one read port, read latency one cycle (block RAM).
module ommb
  import lwgcn_pkg::*;
#(
  parameter int unsigned ROWS = MAX_NODES
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [ROW_W-1:0]        wdata,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [ROW_W-1:0]        rdata
);
  logic [ROW_W-1:0] mem [ROWS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
