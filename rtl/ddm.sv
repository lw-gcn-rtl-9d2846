// ddm: multi-bank dense data memory.
//
// Holds one tile (TILE rows of LANES SINT16 values) of the dense right-hand
// matrix. Two mechanisms from the paper give it many read ports:
//   data replication - REPLICAS identical copies, one per PE group;
//   row grouping     - in every copy, row j lives in row-group bank (j mod
//                      GROUPS) at depth (j div GROUPS), so each bank is only
//                      TILE/GROUPS = 16 rows deep (LUT RAM sized).
// Every bank of every replica has its own asynchronous read port (address =
// depth within the bank), i.e. REPLICAS*GROUPS rows can be read per cycle.
// Writes go to all replicas at once. There are two write ports so that one
// 512-bit external word (two rows) is written per cycle; the two rows must lie
// in different banks (consecutive rows always do). Port 1 wins on a conflict.
module ddm
  import lwgcn_pkg::*;
#(
  parameter int unsigned R = REPLICAS,
  parameter int unsigned G = GROUPS,
  parameter int unsigned T = TILE
) (
  input  logic                               clk,
  input  logic [1:0]                         we,
  input  logic [1:0][$clog2(T)-1:0]          wrow,
  input  logic [1:0][ROW_W-1:0]              wdata,
  input  logic [R-1:0][G-1:0][$clog2(T/G)-1:0] raddr,
  output logic [R-1:0][G-1:0][ROW_W-1:0]     rdata
);
  localparam int unsigned D  = T / G;
  localparam int unsigned DA = $clog2(D);
  localparam int unsigned GA = (G > 1) ? $clog2(G) : 1;

  logic [ROW_W-1:0] mem [R][G][D];

  function automatic logic [GA-1:0] grp(input logic [$clog2(T)-1:0] r);
    return GA'(r % G);
  endfunction
  function automatic logic [DA-1:0] dep(input logic [$clog2(T)-1:0] r);
    return DA'(r / G);
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      if (we[p])
        for (int r = 0; r < R; r++)
          mem[r][grp(wrow[p])][dep(wrow[p])] <= wdata[p];
  end

  always_comb
    for (int r = 0; r < R; r++)
      for (int g = 0; g < G; g++)
        rdata[r][g] = mem[r][g][raddr[r][g]];

  // two rows written in the same cycle must use different banks
  always_ff @(posedge clk)
    assert (!(we == 2'b11 && grp(wrow[0]) == grp(wrow[1])))
      else $error("ddm: both write ports hit bank %0d", grp(wrow[0]));
endmodule
