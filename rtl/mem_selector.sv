// mem_selector: memory selector and data distributor of one PE group.
//
// Each PE of the group presents the column (dense row) it needs. The row lives
// in bank (col mod G) at depth (col div G) of the group's DDM replica. For
// every bank a priority decoder picks the lowest-numbered requesting PE and
// drives that PE's depth as the bank's read address; any other PE asking for
// the same row shares the read. The distributor then returns to every PE the
// output of the bank its column maps to. Two PEs asking for different depths
// of one bank collide: the lower-numbered PE is served, the other gets a wrong
// row and `collision` is raised. The preprocessor's collision stalling
// prevents this, so the testbench/top treat it as an error flag.
// Purely combinational.
module mem_selector
  import lwgcn_pkg::*;
#(
  parameter int unsigned P = NUM_PE / REPLICAS, // PEs in the group
  parameter int unsigned G = GROUPS,
  parameter int unsigned T = TILE
) (
  input  logic [P-1:0]                     req,
  input  logic [P-1:0][$clog2(T)-1:0]      col,
  output logic [G-1:0][$clog2(T/G)-1:0]    bank_addr,
  input  logic [G-1:0][ROW_W-1:0]          bank_data,
  output logic [P-1:0][ROW_W-1:0]          pe_data,
  output logic                             collision,
  output logic                             shared      // some read served >1 PE
);
  localparam int unsigned DA = $clog2(T / G);
  localparam int unsigned BA = $clog2(G);

  // bank and depth of every PE's row (G and T/G are powers of two)
  logic [P-1:0][BA-1:0] bank;
  logic [P-1:0][DA-1:0] depth;
  always_comb
    for (int p = 0; p < P; p++) begin
      bank[p]  = BA'(32'(col[p]) % G);
      depth[p] = DA'(32'(col[p]) / G);
    end

  always_comb begin
    logic [G-1:0] taken;
    taken     = '0;
    bank_addr = '0;
    collision = 1'b0;
    shared    = 1'b0;
    for (int p = 0; p < P; p++) begin
      if (req[p]) begin
        if (!taken[bank[p]]) begin
          taken[bank[p]]     = 1'b1;
          bank_addr[bank[p]] = depth[p];
        end else if (bank_addr[bank[p]] != depth[p]) begin
          collision = 1'b1;
        end else begin
          shared = 1'b1;
        end
      end
    end
    for (int p = 0; p < P; p++)
      pe_data[p] = bank_data[bank[p]];
  end
endmodule
