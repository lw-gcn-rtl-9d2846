// pe_output_buffer: the output buffer of one PE.
//
// One entry per local row (global row / NUM_PE) holding LANES SINT32 partial
// sums. The PE writes a row when its EOR element leaves the MAC stage and,
// at the start of the same row in the next tile, reads it back as the
// accumulator start value. Between steps the data mover reads it out.
// Simple dual-port RAM: one write port, one read port with a registered
// (one-cycle) read, as a block RAM offers. A read of the address being
// written returns the old contents.
module pe_output_buffer
  import lwgcn_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_PER_PE,
  parameter int unsigned W    = LANES * ACC_W
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [W-1:0]            wdata,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [W-1:0]            rdata
);
  logic [W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
