// iram: instruction RAM.
//
// Holds the instruction list produced by the host preprocessor. It is filled
// from external memory (eight 64-bit instructions per 512-bit word; instruction
// i of a word sits at bits 64*i+63:64*i) and read by the top control, one
// instruction per read, with one cycle of latency.
module iram
  import lwgcn_pkg::*;
#(
  parameter int unsigned DEPTH = IRAM_DEPTH,
  parameter int unsigned WW    = WORD_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] wbase,   // index of the word's first instruction
  input  logic [WW-1:0]            wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  localparam int unsigned PER = WW / 64;
  localparam int unsigned IA  = $clog2(DEPTH);
  logic [63:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we)
      for (int i = 0; i < PER; i++)
        if (int'(wbase) + i < DEPTH) mem[IA'(int'(wbase) + i)] <= wdata[64*i +: 64];
    if (re) rdata <= instr_t'(mem[raddr]);
  end
endmodule
