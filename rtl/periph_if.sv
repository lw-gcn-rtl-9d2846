// periph_if: peripheral (host) register interface.
//
// A small register file on a 32-bit write/read bus:
//   0x0 CTRL     write bit 0 = 1: start (one-cycle pulse to the top control)
//   0x1 IRAM_LO  external word address of the instruction list
//   0x2 IRAM_LEN number of 512-bit instruction words
//   0x3 STATUS   read: {28'b0, err_overflow, err_collision, done, busy}
//   0x4 CYCLES   read: busy cycles of the last run
// Writes take effect at the clock edge; reads are combinational.
// The external address is 24 bits, so bits 31:24 of a write are ignored.
// The paper only names this interface; the register map is this design's.
module periph_if
  import lwgcn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [2:0]          wr_addr,
  input  logic [31:0]         wr_data,
  input  logic [2:0]          rd_addr,
  output logic [31:0]         rd_data,
  output logic                start,
  output logic [EXT_AW-1:0]   iram_addr,
  output logic [15:0]         iram_words,
  input  logic                busy,
  input  logic                done,
  input  logic                err_collision,
  input  logic                err_overflow,
  input  logic [31:0]         cycles
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; iram_addr <= '0; iram_words <= '0;
    end else begin
      start <= 1'b0;
      if (wr_en)
        unique case (wr_addr)
          3'd0: start      <= wr_data[0] && !busy;
          3'd1: iram_addr  <= wr_data[EXT_AW-1:0];
          3'd2: iram_words <= wr_data[15:0];
          default: ;
        endcase
    end
  end

  always_comb
    unique case (rd_addr)
      3'd1:    rd_data = 32'(iram_addr);
      3'd2:    rd_data = 32'(iram_words);
      3'd3:    rd_data = {28'b0, err_overflow, err_collision, done, busy};
      3'd4:    rd_data = cycles;
      default: rd_data = '0;
    endcase
endmodule
