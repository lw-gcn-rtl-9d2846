// tb_iram: loads random 512-bit words (eight instructions each) and reads
// every instruction back, checking its position in the word.
module tb_iram;
  import lwgcn_pkg::*;
  localparam int DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] wbase, raddr; logic [WORD_W-1:0] wdata; instr_t rdata;
  logic [63:0] model [DEPTH];
  iram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    wbase = '0; raddr = '0; wdata = '0;
    for (int w = 0; w < DEPTH / 8; w++) begin
      @(negedge clk); we = 1; wbase = w * 8;
      for (int i = 0; i < 16; i++) wdata[i*32 +: 32] = $urandom;
      for (int i = 0; i < 8; i++) model[w*8+i] = wdata[i*64 +: 64];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); re = 1; raddr = i;
      @(negedge clk); re = 0; checks++; if (rdata !== instr_t'(model[i])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
