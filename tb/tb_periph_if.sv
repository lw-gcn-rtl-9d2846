// tb_periph_if: register writes and reads, start pulse only when idle.
module tb_periph_if;
  import lwgcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, start, busy = 0, done = 1, err_collision = 0, err_overflow = 1;
  logic [2:0] wr_addr = 0, rd_addr = 0; logic [31:0] wr_data = 0, rd_data, cycles = 32'd1234;
  logic [EXT_AW-1:0] iram_addr; logic [15:0] iram_words;
  periph_if dut (.*);
  always #5 clk = ~clk;
  task automatic wr(input int a, input int d);
    @(negedge clk); wr_en = 1; wr_addr = 3'(a); wr_data = d; @(negedge clk); wr_en = 0;
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wr(1, 32'h123456); wr(2, 7);
    rd_addr = 1; #1; checks++; if (rd_data != 32'h123456 || iram_addr != 24'h123456) failures++;
    rd_addr = 2; #1; checks++; if (rd_data != 7 || iram_words != 7) failures++;
    rd_addr = 3; #1; checks++; if (rd_data != 32'b1010) failures++;
    rd_addr = 4; #1; checks++; if (rd_data != 1234) failures++;
    @(negedge clk); wr_en = 1; wr_addr = 0; wr_data = 1;
    @(posedge clk); #1; wr_en = 0; checks++; if (!start) failures++;
    @(posedge clk); #1; checks++; if (start) failures++;
    busy = 1;
    @(negedge clk); wr_en = 1; wr_addr = 0; wr_data = 1;
    @(posedge clk); #1; wr_en = 0; checks++; if (start) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
