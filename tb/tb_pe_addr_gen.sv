// tb_pe_addr_gen: random accepted elements with random EOR; the row counter
// is compared every cycle with a model, including wrap-around, overflow flag
// and clear.
module tb_pe_addr_gen;
  localparam int ROWS = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, step = 0, eor = 0;
  logic [$clog2(ROWS)-1:0] row; logic overflow;
  int model = 0; bit movf = 0;
  pe_addr_gen #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (int'(row) != model || overflow != movf) begin
        failures++;
        if (failures < 5) $display("row %0d exp %0d ovf %0d exp %0d", row, model, overflow, movf);
      end
      clear = ($urandom % 200) == 0; step = $urandom % 2; eor = $urandom % 2;
      @(posedge clk); #1;
      if (clear) begin model = 0; movf = 0; end
      else if (step && eor) begin
        if (model == ROWS - 1) begin movf = 1; model = 0; end else model++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
