// tb_mac_array: random element sequences with random SOR / bias_flag; the
// per-lane sums (combinational, same cycle) are compared with a 64-bit model
// truncated to SINT32, covering all three accumulator start sources.
module tb_mac_array;
  import lwgcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid = 0, sor = 0, bias_flag = 0;
  logic signed [DW-1:0] scalar;
  logic signed [LANES-1:0][DW-1:0] dense;
  logic signed [LANES-1:0][ACC_W-1:0] bias, prev, sum;
  int model [LANES];
  int nsrc [3];
  mac_array dut (.*);
  always #5 clk = ~clk;
  initial begin
    scalar = '0; dense = '0; bias = '0; prev = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      valid = 1; sor = (n == 0) || ($urandom % 4 == 0); bias_flag = $urandom % 2;
      scalar = DW'($urandom); 
      for (int l = 0; l < LANES; l++) begin
        dense[l] = DW'($urandom); bias[l] = ACC_W'($urandom); prev[l] = ACC_W'($urandom);
      end
      #1;
      nsrc[!sor ? 0 : (bias_flag ? 1 : 2)]++;
      for (int l = 0; l < LANES; l++) begin
        automatic int start = !sor ? model[l] : (bias_flag ? int'($signed(bias[l])) : int'($signed(prev[l])));
        automatic int expv  = start + int'(scalar) * int'($signed(dense[l]));
        checks++;
        if (int'(sum[l]) != expv) begin
          failures++;
          if (failures < 5) $display("lane %0d sum %0d exp %0d", l, sum[l], expv);
        end
        model[l] = expv;
      end
    end
    for (int s = 0; s < 3; s++) begin checks++; if (nsrc[s] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
