// tb_ommb: writes every row, then random reads and rewrites checked against
// a model with one-cycle read latency.
module tb_ommb;
  import lwgcn_pkg::*;
  localparam int ROWS = 100;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(ROWS)-1:0] waddr, raddr; logic [ROW_W-1:0] wdata, rdata;
  logic [ROW_W-1:0] model [ROWS]; logic [ROW_W-1:0] expd; bit pend = 0;
  ommb #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); we = 1; waddr = i; wdata = {8{32'($urandom)}}; model[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (pend) begin checks++; if (rdata !== expd) failures++; end
      we = $urandom % 2; re = $urandom % 2; waddr = $urandom % ROWS; raddr = $urandom % ROWS;
      wdata = {8{32'($urandom)}}; pend = re; expd = model[raddr];
      @(posedge clk); #1; if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
