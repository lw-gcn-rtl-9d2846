// tb_pe_output_buffer: random writes and reads against an array model,
// checking the one-cycle read latency and read-old-data on same-address
// read/write.
module tb_pe_output_buffer;
  localparam int ROWS = 40, W = 512;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(ROWS)-1:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [ROWS];
  logic [W-1:0] expq; bit pend = 0;
  pe_output_buffer #(.ROWS(ROWS), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); we = 1; waddr = i; wdata = {16{32'($urandom)}}; model[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== expq) begin failures++; if (failures < 5) $display("read mismatch"); end
      end
      we = $urandom % 2; re = $urandom % 2;
      waddr = $urandom % ROWS; raddr = ($urandom % 3 == 0) ? waddr : $urandom % ROWS;
      for (int k = 0; k < W / 32; k++) wdata[k*32 +: 32] = $urandom;
      pend = re; expq = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
