// tb_ddm: fills a tile through both write ports (two rows per cycle), then
// reads random depths from every bank of every replica and compares with
// row = depth * G + bank of a model; overwrites single rows and rereads.
module tb_ddm;
  import lwgcn_pkg::*;
  localparam int R = REPLICAS, G = GROUPS, T = TILE, D = T / G;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [1:0] we = 0; logic [1:0][$clog2(T)-1:0] wrow; logic [1:0][ROW_W-1:0] wdata;
  logic [R-1:0][G-1:0][$clog2(D)-1:0] raddr; logic [R-1:0][G-1:0][ROW_W-1:0] rdata;
  logic [ROW_W-1:0] model [T];
  ddm dut (.*);
  always #5 clk = ~clk;
  function automatic logic [ROW_W-1:0] rnd();
    logic [ROW_W-1:0] v; for (int k = 0; k < ROW_W / 32; k++) v[k*32 +: 32] = $urandom; return v;
  endfunction
  task automatic check_all();
    for (int n = 0; n < 20; n++) begin
      for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) raddr[r][g] = $urandom % D;
      #1;
      for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) begin
        checks++;
        if (rdata[r][g] !== model[int'(raddr[r][g]) * G + g]) failures++;
      end
    end
  endtask
  initial begin
    wrow = '0; wdata = '0; raddr = '0;
    for (int i = 0; i < T; i += 2) begin
      @(negedge clk); we = 2'b11; wrow[0] = i; wrow[1] = i + 1;
      wdata[0] = rnd(); wdata[1] = rnd(); model[i] = wdata[0]; model[i+1] = wdata[1];
    end
    @(negedge clk); we = 0;
    check_all();
    for (int n = 0; n < 50; n++) begin
      @(negedge clk); we = 2'b01; wrow[0] = $urandom % T; wdata[0] = rnd(); model[wrow[0]] = wdata[0];
    end
    @(negedge clk); we = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
