// tb_pe: one PE runs two SDMM tiles (the first starting from the bias, the
// second from the partial rows in its output buffer, with stalls and empty
// rows in the stream) and then a DMM step with streamed edge weights. The
// output buffer is read through the mover port and compared with a reference
// product computed here. Also checks the 2-cycle latency to the buffer write.
module tb_pe;
  import lwgcn_pkg::*;
  import lwgcn_tb_pkg::*;
  localparam int ROWS = 12, NT = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, sparse_flag = 1, binary = 0, bias_flag = 0;
  pcoo_t pkt; logic signed [DW-1:0] edge_weight;
  logic signed [LANES-1:0][ACC_W-1:0] bias;
  logic addr_valid; logic [COL_W-1:0] dense_addr; logic signed [LANES-1:0][DW-1:0] dense_data;
  logic mv_re = 0; logic [$clog2(ROWS)-1:0] mv_addr = 0; logic [LANES*ACC_W-1:0] obuf_rdata;
  logic busy, overflow;
  int W [NT][TILE][LANES];
  int X [ROWS][NT*TILE];
  int L [ROWS][LANES];
  int W2 [LANES][LANES];
  int ref_y [ROWS][LANES];
  int bv [LANES];
  int cur_t = 0;
  pe #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int l = 0; l < LANES; l++)
    dense_data[l] = sparse_flag ? DW'(W[cur_t][dense_addr][l]) : DW'(W2[dense_addr % LANES][l]);

  task automatic send(input logic [15:0] p, input int ew);
    @(negedge clk); in_valid = 1; pkt = pcoo_t'(p); edge_weight = DW'(ew);
  endtask
  task automatic idle(); @(negedge clk); in_valid = 0; endtask

  initial begin
    pkt = '0; edge_weight = '0;
    for (int l = 0; l < LANES; l++) begin bv[l] = int'($urandom % 2001) - 1000; bias[l] = ACC_W'(bv[l]); end
    for (int t = 0; t < NT; t++) for (int j = 0; j < TILE; j++) for (int l = 0; l < LANES; l++)
      W[t][j][l] = int'($urandom % 201) - 100;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < NT * TILE; j++)
      X[i][j] = ($urandom % 100 < 2 && i != 3) ? int'($urandom % 15) - 7 : 0;
    for (int i = 0; i < ROWS; i++) for (int l = 0; l < LANES; l++) L[i][l] = int'($urandom % 401) - 200;
    for (int a = 0; a < LANES; a++) for (int l = 0; l < LANES; l++) W2[a][l] = int'($urandom % 401) - 200;
    for (int i = 0; i < ROWS; i++) for (int l = 0; l < LANES; l++) begin
      ref_y[i][l] = bv[l];
      for (int j = 0; j < NT * TILE; j++) ref_y[i][l] += X[i][j] * W[j / TILE][j % TILE][l];
    end
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- two SDMM tiles ----
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); clear = 1; cur_t = t; bias_flag = (t == 0); @(negedge clk); clear = 0;
      for (int i = 0; i < ROWS; i++) begin
        automatic int nz[$];
        for (int j = t * TILE; j < (t + 1) * TILE; j++) if (X[i][j] != 0) nz.push_back(j);
        if (nz.size() == 0) send(mk_pkt(1, 1, 0, 0, 0), 0);
        foreach (nz[e]) begin
          send(mk_pkt(e == 0, e == nz.size() - 1, 1, nz[e] % TILE, X[i][nz[e]]), 0);
          if ($urandom % 4 == 0) send(16'h0, 0);      // injected stall element
        end
      end
      idle();
      #1; checks++; if (busy !== 1'b1) failures++;                   // last element in the MAC stage
      @(posedge clk); #1; checks++; if (busy !== 1'b0) failures++;   // written and drained
    end
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); mv_re = 1; mv_addr = i; @(negedge clk); mv_re = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (int'($signed(obuf_rdata[l*ACC_W +: ACC_W])) != ref_y[i][l]) begin
          failures++; if (failures < 5) $display("sdmm row %0d lane %0d got %0d exp %0d", i, l, $signed(obuf_rdata[l*ACC_W +: ACC_W]), ref_y[i][l]);
        end
      end
    end
    // ---- DMM: rows share the header, values are edge weights ----
    @(negedge clk); clear = 1; sparse_flag = 0; bias_flag = 1; bias = '0; @(negedge clk); clear = 0;
    for (int i = 0; i < ROWS; i++) for (int c = 0; c < LANES; c++)
      send(mk_pkt(c == 0, c == LANES - 1, 1, c, 0), L[i][c]);
    idle(); repeat (2) @(posedge clk);
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk); mv_re = 1; mv_addr = i; @(negedge clk); mv_re = 0;
      for (int l = 0; l < LANES; l++) begin
        automatic int e = 0;
        for (int c = 0; c < LANES; c++) e += L[i][c] * W2[c][l];
        checks++;
        if (int'($signed(obuf_rdata[l*ACC_W +: ACC_W])) != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
