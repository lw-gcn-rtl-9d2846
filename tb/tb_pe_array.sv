// tb_pe_array: a reduced array (8 PEs in 2 groups, 32 row groups) runs a
// two-tile SDMM built by the preprocessing model (round-robin rows, PCOO,
// collision stalling) and then a DMM with a shared header. The dense data
// memory is modelled here from the bank addresses the array drives. Checks:
// every output-buffer row against a reference product, no bank collision,
// that shared reads and stalls occurred, and that a stream of n words keeps
// the array busy for exactly n+1 cycles after its first word (one word per
// cycle, two-stage pipeline).
module tb_pe_array;
  import lwgcn_pkg::*;
  import lwgcn_tb_pkg::*;
  localparam int K = 8, R = 2, G = GROUPS, ROWS = 12, M = 90, NT = 2, F = NT * TILE;
  int checks = 0, failures = 0, nshared = 0, ncoll = 0, stalls = 0, empties = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, sparse_flag = 1, binary = 0, bias_flag = 0;
  logic [K-1:0][PKT_W-1:0] lanes; pcoo_t hdr;
  logic signed [LANES-1:0][ACC_W-1:0] bias;
  logic [R-1:0][G-1:0][$clog2(TILE/G)-1:0] ddm_raddr; logic [R-1:0][G-1:0][ROW_W-1:0] ddm_rdata;
  logic mv_re = 0; logic [$clog2(ROWS)-1:0] mv_addr = 0; logic [K-1:0][LANES*ACC_W-1:0] obuf_rdata;
  logic busy, collision, shared, overflow;
  mat_t X;
  int W [NT*TILE][LANES];
  int ref_y [M][LANES];
  int cur_base = 0;
  pe_array #(.K(K), .R(R), .G(G), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int r = 0; r < R; r++) for (int g = 0; g < G; g++)
    for (int l = 0; l < LANES; l++)
      ddm_rdata[r][g][l*DW +: DW] = DW'(W[cur_base + int'(ddm_raddr[r][g]) * G + g][l]);
  always @(posedge clk) begin nshared += shared; ncoll += collision; end

  task automatic run(ref word_t ws[$]);
    int t0, t1;
    foreach (ws[s]) begin
      @(negedge clk); in_valid = 1; lanes = ws[s][K*PKT_W-1:0];
      if (!sparse_flag) hdr = pcoo_t'(mk_pkt((s % LANES) == 0, (s % LANES) == LANES - 1, 1, s % LANES, 0));
    end
    @(negedge clk); in_valid = 0;
    t0 = $time; while (busy) @(negedge clk); t1 = $time;
    checks++; if ((t1 - t0) / 10 != 1) begin failures++; $display("drain %0d", (t1 - t0) / 10); end
  endtask

  task automatic compare(input int what);
    for (int b = 0; b < ROWS; b++) begin
      @(negedge clk); mv_re = 1; mv_addr = b; @(negedge clk); mv_re = 0;
      for (int p = 0; p < K; p++) if (b * K + p < M)
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'($signed(obuf_rdata[p][l*ACC_W +: ACC_W])) != ref_y[b*K+p][l]) begin
            failures++;
            if (failures < 5) $display("%0d row %0d lane %0d got %0d exp %0d", what, b*K+p, l,
                                       $signed(obuf_rdata[p][l*ACC_W +: ACC_W]), ref_y[b*K+p][l]);
          end
        end
    end
  endtask

  initial begin
    lanes = '0; hdr = '0; bias = '0;
    X = new[M];
    foreach (X[i]) begin
      X[i] = new[F];
      foreach (X[i][j]) X[i][j] = ($urandom % 100 < 3 && i % 11 != 5) ? int'($urandom % 15) - 7 : 0;
    end
    foreach (W[j, l]) W[j][l] = int'($urandom % 201) - 100;
    for (int l = 0; l < LANES; l++) bias[l] = ACC_W'(l * 3 - 20);
    foreach (ref_y[i, l]) begin
      ref_y[i][l] = l * 3 - 20;
      for (int j = 0; j < F; j++) ref_y[i][l] += X[i][j] * W[j][l];
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      automatic word_t ws[$];
      build_sdmm_stream(X, M, t * TILE, TILE, K, R, G, ws, stalls, empties);
      @(negedge clk); clear = 1; cur_base = t * TILE; bias_flag = (t == 0); @(negedge clk); clear = 0;
      run(ws);
    end
    compare(0);
    // DMM: left matrix = ref_y clipped to SINT16, right matrix = W rows 0..15
    begin
      automatic word_t ws[$];
      automatic int Lm [M][LANES];
      foreach (Lm[i, c]) Lm[i][c] = sat16(ref_y[i][c] >>> 4);
      for (int b = 0; b < ROWS; b++) for (int c = 0; c < LANES; c++) begin
        automatic word_t w = '0;
        for (int p = 0; p < K; p++) if (b * K + p < M) w[p*16 +: 16] = 16'(Lm[b*K+p][c]);
        ws.push_back(w);
      end
      foreach (ref_y[i, l]) begin
        ref_y[i][l] = 0;
        for (int c = 0; c < LANES; c++) ref_y[i][l] += Lm[i][c] * W[c][l];
      end
      @(negedge clk); clear = 1; cur_base = 0; sparse_flag = 0; bias_flag = 1; bias = '0;
      @(negedge clk); clear = 0;
      run(ws);
      compare(1);
    end
    checks++; if (ncoll != 0) failures++;
    checks++; if (nshared == 0) failures++;
    checks++; if (stalls == 0 || empties == 0) failures++;
    $display("stalls=%0d empty_rows=%0d shared_cycles=%0d", stalls, empties, nshared);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
