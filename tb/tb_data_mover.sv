// tb_data_mover: output buffers are modelled here with random SINT32 rows.
// MOVE with ReLU and a shift, writing OMMB and EWM, is checked row by row and
// word by word against the quantisation formula (max(0,x) >>> s, saturated
// to SINT16); then COPY_DDM from the modelled OMMB is checked. Also checks
// the max(NUM_PE, LANES)+1 cycles per block of MOVE and that saturation occurred.
module tb_data_mover;
  import lwgcn_pkg::*;
  import lwgcn_tb_pkg::*;
  localparam int K = 8, ROWS = 6, NODES = K * ROWS, N = 43;
  int checks = 0, failures = 0, nsat = 0;
  logic clk = 0, rst_n = 0, start_move = 0, start_copy = 0, relu = 0, to_ewm = 0;
  logic [15:0] count = 0, base = 0; logic [4:0] shift = 0;
  logic busy, done, mv_re, ommb_we, ommb_re, ewm_flush, ewm_we, ddm_we, sat_event;
  logic [$clog2(ROWS)-1:0] mv_addr; logic [K-1:0][LANES*ACC_W-1:0] obuf_rdata;
  logic [$clog2(NODES)-1:0] ommb_waddr, ommb_raddr; logic [ROW_W-1:0] ommb_wdata, ommb_rdata, ddm_wdata;
  logic [K*PKT_W-1:0] ewm_wdata; logic [COL_W-1:0] ddm_wrow;
  int ob [K][ROWS][LANES];
  logic [ROW_W-1:0] om [NODES];
  logic [ROW_W-1:0] dd [TILE];
  logic [K*PKT_W-1:0] ew[$];
  int nflush = 0;
  data_mover #(.K(K), .ROWS(ROWS), .NODES(NODES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (mv_re) for (int p = 0; p < K; p++) for (int l = 0; l < LANES; l++)
      obuf_rdata[p][l*ACC_W +: ACC_W] <= ACC_W'(ob[p][mv_addr][l]);
    if (ommb_we) om[ommb_waddr] <= ommb_wdata;
    if (ommb_re) ommb_rdata <= om[ommb_raddr];
    if (ewm_we) ew.push_back(ewm_wdata);
    if (ewm_flush) nflush++;
    if (ddm_we) dd[ddm_wrow] <= ddm_wdata;
    nsat += sat_event;
  end
  initial begin
    int t0, t1;
    foreach (ob[p, b, l]) ob[p][b][l] = ($urandom % 8 == 0) ? int'($urandom) : int'($urandom % 200001) - 100000;
    foreach (om[i]) om[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start_move = 1; count = N; shift = 3; relu = 1; to_ewm = 1;
    @(negedge clk); start_move = 0; t0 = $time;
    while (!done) @(negedge clk);
    t1 = $time;
    checks++; if ((t1 - t0) / 10 != ((N + K - 1) / K) * (((K > LANES) ? K : LANES) + 1)) begin failures++; $display("move took %0d", (t1-t0)/10); end
    for (int i = 0; i < N; i++) for (int l = 0; l < LANES; l++) begin
      checks++;
      if (int'($signed(om[i][l*DW +: DW])) != quant(ob[i % K][i / K][l], 3, 1)) failures++;
    end
    checks++; if (ew.size() != ((N + K - 1) / K) * LANES || nflush != 1) failures++;
    foreach (ew[s]) for (int p = 0; p < K; p++) begin
      automatic int row = (s / LANES) * K + p;
      automatic int e = (row < N) ? quant(ob[p][s / LANES][s % LANES], 3, 1) : 0;
      checks++; if (int'($signed(ew[s][p*16 +: 16])) != e) failures++;
    end
    checks++; if (nsat == 0) failures++;
    // second MOVE: no ReLU, shift 1, OMMB only (negative values and both saturation limits)
    @(negedge clk); start_move = 1; count = N; shift = 1; relu = 0; to_ewm = 0;
    @(negedge clk); start_move = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < N; i++) for (int l = 0; l < LANES; l++) begin
      checks++;
      if (int'($signed(om[i][l*DW +: DW])) != quant(ob[i % K][i / K][l], 1, 0)) failures++;
    end
    checks++; if (ew.size() != ((N + K - 1) / K) * LANES) failures++;
    // copy OMMB rows 5..5+29 into DDM rows 0..29
    @(negedge clk); start_copy = 1; count = 30; base = 5;
    @(negedge clk); start_copy = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < 30; i++) begin checks++; if (dd[i] !== om[5 + i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
