// tb_lwgcn_top: end-to-end test of the accelerator at its default size.
//
// A two-layer GCN, out = A (ReLU(A (X W1) + b1) W2) + b2, runs on a random
// graph of N nodes with F sparse SINT4 input features, hidden size 16 and 7
// classes. The host side is modelled here: it builds the PCOO streams (round
// robin, empty rows, collision stalling), the instruction list and the memory
// image, starts the accelerator through the register bus and waits for done.
// External memory is a model with random grants and random read latency.
// The stored output is compared with a reference computed here with the same
// integer semantics (SINT32 accumulation, shift/ReLU/saturate to SINT16).
// It also counts that every mechanism occurred: SDMM and DMM steps, binary
// adjacency, bias start, accumulation across tiles, empty-row elements,
// collision stalls, shared bank reads, EWM empty stalls, several aggregation
// tiles (DDM copies from OMMB), ReLU clipping and the move into the EWM;
// and that the PE array consumed each stream word in exactly one cycle.
module tb_lwgcn_top;
  import lwgcn_pkg::*;
  import lwgcn_tb_pkg::*;
  localparam int K = NUM_PE, R = REPLICAS, G = GROUPS;
  localparam int N = 600, F = 700, HID = 16, CLS = 7;
  localparam int S1 = 2, S2 = 3, S3 = 4, S4 = 2;
  localparam int OUT = 32'h100000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic host_wr_en = 0; logic [2:0] host_wr_addr = 0, host_rd_addr = 0;
  logic [31:0] host_wr_data = 0, host_rd_data; logic irq_done;
  logic mem_rd_req, mem_rd_gnt = 0, mem_rd_valid = 0, mem_wr_req, mem_wr_gnt = 0;
  logic [EXT_AW-1:0] mem_rd_addr, mem_wr_addr; logic [K*PKT_W-1:0] mem_rd_data, mem_wr_data;

  lwgcn_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- external memory model ----------------
  logic [K*PKT_W-1:0] ext [int];
  int lat_q[$]; logic [K*PKT_W-1:0] dat_q[$];
  always @(posedge clk) begin
    mem_rd_valid <= 0;
    if (mem_rd_req && mem_rd_gnt) begin
      lat_q.push_back(3 + $urandom % 6);
      dat_q.push_back(ext.exists(int'(mem_rd_addr)) ? ext[int'(mem_rd_addr)] : '0);
    end
    foreach (lat_q[i]) lat_q[i]--;
    if (lat_q.size() > 0 && lat_q[0] <= 0) begin
      void'(lat_q.pop_front()); mem_rd_valid <= 1; mem_rd_data <= dat_q.pop_front();
    end
    if (mem_wr_req && mem_wr_gnt) ext[int'(mem_wr_addr)] = mem_wr_data;
    mem_rd_gnt <= ($urandom % 8) != 0;
    mem_wr_gnt <= ($urandom % 2) != 0;
  end

  // ---------------- mechanism counters ----------------
  int n_sdmm = 0, n_dmm = 0, n_binary = 0, n_bias_start = 0, n_tile_acc = 0, n_shared = 0;
  int n_ewm_wait = 0, n_copy = 0, n_mv_ewm = 0, n_collision = 0, n_words = 0, n_relu = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.pe_clear) begin
      if (dut.u_ctrl.cur.sparse) n_sdmm++; else n_dmm++;
      if (dut.u_ctrl.cur.binary) n_binary++;
    end
    if (dut.pe_valid) n_words++;
    if (dut.u_array.g_pe[0].u_pe.m_valid && dut.u_array.g_pe[0].u_pe.m_sor) begin
      if (dut.u_array.g_pe[0].u_pe.m_bias) n_bias_start++; else n_tile_acc++;
    end
    if (dut.shared) n_shared++;
    if (dut.collision) n_collision++;
    if (dut.u_ctrl.computing && dut.u_ctrl.remaining != 0 && dut.ewm_empty) n_ewm_wait++;
    if (dut.mv_ddm_we) n_copy++;
    if (dut.mv_ewm_we) n_mv_ewm++;
    if (dut.u_mover.state == 2 && dut.u_mover.rl && dut.u_mover.c < K &&
        $signed(dut.obuf_rdata[dut.u_mover.c[$clog2(K)-1:0]][ACC_W-1:0]) < 0) n_relu++;
  end

  // ---------------- host data ----------------
  mat_t X0, A;
  int W1 [F][HID];
  int W2 [HID][HID];
  int b1 [HID], b2 [HID];
  int ref_out [N][HID];
  logic [63:0] prog[$];
  int ext_ptr = 32'h1000;
  int total_words = 0, stalls = 0, empties = 0;

  function automatic logic [63:0] ins(opcode_e op, bit sp, bit bi, bit bn, bit fl,
                                      int addr, int cnt, int aux);
    instr_t i;
    i.op = op; i.sparse = sp; i.bias = bi; i.binary = bn; i.flag = fl;
    i.addr = EXT_AW'(addr); i.count = 16'(cnt); i.aux = 16'(aux);
    return 64'(i);
  endfunction

  // dense rows -> external words, two rows per word
  function automatic void put_rows(int base, int rows [][HID], int r0, int n);
    for (int w = 0; w < (n + 1) / 2; w++) begin
      automatic logic [K*PKT_W-1:0] v = '0;
      for (int h = 0; h < 2; h++) if (2 * w + h < n)
        for (int l = 0; l < HID; l++) v[h*ROW_W + l*DW +: DW] = DW'(rows[r0 + 2*w + h][l]);
      ext[base + w] = v;
    end
  endfunction

  function automatic void put_vec(int base, int v [HID]);
    logic [K*PKT_W-1:0] x = '0;
    for (int l = 0; l < HID; l++) x[l*ACC_W +: ACC_W] = ACC_W'(v[l]);
    ext[base] = x;
  endfunction

  // SDMM over all column tiles of M (m rows, ncols columns); DDM source:
  // W rows from external memory (wbase) or OMMB copies (from_ommb)
  function automatic void sdmm_step(mat_t M, int m, int ncols, bit bin, bit from_ommb, int wbase);
    for (int t = 0; t * TILE < ncols; t++) begin
      automatic word_t ws[$];
      int tw = (ncols - t * TILE < TILE) ? ncols - t * TILE : TILE;
      build_sdmm_stream(M, m, t * TILE, tw, K, R, G, ws, stalls, empties);
      if (from_ommb) prog.push_back(ins(OP_COPY_DDM, 0, 0, 0, 0, 0, tw, t * TILE));
      else           prog.push_back(ins(OP_LOAD_DDM, 0, 0, 0, 0, wbase + t * (TILE / 2), (tw + 1) / 2, 0));
      foreach (ws[s]) ext[ext_ptr + s] = ws[s][K*PKT_W-1:0];
      prog.push_back(ins(OP_COMPUTE, 1, t == 0, bin, 1, ext_ptr, ws.size(), 0));
      ext_ptr += ws.size(); total_words += ws.size();
    end
  endfunction

  initial begin
    int zero [HID];
    int w1r [][HID];
    int w2r [][HID];
    int y [N][HID];
    int q [N][HID];
    // ---- random problem ----
    X0 = new[N]; A = new[N];
    foreach (X0[i]) begin
      X0[i] = new[F];
      foreach (X0[i][j]) X0[i][j] = ($urandom % 1000 < 15 && i % 37 != 4) ? int'($urandom % 15) - 7 : 0;
    end
    foreach (A[i]) begin
      A[i] = new[N];
      foreach (A[i][j]) A[i][j] = (i == j || $urandom % 1000 < 8) ? 1 : 0;
    end
    w1r = new[F]; w2r = new[HID];
    foreach (W1[j, l]) begin W1[j][l] = int'($urandom % 15) - 7; w1r[j][l] = W1[j][l]; end
    foreach (W2[c, l]) begin W2[c][l] = (l < CLS) ? int'($urandom % 31) - 15 : 0; w2r[c][l] = W2[c][l]; end
    foreach (b1[l]) begin b1[l] = int'($urandom % 201) - 100; b2[l] = (l < CLS) ? int'($urandom % 201) - 100 : 0; zero[l] = 0; end
    // ---- reference ----
    foreach (y[i, l]) begin y[i][l] = 0; for (int j = 0; j < F; j++) if (X0[i][j] != 0) y[i][l] += X0[i][j] * W1[j][l]; end
    foreach (q[i, l]) q[i][l] = quant(y[i][l], S1, 0);
    foreach (y[i, l]) begin y[i][l] = b1[l]; for (int j = 0; j < N; j++) if (A[i][j] != 0) y[i][l] += q[j][l]; end
    foreach (q[i, l]) q[i][l] = quant(y[i][l], S2, 1);                       // X1
    foreach (y[i, l]) begin y[i][l] = 0; for (int c = 0; c < HID; c++) y[i][l] += q[i][c] * W2[c][l]; end
    foreach (q[i, l]) q[i][l] = quant(y[i][l], S3, 0);
    foreach (y[i, l]) begin y[i][l] = b2[l]; for (int j = 0; j < N; j++) if (A[i][j] != 0) y[i][l] += q[j][l]; end
    foreach (ref_out[i, l]) ref_out[i][l] = quant(y[i][l], S4, 0);
    // ---- memory image and program ----
    put_rows(32'h100, w1r, 0, F);
    put_rows(32'h800, w2r, 0, HID);
    begin
      automatic logic [K*PKT_W-1:0] h = '0;
      for (int c = 0; c < HID; c++) h[c*16 +: 16] = mk_pkt(c == 0, c == HID - 1, 1, c, 0);
      ext[32'h900] = h;
    end
    put_vec(32'h910, zero); put_vec(32'h911, b1); put_vec(32'h912, b2);
    // layer 1: combination (SDMM), aggregation (SDMM, binary)
    prog.push_back(ins(OP_LOAD_BIAS, 0, 0, 0, 0, 32'h910, 1, 0));
    sdmm_step(X0, N, F, 0, 0, 32'h100);
    prog.push_back(ins(OP_MOVE, 0, 0, 0, 0, 0, N, S1));
    prog.push_back(ins(OP_LOAD_BIAS, 0, 0, 0, 0, 32'h911, 1, 0));
    sdmm_step(A, N, N, 1, 1, 0);
    prog.push_back(ins(OP_MOVE, 0, 0, 0, 1, 0, N, 32 + S2));           // ReLU, to EWM
    // layer 2: combination (DMM with shared header), aggregation
    prog.push_back(ins(OP_LOAD_HDR, 0, 0, 0, 0, 32'h900, 1, 0));
    prog.push_back(ins(OP_LOAD_DDM, 0, 0, 0, 0, 32'h800, HID / 2, 0));
    prog.push_back(ins(OP_LOAD_BIAS, 0, 0, 0, 0, 32'h910, 1, 0));
    prog.push_back(ins(OP_COMPUTE, 0, 1, 0, 0, 0, ((N + K - 1) / K) * HID, HID));
    total_words += ((N + K - 1) / K) * HID;
    prog.push_back(ins(OP_MOVE, 0, 0, 0, 0, 0, N, S3));
    prog.push_back(ins(OP_LOAD_BIAS, 0, 0, 0, 0, 32'h912, 1, 0));
    sdmm_step(A, N, N, 1, 1, 0);
    prog.push_back(ins(OP_MOVE, 0, 0, 0, 0, 0, N, S4));
    prog.push_back(ins(OP_STORE, 0, 0, 0, 0, OUT, N, 0));
    prog.push_back(ins(OP_END, 0, 0, 0, 0, 0, 0, 0));
    for (int w = 0; w < (prog.size() + 7) / 8; w++) begin
      automatic logic [K*PKT_W-1:0] v = '0;
      for (int i = 0; i < 8; i++) if (w * 8 + i < prog.size()) v[i*64 +: 64] = prog[w*8+i];
      ext[w] = v;
    end
    $display("program %0d instructions, %0d stream words, %0d stalls, %0d empty rows",
             prog.size(), total_words, stalls, empties);
    // ---- run ----
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); host_wr_en = 1; host_wr_addr = 1; host_wr_data = 0;
    @(negedge clk); host_wr_addr = 2; host_wr_data = (prog.size() + 7) / 8;
    @(negedge clk); host_wr_addr = 0; host_wr_data = 1;
    @(negedge clk); host_wr_en = 0;
    host_rd_addr = 3;
    @(negedge clk);
    while (!host_rd_data[1]) @(negedge clk);
    checks++; if (host_rd_data[3:2] != 0) begin failures++; $display("error flags %b", host_rd_data[3:2]); end
    host_rd_addr = 4; #1;
    $display("accelerator cycles: %0d", host_rd_data);
    // ---- compare ----
    for (int i = 0; i < N; i++) for (int l = 0; l < HID; l++) begin
      automatic logic [K*PKT_W-1:0] w = ext[OUT + i / 2];
      checks++;
      if (int'($signed(w[(i % 2) * ROW_W + l * DW +: DW])) != ref_out[i][l]) begin
        failures++;
        if (failures < 6) $display("out[%0d][%0d] = %0d, expected %0d", i, l,
                                   $signed(w[(i % 2) * ROW_W + l * DW +: DW]), ref_out[i][l]);
      end
    end
    checks++; if (n_words != total_words) begin failures++; $display("words %0d exp %0d", n_words, total_words); end
    $display("mechanisms: sdmm=%0d dmm=%0d binary=%0d bias_start=%0d tile_acc=%0d stalls=%0d empty_rows=%0d shared=%0d ewm_wait=%0d ddm_copies=%0d ewm_moves=%0d relu=%0d collisions=%0d",
             n_sdmm, n_dmm, n_binary, n_bias_start, n_tile_acc, stalls, empties, n_shared, n_ewm_wait, n_copy, n_mv_ewm, n_relu, n_collision);
    checks += 12;
    if (n_sdmm == 0) failures++;       if (n_dmm == 0) failures++;
    if (n_binary == 0) failures++;     if (n_bias_start == 0) failures++;
    if (n_tile_acc == 0) failures++;   if (stalls == 0) failures++;
    if (empties == 0) failures++;      if (n_shared == 0) failures++;
    if (n_ewm_wait == 0) failures++;   if (n_copy <= TILE) failures++;
    if (n_mv_ewm == 0) failures++;     if (n_relu == 0) failures++;
    checks++; if (n_collision != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
