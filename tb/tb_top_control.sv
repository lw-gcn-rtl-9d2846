// tb_top_control: the top control runs a short program against models of the
// IRAM, DMA engine, EWM and data mover. Checks the boot DMA, that every
// instruction starts the right unit with the right fields in program order,
// that a COMPUTE issues exactly `count` EWM reads only while the EWM is not
// empty, the mode flags, the DMM header index wrapping at `aux`, the bias
// register load and the final done.
module tb_top_control;
  import lwgcn_pkg::*;
  localparam int K = 32, IDEP = 32, HDEP = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0; logic [EXT_AW-1:0] iram_addr = 24'h40; logic [15:0] iram_words = 2;
  logic busy, done; logic [31:0] cycles;
  logic iram_re; logic [$clog2(IDEP)-1:0] iram_raddr; instr_t instr;
  logic dma_start; dma_kind_e dma_kind; logic [EXT_AW-1:0] dma_addr; logic [15:0] dma_count;
  logic dma_busy = 0, dma_done = 0, bias_we = 0; logic [K*PKT_W-1:0] bias_wdata = '0;
  logic ewm_flush, ewm_rd_en, ewm_empty; logic [$clog2(HDEP)-1:0] hdr_raddr;
  logic pe_clear, pe_valid, sparse_flag, bias_flag, binary; logic signed [LANES-1:0][ACC_W-1:0] bias;
  logic pe_busy = 0, collision = 0, overflow = 0, err_collision, err_overflow;
  logic mv_start_move, mv_start_copy, mv_relu, mv_to_ewm, mv_done = 0;
  logic [15:0] mv_count, mv_base; logic [4:0] mv_shift;
  top_control #(.K(K), .IDEP(IDEP), .HDEP(HDEP)) dut (.*);
  always #5 clk = ~clk;

  instr_t prog [8];
  string log_q[$];
  int ewm_lvl = 0, reads = 0, hdr_bad = 0, hdr_seen = 0, exp_hdr = 0;
  int dma_left = 0, mv_left = 0;
  always @(posedge clk) begin
    if (iram_re) instr <= prog[iram_raddr];
    dma_done <= 0; mv_done <= 0;
    if (dma_start) begin
      log_q.push_back($sformatf("dma %0d %0h %0d", dma_kind, dma_addr, dma_count));
      dma_busy <= 1; dma_left = 3 + dma_count;
      if (dma_kind == DMA_BIAS) begin bias_we <= 1; bias_wdata <= {16{32'h11}}; end
    end else bias_we <= 0;
    if (dma_busy) begin
      dma_left--;
      if (dma_left == 0) begin dma_busy <= 0; dma_done <= 1; end
    end
    if (mv_start_move) log_q.push_back($sformatf("move %0d %0d %0d %0d", mv_count, mv_shift, mv_relu, mv_to_ewm));
    if (mv_start_copy) log_q.push_back($sformatf("copy %0d %0d", mv_count, mv_base));
    if (mv_start_move | mv_start_copy) mv_left = 4;
    else if (mv_left > 0) begin mv_left--; if (mv_left == 0) mv_done <= 1; end
    if (pe_clear) begin log_q.push_back($sformatf("compute sp=%0d bi=%0d bn=%0d", prog[iram_raddr].sparse, prog[iram_raddr].bias, prog[iram_raddr].binary)); exp_hdr = 0; end
    if (ewm_rd_en) begin
      reads++;
      if (ewm_empty) hdr_bad++;
      if (!sparse_flag) begin hdr_seen++; if (int'(hdr_raddr) != exp_hdr) hdr_bad++; exp_hdr = (exp_hdr + 1) % 5; end
    end
    ewm_lvl = ewm_lvl + (($urandom % 3 == 0) ? 1 : 0) - (ewm_rd_en ? 1 : 0);
  end
  assign ewm_empty = (ewm_lvl == 0);

  function automatic instr_t mk(opcode_e op, bit sp, bit bi, bit bn, bit fl, int a, int c, int x);
    instr_t i; i.op = op; i.sparse = sp; i.bias = bi; i.binary = bn; i.flag = fl;
    i.addr = EXT_AW'(a); i.count = 16'(c); i.aux = 16'(x); return i;
  endfunction

  initial begin
    string expq[$];
    prog[0] = mk(OP_LOAD_BIAS, 0, 0, 0, 0, 'h91, 1, 0);
    prog[1] = mk(OP_LOAD_DDM,  0, 0, 0, 0, 'h100, 6, 0);
    prog[2] = mk(OP_COMPUTE,   1, 1, 0, 1, 'h1000, 9, 0);
    prog[3] = mk(OP_MOVE,      0, 0, 0, 1, 0, 40, 32 + 3);
    prog[4] = mk(OP_COPY_DDM,  0, 0, 0, 0, 0, 12, 7);
    prog[5] = mk(OP_COMPUTE,   0, 0, 1, 0, 0, 12, 5);
    prog[6] = mk(OP_STORE,     0, 0, 0, 0, 'h200, 3, 0);
    prog[7] = mk(OP_END,       0, 0, 0, 0, 0, 0, 0);
    expq = '{"dma 0 40 2", "dma 3 91 1", "dma 1 100 6", "dma 4 1000 9", "compute sp=1 bi=1 bn=0",
             "move 40 3 1 1", "copy 12 7", "compute sp=0 bi=0 bn=1", "dma 5 200 3"};
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++; if (log_q.size() != expq.size()) failures++;
    foreach (expq[i]) begin
      checks++;
      if (i >= log_q.size() || log_q[i] != expq[i]) begin
        failures++; if (i < log_q.size()) $display("step %0d: got '%s' expected '%s'", i, log_q[i], expq[i]);
      end
    end
    checks++; if (reads != 21) begin failures++; $display("reads %0d", reads); end
    checks++; if (hdr_bad != 0 || hdr_seen != 12) failures++;
    checks++; if (bias[3] != 32'h11) failures++;
    checks++; if (busy || cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
