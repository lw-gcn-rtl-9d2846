// tb_ext_mem_if: an external memory model with random grant and random
// in-order read latency. Checks that each load kind delivers the right words
// to the right destination strobes and row/base indices, that the EWM stream
// never overfills a slowly drained buffer (credit flow), and that STORE packs
// two OMMB rows per word at consecutive addresses.
module tb_ext_mem_if;
  import lwgcn_pkg::*;
  localparam int K = 32, EDEP = 6, NODES = 64;
  int checks = 0, failures = 0, maxlvl = 0, nbp = 0;
  logic clk = 0, rst_n = 0, start = 0; dma_kind_e kind; logic [EXT_AW-1:0] addr; logic [15:0] count;
  logic busy, done, mem_rd_req, mem_rd_gnt, mem_rd_valid, mem_wr_req, mem_wr_gnt;
  logic [EXT_AW-1:0] mem_rd_addr, mem_wr_addr; logic [K*PKT_W-1:0] mem_rd_data, mem_wr_data, wdata;
  logic iram_we, hdr_we, bias_we, ewm_we, ommb_re; logic [15:0] iram_wbase, hdr_wbase;
  logic [1:0] ddm_we; logic [1:0][COL_W-1:0] ddm_wrow;
  logic [$clog2(EDEP+1)-1:0] ewm_count; logic [$clog2(NODES)-1:0] ommb_raddr; logic [ROW_W-1:0] ommb_rdata;
  logic [ROW_W-1:0] om [NODES];
  logic [K*PKT_W-1:0] ext [int];
  int lat_q[$]; logic [K*PKT_W-1:0] dat_q[$];
  int got_n, got_idx[$]; logic [K*PKT_W-1:0] got_w[$];
  ext_mem_if #(.K(K), .EDEP(EDEP), .NODES(NODES)) dut (.*);
  always #5 clk = ~clk;
  function automatic logic [K*PKT_W-1:0] wval(int a); return {16{32'(a * 7919 + 13)}}; endfunction
  // memory model
  always @(posedge clk) begin
    mem_rd_valid <= 0;
    if (mem_rd_req && mem_rd_gnt) begin lat_q.push_back(2 + $urandom % 5); dat_q.push_back(wval(int'(mem_rd_addr))); end
    foreach (lat_q[i]) lat_q[i]--;
    if (lat_q.size() > 0 && lat_q[0] <= 0) begin
      void'(lat_q.pop_front()); mem_rd_valid <= 1; mem_rd_data <= dat_q.pop_front();
    end
    if (mem_wr_req && mem_wr_gnt) ext[int'(mem_wr_addr)] = mem_wr_data;
    mem_rd_gnt <= $urandom % 3 != 0; mem_wr_gnt <= $urandom % 2;
    if (ommb_re) ommb_rdata <= om[ommb_raddr];
  end
  // EWM level model: drained one word every 3rd cycle
  int lvl = 0;
  always @(posedge clk) begin
    automatic int d = (lvl > 0 && $urandom % 3 == 0) ? 1 : 0;
    lvl = lvl + (ewm_we ? 1 : 0) - d; if (lvl > maxlvl) maxlvl = lvl;
    if (lvl == EDEP) nbp++;
  end
  assign ewm_count = ($clog2(EDEP+1))'(lvl);
  // capture deliveries
  always @(posedge clk) if (iram_we | hdr_we | bias_we | ewm_we | ddm_we[0]) begin
    got_w.push_back(wdata);
    got_idx.push_back(iram_we ? int'(iram_wbase) : hdr_we ? int'(hdr_wbase) : ddm_we[0] ? int'(ddm_wrow[0]) * 1000 + int'(ddm_wrow[1]) : 0);
  end
  task automatic xfer(dma_kind_e k, int a, int n);
    @(negedge clk); start = 1; kind = k; addr = a; count = n; got_w.delete(); got_idx.delete();
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask
  initial begin
    static dma_kind_e ks[5] = '{DMA_IRAM, DMA_DDM, DMA_HDR, DMA_BIAS, DMA_EWM};
    static int ns[5] = '{3, 5, 2, 1, 40};
    foreach (om[i]) om[i] = {8{32'(i * 31 + 1)}};
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (ks[x]) begin
      xfer(ks[x], 100 * x + 7, ns[x]);
      checks++; if (got_w.size() != ns[x]) failures++;
      foreach (got_w[i]) begin
        checks++; if (got_w[i] !== wval(100 * x + 7 + i)) failures++;
        checks++;
        case (ks[x])
          DMA_IRAM: if (got_idx[i] != 8 * i) failures++;
          DMA_HDR:  if (got_idx[i] != K * i) failures++;
          DMA_DDM:  if (got_idx[i] != 2 * i * 1000 + 2 * i + 1) failures++;
          default: ;
        endcase
      end
    end
    checks++; if (maxlvl > EDEP || nbp == 0) begin failures++; $display("maxlvl %0d nbp %0d", maxlvl, nbp); end
    xfer(DMA_STORE, 500, 7);
    for (int w = 0; w < 4; w++) begin
      checks++;
      if (ext[500 + w] !== {(2*w+1 < 7) ? om[2*w+1] : 256'(0), om[2*w]}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
