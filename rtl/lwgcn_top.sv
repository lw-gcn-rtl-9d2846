// lwgcn_top: the LW-GCN accelerator.
//
// A GCN layer Relu(A (X W)) is run as a list of tiled matrix products on one
// unified PE array: combination X*W (SDMM for the sparse first-layer X, DMM
// afterwards) and aggregation A*(XW) (SDMM with a binary adjacency matrix).
// Each product is cut into TILE-column tiles of the left matrix and TILE-row
// tiles of the right one (outer product); partial results accumulate in the
// PE output buffers across tiles.
// Blocks: peripheral interface (host registers), top control (instruction
// fetch/decode/sequence) with its IRAM, external memory interface (DMA), dense
// data memory DDM (replicated, row grouped), edge weights memory EWM, the PE
// array, the data mover and the output matrix memory backup OMMB.
// Flow of one step: initial load of a W tile into the DDM; compute, with PCOO
// words streamed from external memory into the EWM and through the PEs;
// data move of the results into the OMMB, then into the DDM (after a
// combination, one tile per aggregation tile) or into the EWM (after an
// aggregation, as the dense left matrix of the next combination).
// Ports: a 32-bit host register bus (see periph_if) and a 512-bit external
// memory port with separate read and write request channels (see ext_mem_if);
// the DRAM itself is outside.
// Lint notes: the PE array's `shared` flag, the data mover's `sat_event` and
// `busy`, and the EWM's `full` are status outputs of those blocks that the top
// does not need (the top control waits on `done`, and the DMA's credit check
// already keeps the EWM from overflowing); they are left unconnected on
// purpose. The DMA's write-base outputs are 16 bits wide and only their low
// bits address the IRAM and header table at the default depths.
module lwgcn_top
  import lwgcn_pkg::*;
#(
  parameter int unsigned K    = NUM_PE,
  parameter int unsigned R    = REPLICAS,
  parameter int unsigned G    = GROUPS,
  parameter int unsigned ROWS = ROWS_PER_PE,
  parameter int unsigned EDEP = ROWS * LANES,
  parameter int unsigned IDEP = IRAM_DEPTH,
  parameter int unsigned HDEP = HDR_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host register bus
  input  logic                 host_wr_en,
  input  logic [2:0]           host_wr_addr,
  input  logic [31:0]          host_wr_data,
  input  logic [2:0]           host_rd_addr,
  output logic [31:0]          host_rd_data,
  output logic                 irq_done,
  // external memory
  output logic                 mem_rd_req,
  output logic [EXT_AW-1:0]    mem_rd_addr,
  input  logic                 mem_rd_gnt,
  input  logic                 mem_rd_valid,
  input  logic [K*PKT_W-1:0]   mem_rd_data,
  output logic                 mem_wr_req,
  output logic [EXT_AW-1:0]    mem_wr_addr,
  output logic [K*PKT_W-1:0]   mem_wr_data,
  input  logic                 mem_wr_gnt
);
  localparam int unsigned WW    = K * PKT_W;
  localparam int unsigned NODES = K * ROWS;
  localparam int unsigned NA    = $clog2(NODES);

  // ---- control ----
  logic              start, busy, done, err_coll, err_ovf;
  logic [EXT_AW-1:0] iram_addr;
  logic [15:0]       iram_words;
  logic [31:0]       cycles;

  periph_if u_periph (
    .clk(clk), .rst_n(rst_n), .wr_en(host_wr_en), .wr_addr(host_wr_addr),
    .wr_data(host_wr_data), .rd_addr(host_rd_addr), .rd_data(host_rd_data),
    .start(start), .iram_addr(iram_addr), .iram_words(iram_words),
    .busy(busy), .done(done), .err_collision(err_coll), .err_overflow(err_ovf),
    .cycles(cycles)
  );
  assign irq_done = done;

  logic                     iram_re, iram_we;
  logic [$clog2(IDEP)-1:0]  iram_raddr;
  logic [15:0]              iram_wbase;
  instr_t                   instr;

  logic                     dma_start, dma_busy, dma_done;
  dma_kind_e                dma_kind;
  logic [EXT_AW-1:0]        dma_addr;
  logic [15:0]              dma_count;
  logic [WW-1:0]            dma_wdata;
  logic [1:0]               dma_ddm_we;
  logic [1:0][COL_W-1:0]    dma_ddm_wrow;
  logic                     dma_hdr_we, dma_bias_we, dma_ewm_we;
  logic [15:0]              dma_hdr_wbase;
  logic                     dma_ommb_re;
  logic [NA-1:0]            dma_ommb_raddr;

  logic                     ctl_ewm_flush, ewm_rd_en, ewm_empty, ewm_full;
  logic [$clog2(EDEP+1)-1:0] ewm_count;
  logic [$clog2(HDEP)-1:0]  hdr_raddr;
  logic [WW-1:0]            ewm_rdata;
  pcoo_t                    hdr_rdata;

  logic                     pe_clear, pe_valid, sparse_flag, bias_flag, binary;
  logic signed [LANES-1:0][ACC_W-1:0] bias;
  logic                     pe_busy, collision, shared, overflow;

  logic                     mv_start_move, mv_start_copy, mv_relu, mv_to_ewm, mv_done, mv_busy;
  logic [15:0]              mv_count, mv_base;
  logic [4:0]               mv_shift;
  logic                     mv_re;
  logic [$clog2(ROWS)-1:0]  mv_addr;
  logic [K-1:0][LANES*ACC_W-1:0] obuf_rdata;
  logic                     mv_ommb_we, mv_ommb_re, mv_ewm_flush, mv_ewm_we, mv_ddm_we, sat_event;
  logic [NA-1:0]            mv_ommb_waddr, mv_ommb_raddr;
  logic [ROW_W-1:0]         mv_ommb_wdata, ommb_rdata, mv_ddm_wdata;
  logic [WW-1:0]            mv_ewm_wdata;
  logic [COL_W-1:0]         mv_ddm_wrow;

  top_control #(.K(K), .IDEP(IDEP), .HDEP(HDEP)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .iram_addr(iram_addr), .iram_words(iram_words),
    .busy(busy), .done(done), .cycles(cycles),
    .iram_re(iram_re), .iram_raddr(iram_raddr), .instr(instr),
    .dma_start(dma_start), .dma_kind(dma_kind), .dma_addr(dma_addr), .dma_count(dma_count),
    .dma_busy(dma_busy), .dma_done(dma_done), .bias_we(dma_bias_we), .bias_wdata(dma_wdata),
    .ewm_flush(ctl_ewm_flush), .ewm_rd_en(ewm_rd_en), .ewm_empty(ewm_empty), .hdr_raddr(hdr_raddr),
    .pe_clear(pe_clear), .pe_valid(pe_valid), .sparse_flag(sparse_flag), .bias_flag(bias_flag),
    .binary(binary), .bias(bias), .pe_busy(pe_busy), .collision(collision), .overflow(overflow),
    .err_collision(err_coll), .err_overflow(err_ovf),
    .mv_start_move(mv_start_move), .mv_start_copy(mv_start_copy), .mv_count(mv_count),
    .mv_base(mv_base), .mv_shift(mv_shift), .mv_relu(mv_relu), .mv_to_ewm(mv_to_ewm),
    .mv_done(mv_done)
  );

  iram #(.DEPTH(IDEP), .WW(WW)) u_iram (
    .clk(clk), .we(iram_we), .wbase($clog2(IDEP)'(iram_wbase)), .wdata(dma_wdata),
    .re(iram_re), .raddr(iram_raddr), .rdata(instr)
  );

  ext_mem_if #(.K(K), .EDEP(EDEP), .NODES(NODES)) u_dma (
    .clk(clk), .rst_n(rst_n), .start(dma_start), .kind(dma_kind), .addr(dma_addr),
    .count(dma_count), .busy(dma_busy), .done(dma_done),
    .mem_rd_req(mem_rd_req), .mem_rd_addr(mem_rd_addr), .mem_rd_gnt(mem_rd_gnt),
    .mem_rd_valid(mem_rd_valid), .mem_rd_data(mem_rd_data),
    .mem_wr_req(mem_wr_req), .mem_wr_addr(mem_wr_addr), .mem_wr_data(mem_wr_data),
    .mem_wr_gnt(mem_wr_gnt),
    .wdata(dma_wdata), .iram_we(iram_we), .iram_wbase(iram_wbase),
    .ddm_we(dma_ddm_we), .ddm_wrow(dma_ddm_wrow), .hdr_we(dma_hdr_we), .hdr_wbase(dma_hdr_wbase),
    .bias_we(dma_bias_we), .ewm_we(dma_ewm_we), .ewm_count(ewm_count),
    .ommb_re(dma_ommb_re), .ommb_raddr(dma_ommb_raddr), .ommb_rdata(ommb_rdata)
  );

  // ---- memories ----
  logic [1:0]                      ddm_we;
  logic [1:0][COL_W-1:0]           ddm_wrow;
  logic [1:0][ROW_W-1:0]           ddm_wdata;
  logic [R-1:0][G-1:0][$clog2(TILE/G)-1:0] ddm_raddr;
  logic [R-1:0][G-1:0][ROW_W-1:0]  ddm_rdata;

  always_comb begin
    ddm_we       = dma_ddm_we | {1'b0, mv_ddm_we};
    ddm_wrow[0]  = mv_ddm_we ? mv_ddm_wrow  : dma_ddm_wrow[0];
    ddm_wdata[0] = mv_ddm_we ? mv_ddm_wdata : dma_wdata[0 +: ROW_W];
    ddm_wrow[1]  = dma_ddm_wrow[1];
    ddm_wdata[1] = dma_wdata[ROW_W +: ROW_W];
  end

  ddm #(.R(R), .G(G), .T(TILE)) u_ddm (
    .clk(clk), .we(ddm_we), .wrow(ddm_wrow), .wdata(ddm_wdata),
    .raddr(ddm_raddr), .rdata(ddm_rdata)
  );

  ewm #(.K(K), .DEPTH(EDEP), .HDEP(HDEP)) u_ewm (
    .clk(clk), .rst_n(rst_n), .flush(ctl_ewm_flush | mv_ewm_flush),
    .we(dma_ewm_we | mv_ewm_we), .wdata(mv_ewm_we ? mv_ewm_wdata : dma_wdata),
    .rd_en(ewm_rd_en), .rdata(ewm_rdata), .count(ewm_count), .empty(ewm_empty), .full(ewm_full),
    .hdr_we(dma_hdr_we), .hdr_wbase($clog2(HDEP)'(dma_hdr_wbase)), .hdr_wdata(dma_wdata),
    .hdr_raddr(hdr_raddr), .hdr_rdata(hdr_rdata)
  );

  ommb #(.ROWS(NODES)) u_ommb (
    .clk(clk), .we(mv_ommb_we), .waddr(mv_ommb_waddr), .wdata(mv_ommb_wdata),
    .re(mv_ommb_re | dma_ommb_re), .raddr(mv_ommb_re ? mv_ommb_raddr : dma_ommb_raddr),
    .rdata(ommb_rdata)
  );

  // ---- compute ----
  pe_array #(.K(K), .R(R), .G(G), .ROWS(ROWS)) u_array (
    .clk(clk), .rst_n(rst_n), .clear(pe_clear), .in_valid(pe_valid), .lanes(ewm_rdata),
    .hdr(hdr_rdata), .sparse_flag(sparse_flag), .binary(binary), .bias_flag(bias_flag),
    .bias(bias), .ddm_raddr(ddm_raddr), .ddm_rdata(ddm_rdata),
    .mv_re(mv_re), .mv_addr(mv_addr), .obuf_rdata(obuf_rdata),
    .busy(pe_busy), .collision(collision), .shared(shared), .overflow(overflow)
  );

  data_mover #(.K(K), .ROWS(ROWS), .NODES(NODES)) u_mover (
    .clk(clk), .rst_n(rst_n), .start_move(mv_start_move), .start_copy(mv_start_copy),
    .count(mv_count), .base(mv_base), .shift(mv_shift), .relu(mv_relu), .to_ewm(mv_to_ewm),
    .busy(mv_busy), .done(mv_done),
    .mv_re(mv_re), .mv_addr(mv_addr), .obuf_rdata(obuf_rdata),
    .ommb_we(mv_ommb_we), .ommb_waddr(mv_ommb_waddr), .ommb_wdata(mv_ommb_wdata),
    .ommb_re(mv_ommb_re), .ommb_raddr(mv_ommb_raddr), .ommb_rdata(ommb_rdata),
    .ewm_flush(mv_ewm_flush), .ewm_we(mv_ewm_we), .ewm_wdata(mv_ewm_wdata),
    .ddm_we(mv_ddm_we), .ddm_wrow(mv_ddm_wrow), .ddm_wdata(mv_ddm_wdata),
    .sat_event(sat_event)
  );
endmodule
