// ext_mem_if: external memory interface, a single-channel DMA engine.
//
// One transfer at a time, started by a one-cycle `start` with a kind, an
// external word address and a length:
//   loads (IRAM, DDM, HDR, BIAS, EWM): `count` words are read from external
//     memory and routed to the destination as they return. DDM words carry two
//     dense rows (rows 2w and 2w+1), IRAM words eight instructions, HDR words
//     NUM_PE headers, the BIAS word LANES SINT32 values. For the EWM the engine
//     is credit based: it only issues a read when the buffer has room for it
//     and for every read still in flight, so the PE array can drain the buffer
//     while it fills (the compute-step stream).
//   STORE: `count` OMMB rows are packed two per word and written out.
// External read port: req/addr accepted on gnt, responses in order on valid
// with any latency. Write port: req/addr/data held until gnt.
// The paper only names this block; the protocol is this design's choice.
module ext_mem_if
  import lwgcn_pkg::*;
#(
  parameter int unsigned K     = NUM_PE,
  parameter int unsigned EDEP  = EWM_DEPTH,
  parameter int unsigned NODES = MAX_NODES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  dma_kind_e                  kind,
  input  logic [EXT_AW-1:0]          addr,
  input  logic [15:0]                count,
  output logic                       busy,
  output logic                       done,
  // external memory
  output logic                       mem_rd_req,
  output logic [EXT_AW-1:0]          mem_rd_addr,
  input  logic                       mem_rd_gnt,
  input  logic                       mem_rd_valid,
  input  logic [K*PKT_W-1:0]         mem_rd_data,
  output logic                       mem_wr_req,
  output logic [EXT_AW-1:0]          mem_wr_addr,
  output logic [K*PKT_W-1:0]         mem_wr_data,
  input  logic                       mem_wr_gnt,
  // destinations
  output logic [K*PKT_W-1:0]         wdata,
  output logic                       iram_we,
  output logic [15:0]                iram_wbase,
  output logic [1:0]                 ddm_we,
  output logic [1:0][COL_W-1:0]      ddm_wrow,
  output logic                       hdr_we,
  output logic [15:0]                hdr_wbase,
  output logic                       bias_we,
  output logic                       ewm_we,
  input  logic [$clog2(EDEP+1)-1:0]  ewm_count,
  // OMMB read (STORE)
  output logic                       ommb_re,
  output logic [$clog2(NODES)-1:0]   ommb_raddr,
  input  logic [ROW_W-1:0]           ommb_rdata
);
  localparam int unsigned WW = K * PKT_W;
  localparam int unsigned NA = $clog2(NODES);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_R0, S_R1, S_R2, S_W} state_e;
  state_e     state;
  dma_kind_e  k;
  logic [EXT_AW-1:0] base;
  logic [15:0] n, iss, rcv, w;
  logic [WW-1:0] wbuf;

  logic credit_ok;
  always_comb credit_ok = (k != DMA_EWM) ||
                          (32'(ewm_count) + 32'(iss - rcv) < 32'(EDEP));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= DMA_IRAM; base <= '0; n <= '0; iss <= '0; rcv <= '0;
      w <= '0; wbuf <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k <= kind; base <= addr; n <= count; iss <= '0; rcv <= '0; w <= '0;
          if (count == 0) done <= 1'b1;
          else state <= (kind == DMA_STORE) ? S_R0 : S_LOAD;
        end
        S_LOAD: begin
          if (mem_rd_req && mem_rd_gnt) iss <= iss + 1'b1;
          if (mem_rd_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == n) begin state <= S_IDLE; done <= 1'b1; end
          end
        end
        S_R0: state <= S_R1;                                    // read row 2w
        S_R1: begin wbuf[0 +: ROW_W] <= ommb_rdata; state <= S_R2; end // read row 2w+1
        S_R2: begin
          wbuf[ROW_W +: ROW_W] <= (32'(2*w + 1) < 32'(n)) ? ommb_rdata : '0;
          state <= S_W;
        end
        S_W: if (mem_wr_gnt) begin
          w <= w + 1'b1;
          if (32'(2*w + 2) >= 32'(n)) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_R0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    mem_rd_req  = (state == S_LOAD) && (iss < n) && credit_ok;
    mem_rd_addr = base + EXT_AW'(iss);
    mem_wr_req  = (state == S_W);
    mem_wr_addr = base + EXT_AW'(w);
    mem_wr_data = wbuf;
    wdata       = mem_rd_data;
    iram_wbase  = rcv * 16'(WW / 64);
    hdr_wbase   = rcv * 16'(K);
    ddm_wrow[0] = COL_W'(2 * rcv);
    ddm_wrow[1] = COL_W'(2 * rcv + 1);
    iram_we     = 1'b0; ddm_we = 2'b00; hdr_we = 1'b0; bias_we = 1'b0; ewm_we = 1'b0;
    if (state == S_LOAD && mem_rd_valid)
      unique case (k)
        DMA_IRAM: iram_we = 1'b1;
        DMA_DDM:  ddm_we  = 2'b11;
        DMA_HDR:  hdr_we  = 1'b1;
        DMA_BIAS: bias_we = 1'b1;
        DMA_EWM:  ewm_we  = 1'b1;
        default: ;
      endcase
    ommb_re    = (state == S_R0) || (state == S_R1);
    ommb_raddr = NA'(2 * w + ((state == S_R1) ? 1 : 0));
  end
endmodule
