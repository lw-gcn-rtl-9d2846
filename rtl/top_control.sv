// top_control: fetches, decodes and sequences the instruction list.
//
// After `start` (from the peripheral interface) it loads `iram_words` words of
// instructions from external address `iram_addr` into the IRAM, then executes
// them in order, each to completion:
//   LOAD_DDM/LOAD_HDR/LOAD_BIAS  DMA from external memory ("initial load")
//   COMPUTE   clears the PE row counters, sets sparse_flag/bias_flag/binary,
//             optionally (flag = 1) streams `count` PCOO words from external
//             memory into the EWM, and feeds `count` EWM words to the PE array,
//             one per cycle whenever the EWM is not empty. For DMM the shared
//             header index walks 0..aux-1 and wraps with each row.
//             It ends when the stream is drained from the PE pipeline.
//   MOVE / COPY_DDM   handed to the data mover ("data move")
//   STORE     DMA of OMMB rows to external memory
//   END       raises `done` and returns to idle.
// It also holds the bias vector and sticky error flags (bank collision,
// output-buffer overflow) and counts busy cycles. The instruction set is this
// design's own; the paper says only that the preprocessor generates
// instructions that the top control fetches and decodes.
module top_control
  import lwgcn_pkg::*;
#(
  parameter int unsigned K    = NUM_PE,
  parameter int unsigned IDEP = IRAM_DEPTH,
  parameter int unsigned HDEP = HDR_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [EXT_AW-1:0]          iram_addr,
  input  logic [15:0]                iram_words,
  output logic                       busy,
  output logic                       done,
  output logic [31:0]                cycles,
  // IRAM
  output logic                       iram_re,
  output logic [$clog2(IDEP)-1:0]    iram_raddr,
  input  instr_t                     instr,
  // DMA
  output logic                       dma_start,
  output dma_kind_e                  dma_kind,
  output logic [EXT_AW-1:0]          dma_addr,
  output logic [15:0]                dma_count,
  input  logic                       dma_busy,
  input  logic                       dma_done,
  input  logic                       bias_we,
  input  logic [K*PKT_W-1:0]         bias_wdata,
  // EWM
  output logic                       ewm_flush,
  output logic                       ewm_rd_en,
  input  logic                       ewm_empty,
  output logic [$clog2(HDEP)-1:0]    hdr_raddr,
  // PE array
  output logic                       pe_clear,
  output logic                       pe_valid,
  output logic                       sparse_flag,
  output logic                       bias_flag,
  output logic                       binary,
  output logic signed [LANES-1:0][ACC_W-1:0] bias,
  input  logic                       pe_busy,
  input  logic                       collision,
  input  logic                       overflow,
  output logic                       err_collision,
  output logic                       err_overflow,
  // data mover
  output logic                       mv_start_move,
  output logic                       mv_start_copy,
  output logic [15:0]                mv_count,
  output logic [15:0]                mv_base,
  output logic [4:0]                 mv_shift,
  output logic                       mv_relu,
  output logic                       mv_to_ewm,
  input  logic                       mv_done
);

  typedef enum logic [2:0] {S_IDLE, S_BOOT, S_FETCH, S_DEC, S_EXEC, S_WAIT} state_e;
  state_e  state;
  instr_t  cur;
  logic [$clog2(IDEP)-1:0] pc;
  logic [15:0] remaining;
  logic [15:0] ncols;
  logic        computing;

  wire issue = computing && remaining != 0 && !ewm_empty;

  // completion of the instruction being executed
  logic fin;
  always_comb
    unique case (cur.op)
      OP_COMPUTE:           fin = computing && remaining == 0 && !pe_valid && !pe_busy && !dma_busy;
      OP_MOVE, OP_COPY_DDM: fin = mv_done;
      default:              fin = dma_done;
    endcase

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; pc <= '0; remaining <= '0; ncols <= 16'd1;
      computing <= 1'b0; done <= 1'b0; cycles <= '0; hdr_raddr <= '0;
      sparse_flag <= 1'b1; bias_flag <= 1'b0; binary <= 1'b0; bias <= '0;
      err_collision <= 1'b0; err_overflow <= 1'b0; pe_valid <= 1'b0;
    end else begin
      pe_valid <= issue;
      if (bias_we) bias <= bias_wdata;
      if (collision) err_collision <= 1'b1;
      if (overflow)  err_overflow  <= 1'b1;
      if (state != S_IDLE) cycles <= cycles + 1'b1;
      if (issue) begin
        remaining <= remaining - 1'b1;
        hdr_raddr <= (32'(hdr_raddr) + 1 >= 32'(ncols)) ? '0 : hdr_raddr + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          done <= 1'b0; cycles <= '0; pc <= '0;
          err_collision <= 1'b0; err_overflow <= 1'b0;
          state <= S_BOOT;
        end
        S_BOOT: if (dma_done) state <= S_FETCH;
        S_FETCH: state <= S_DEC;
        S_DEC: begin cur <= instr; state <= S_EXEC; end
        S_EXEC: begin
          state <= S_WAIT;
          unique case (cur.op)
            OP_END: begin done <= 1'b1; state <= S_IDLE; end
            OP_COMPUTE: begin
              sparse_flag <= cur.sparse; bias_flag <= cur.bias; binary <= cur.binary;
              remaining <= cur.count; ncols <= (cur.aux == 0) ? 16'd1 : cur.aux;
              hdr_raddr <= '0; computing <= 1'b1;
            end
            default: ;
          endcase
        end
        S_WAIT: begin
          if (fin) begin
            computing <= 1'b0;
            pc <= pc + 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    iram_re    = (state == S_FETCH);
    iram_raddr = pc;
    ewm_rd_en  = issue;
    pe_clear   = (state == S_EXEC) && cur.op == OP_COMPUTE;
    ewm_flush  = (state == S_EXEC) && cur.op == OP_COMPUTE && cur.flag;
    dma_start  = 1'b0;
    dma_kind   = DMA_IRAM;
    dma_addr   = cur.addr;
    dma_count  = cur.count;
    if (state == S_IDLE && start) begin
      dma_start = 1'b1; dma_kind = DMA_IRAM; dma_addr = iram_addr; dma_count = iram_words;
    end else if (state == S_EXEC) begin
      unique case (cur.op)
        OP_LOAD_DDM:  begin dma_start = 1'b1; dma_kind = DMA_DDM;  end
        OP_LOAD_HDR:  begin dma_start = 1'b1; dma_kind = DMA_HDR;  end
        OP_LOAD_BIAS: begin dma_start = 1'b1; dma_kind = DMA_BIAS; end
        OP_STORE:     begin dma_start = 1'b1; dma_kind = DMA_STORE; end
        OP_COMPUTE:   begin dma_start = cur.flag; dma_kind = DMA_EWM; end
        default: ;
      endcase
    end
    mv_start_move = (state == S_EXEC) && cur.op == OP_MOVE;
    mv_start_copy = (state == S_EXEC) && cur.op == OP_COPY_DDM;
    mv_count      = cur.count;
    mv_base       = cur.aux;
    mv_shift      = cur.aux[4:0];
    mv_relu       = cur.aux[5];
    mv_to_ewm     = cur.flag;
  end
endmodule
