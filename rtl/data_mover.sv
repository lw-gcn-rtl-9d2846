// data_mover: the "data move" step between compute steps.
//
// MOVE (after the last tile of a step): for every block b of NUM_PE rows it
// reads local row b of all PE output buffers in one cycle, then spends NUM_PE
// cycles writing global row b*NUM_PE+p (from PE p) to the OMMB. Each SINT32
// value is quantized to SINT16: optional ReLU, arithmetic right shift by
// `shift`, saturation. With `to_ewm` it also writes, during the first LANES of
// those cycles, EWM word c = {value c of PE p's row, for every PE p}, i.e. the
// layer output laid out as the dense left matrix of the next DMM step (lanes
// of rows past `nrows` are 0). One block takes max(NUM_PE, LANES)+1 cycles.
// COPY_DDM (before an aggregation tile): copies OMMB rows base..base+n-1 into
// DDM rows 0..n-1, one row per cycle after a one-cycle read latency.
// start is a one-cycle pulse; done pulses once when the operation ends.
// Quantization by shift/ReLU/saturation and the block-wise timing are this
// design's choices; the paper only says results are quantized to SINT16.
module data_mover
  import lwgcn_pkg::*;
#(
  parameter int unsigned K     = NUM_PE,
  parameter int unsigned ROWS  = ROWS_PER_PE,
  parameter int unsigned NODES = K * ROWS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_move,
  input  logic                        start_copy,
  input  logic [15:0]                 count,     // rows
  input  logic [15:0]                 base,      // COPY_DDM: first OMMB row
  input  logic [4:0]                  shift,
  input  logic                        relu,
  input  logic                        to_ewm,
  output logic                        busy,
  output logic                        done,
  // PE output buffers
  output logic                        mv_re,
  output logic [$clog2(ROWS)-1:0]     mv_addr,
  input  logic [K-1:0][LANES*ACC_W-1:0] obuf_rdata,
  // OMMB
  output logic                        ommb_we,
  output logic [$clog2(NODES)-1:0]    ommb_waddr,
  output logic [ROW_W-1:0]            ommb_wdata,
  output logic                        ommb_re,
  output logic [$clog2(NODES)-1:0]    ommb_raddr,
  input  logic [ROW_W-1:0]            ommb_rdata,
  // EWM
  output logic                        ewm_flush,
  output logic                        ewm_we,
  output logic [K*PKT_W-1:0]          ewm_wdata,
  // DDM (write port 0)
  output logic                        ddm_we,
  output logic [COL_W-1:0]            ddm_wrow,
  output logic [ROW_W-1:0]            ddm_wdata,
  output logic                        sat_event   // a value was clipped this cycle
);
  localparam int unsigned NA = $clog2(NODES);
  localparam int unsigned RA = $clog2(ROWS);
  localparam int unsigned SPAN = (K > LANES) ? K : LANES;

  typedef enum logic [1:0] {S_IDLE, S_MV_RD, S_MV_WR, S_CP} state_e;
  state_e state;

  logic [15:0] n, blk, c, i;
  logic [15:0] cbase;
  logic [4:0]  sh;
  logic        rl, te, cp_wv;
  logic [15:0] cp_wi;

  function automatic logic signed [DW-1:0] quant(input logic signed [ACC_W-1:0] a,
                                                 input logic [4:0] s, input logic r);
    logic signed [ACC_W-1:0] v;
    v = (r && a < 0) ? 32'sd0 : (a >>> s);
    if (v > 32767)       return 16'sh7fff;
    else if (v < -32768) return -16'sh8000;
    else                 return DW'(v);
  endfunction

  function automatic logic clips(input logic signed [ACC_W-1:0] a,
                                 input logic [4:0] s, input logic r);
    logic signed [ACC_W-1:0] v;
    v = (r && a < 0) ? 32'sd0 : (a >>> s);
    return (v > 32767) || (v < -32768);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n <= '0; blk <= '0; c <= '0; i <= '0; cbase <= '0;
      sh <= '0; rl <= 1'b0; te <= 1'b0; cp_wv <= 1'b0; cp_wi <= '0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      cp_wv <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_move) begin
            n <= count; sh <= shift; rl <= relu; te <= to_ewm; blk <= '0;
            state <= (count == 0) ? S_IDLE : S_MV_RD;
            done  <= (count == 0);
          end else if (start_copy) begin
            n <= count; cbase <= base; i <= '0;
            state <= (count == 0) ? S_IDLE : S_CP;
            done  <= (count == 0);
          end
        end
        S_MV_RD: begin
          c <= '0;
          state <= S_MV_WR;
        end
        S_MV_WR: begin
          if (c == 16'(SPAN - 1)) begin
            if (32'(blk + 1) * K >= 32'(n)) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              blk <= blk + 1'b1; state <= S_MV_RD;
            end
          end
          c <= c + 1'b1;
        end
        S_CP: begin
          cp_wv <= 1'b1;
          cp_wi <= i;
          if (i == n - 1) state <= S_IDLE;
          i <= i + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
      if (cp_wv && cp_wi == n - 1 && state != S_CP) done <= 1'b1;
    end
  end

  // ---- combinational outputs ----
  logic [31:0] grow;   // global row written to OMMB in S_MV_WR
  always_comb begin
    grow       = 32'(blk) * K + 32'(c);
    busy       = (state != S_IDLE) || cp_wv;
    mv_re      = (state == S_MV_RD);
    mv_addr    = RA'(blk);
    ewm_flush  = start_move && to_ewm && state == S_IDLE;
    ommb_we    = 1'b0;
    ommb_waddr = NA'(grow);
    ommb_wdata = '0;
    ewm_we     = 1'b0;
    ewm_wdata  = '0;
    sat_event  = 1'b0;
    if (state == S_MV_WR) begin
      if (c < 16'(K) && grow < 32'(n)) begin
        ommb_we = 1'b1;
        for (int l = 0; l < LANES; l++) begin
          ommb_wdata[l*DW +: DW] = quant(obuf_rdata[c[$clog2(K)-1:0]][l*ACC_W +: ACC_W], sh, rl);
          if (clips(obuf_rdata[c[$clog2(K)-1:0]][l*ACC_W +: ACC_W], sh, rl)) sat_event = 1'b1;
        end
      end
      if (te && c < 16'(LANES)) begin
        ewm_we = 1'b1;
        for (int p = 0; p < K; p++)
          if (32'(blk) * K + 32'(p) < 32'(n))
            ewm_wdata[p*PKT_W +: PKT_W] =
              quant(obuf_rdata[p][c[$clog2(LANES)-1:0]*ACC_W +: ACC_W], sh, rl);
      end
    end
    ommb_re    = (state == S_CP);
    ommb_raddr = NA'(32'(cbase) + 32'(i));
    ddm_we     = cp_wv;
    ddm_wrow   = COL_W'(cp_wi);
    ddm_wdata  = ommb_rdata;
  end
endmodule
