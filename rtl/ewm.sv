// ewm: edge weights memory, the buffer that feeds the PE array.
//
// A circular buffer of DEPTH words, each one lane (PKT_W = 16 bits) per PE.
// During an SDMM step the external memory interface streams preprocessed PCOO
// words into it while the array drains it, one word per cycle; `space`
// throttles the stream. Before a DMM step the data mover fills it with the
// dense left matrix (one SINT16 value per PE and lane), which the array then
// reads in the same way. `flush` empties the buffer.
// Alongside sits the DMM header table: HDR_DEPTH PCOO headers shared by all
// rows of a dense left matrix, loaded from external memory, NUM_PE entries per
// word. Both are read with one cycle of latency (block RAM): rd_en in cycle t,
// rdata/hdr_rdata valid in cycle t+1.
module ewm
  import lwgcn_pkg::*;
#(
  parameter int unsigned K     = NUM_PE,
  parameter int unsigned DEPTH = EWM_DEPTH,
  parameter int unsigned HDEP  = HDR_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     we,
  input  logic [K*PKT_W-1:0]       wdata,
  input  logic                     rd_en,
  output logic [K*PKT_W-1:0]       rdata,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                     empty,
  output logic                     full,
  input  logic                     hdr_we,
  input  logic [$clog2(HDEP)-1:0]  hdr_wbase,   // first entry of the written word
  input  logic [K*PKT_W-1:0]       hdr_wdata,
  input  logic [$clog2(HDEP)-1:0]  hdr_raddr,
  output pcoo_t                    hdr_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned HA = $clog2(HDEP);

  logic [K*PKT_W-1:0] mem [DEPTH];
  logic [PKT_W-1:0]   hdr [HDEP];
  logic [AW-1:0]      wp, rp;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + 1'b1;
  endfunction

  wire do_wr = we && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wdata;
    if (do_rd) rdata <= mem[rp];
  end

  always_ff @(posedge clk) begin
    if (hdr_we)
      for (int i = 0; i < K; i++)
        if (int'(hdr_wbase) + i < HDEP) hdr[HA'(int'(hdr_wbase) + i)] <= hdr_wdata[i*PKT_W +: PKT_W];
    if (rd_en) hdr_rdata <= pcoo_t'(hdr[hdr_raddr]);
  end

  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));

  always_ff @(posedge clk)
    if (!flush) begin
      assert (!(we && full))     else $error("ewm: write to a full buffer");
      assert (!(rd_en && empty)) else $error("ewm: read from an empty buffer");
    end
endmodule
