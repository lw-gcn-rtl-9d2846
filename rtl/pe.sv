// pe: unified processing element for sparse-dense (SDMM) and dense-dense
// (DMM) matrix multiplication.
//
// Each cycle the PE may accept one element of its concatenated row stream.
// Two pipeline stages:
//   decode (cycle of in_valid): the PCOO decoder splits the packet; its column
//     goes out as the dense-data address and the matching dense row comes back
//     combinationally from the memory selector / distributor (LUT RAM is read
//     asynchronously). The multiplier operand is chosen as in the PE figure:
//     sparse_flag = 1 takes the value decoded from the packet, sparse_flag = 0
//     (DMM) takes the edge weight streamed from the edge weights memory; VLD = 0
//     replaces it by 0. The output buffer is read at the current row so that a
//     row starting here (SOR) finds its previous-tile result one cycle later.
//   MAC: the LANES multiply-accumulators add operand x dense row to their
//     start value (see mac_array); on EOR the updated row is written to the
//     output buffer at the row given by the address generator.
// Latency from in_valid to the output-buffer write is 2 cycles; throughput is
// one element per cycle. The data mover reads the output buffer through
// mv_re/mv_addr while the PE is idle (one-cycle read, shared read port).
module pe
  import lwgcn_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_PER_PE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,       // start of a compute step
  input  logic                          in_valid,
  input  pcoo_t                         pkt,
  input  logic signed [DW-1:0]          edge_weight, // DMM left-matrix value
  input  logic                          sparse_flag,
  input  logic                          binary,
  input  logic                          bias_flag,
  input  logic signed [LANES-1:0][ACC_W-1:0] bias,
  output logic                          addr_valid,
  output logic [COL_W-1:0]              dense_addr,
  input  logic signed [LANES-1:0][DW-1:0] dense_data,
  input  logic                          mv_re,
  input  logic [$clog2(ROWS)-1:0]       mv_addr,
  output logic [LANES*ACC_W-1:0]        obuf_rdata,
  output logic                          busy,
  output logic                          overflow
);
  localparam int unsigned RW = $clog2(ROWS);

  logic                  d_sor, d_eor, d_vld;
  logic signed [DW-1:0]  d_value, d_scalar;
  logic [RW-1:0]         d_row;

  pcoo_decoder u_dec (
    .pkt(pkt), .binary(binary), .sor(d_sor), .eor(d_eor), .vld(d_vld),
    .addr(dense_addr), .value(d_value)
  );

  pe_addr_gen #(.ROWS(ROWS)) u_ag (
    .clk(clk), .rst_n(rst_n), .clear(clear), .step(in_valid), .eor(d_eor),
    .row(d_row), .overflow(overflow)
  );

  assign addr_valid = in_valid & d_vld;
  assign d_scalar   = !d_vld ? '0 : (sparse_flag ? d_value : edge_weight);

  // decode -> MAC pipeline registers
  logic                           m_valid, m_sor, m_eor, m_bias;
  logic signed [DW-1:0]           m_scalar;
  logic signed [LANES-1:0][DW-1:0] m_dense;
  logic [RW-1:0]                  m_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_sor <= 1'b0; m_eor <= 1'b0; m_bias <= 1'b0;
      m_scalar <= '0;  m_dense <= '0; m_row <= '0;
    end else begin
      m_valid <= in_valid;
      if (in_valid) begin
        m_sor    <= d_sor;
        m_eor    <= d_eor;
        m_bias   <= bias_flag;
        m_scalar <= d_scalar;
        m_dense  <= d_vld ? dense_data : '0;
        m_row    <= d_row;
      end
    end
  end

  logic signed [LANES-1:0][ACC_W-1:0] sum, prev;
  assign prev = obuf_rdata;

  mac_array #(.N(LANES)) u_mac (
    .clk(clk), .rst_n(rst_n), .valid(m_valid), .sor(m_sor), .bias_flag(m_bias),
    .scalar(m_scalar), .dense(m_dense), .bias(bias), .prev(prev), .sum(sum)
  );

  pe_output_buffer #(.ROWS(ROWS), .W(LANES*ACC_W)) u_obuf (
    .clk(clk),
    .we(m_valid && m_eor), .waddr(m_row), .wdata(sum),
    .re(mv_re || in_valid), .raddr(mv_re ? mv_addr : d_row), .rdata(obuf_rdata)
  );

  assign busy = in_valid | m_valid;
endmodule
