// pe_array: NUM_PE unified PEs in REPLICAS groups, each group reading its own
// DDM replica through its memory selector and data distributor.
//
// All PEs advance in lockstep: one EWM word (one 16-bit lane per PE) is
// consumed per in_valid cycle. In SDMM mode (sparse_flag = 1) lane p is the
// PCOO packet of PE p. In DMM mode lane p is the SINT16 left-matrix value
// ("edge weight") of PE p, and all PEs share one PCOO header (`hdr`) because
// every row of a dense matrix has the same column pattern. PE p of group q is
// global PE q*(NUM_PE/REPLICAS)+p and owns global rows p', p'+NUM_PE, ...
// Outputs: `collision` (a bank was asked for two depths in one cycle, which a
// correctly preprocessed stream never does), `shared` (a bank read served
// several PEs), `busy` while any element is in flight.
module pe_array
  import lwgcn_pkg::*;
#(
  parameter int unsigned K    = NUM_PE,
  parameter int unsigned R    = REPLICAS,
  parameter int unsigned G    = GROUPS,
  parameter int unsigned ROWS = ROWS_PER_PE
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clear,
  input  logic                                 in_valid,
  input  logic [K-1:0][PKT_W-1:0]              lanes,
  input  pcoo_t                                hdr,
  input  logic                                 sparse_flag,
  input  logic                                 binary,
  input  logic                                 bias_flag,
  input  logic signed [LANES-1:0][ACC_W-1:0]   bias,
  output logic [R-1:0][G-1:0][$clog2(TILE/G)-1:0] ddm_raddr,
  input  logic [R-1:0][G-1:0][ROW_W-1:0]       ddm_rdata,
  input  logic                                 mv_re,
  input  logic [$clog2(ROWS)-1:0]              mv_addr,
  output logic [K-1:0][LANES*ACC_W-1:0]        obuf_rdata,
  output logic                                 busy,
  output logic                                 collision,
  output logic                                 shared,
  output logic                                 overflow
);
  localparam int unsigned P = K / R;

  logic [K-1:0]                  pe_req, pe_busy, pe_ovf;
  logic [K-1:0][COL_W-1:0]       pe_col;
  logic [K-1:0][ROW_W-1:0]       pe_dense;
  logic [R-1:0]                  grp_coll, grp_shared;

  for (genvar q = 0; q < R; q++) begin : g_grp
    mem_selector #(.P(P), .G(G), .T(TILE)) u_sel (
      .req       (pe_req[q*P +: P]),
      .col       (pe_col[q*P +: P]),
      .bank_addr (ddm_raddr[q]),
      .bank_data (ddm_rdata[q]),
      .pe_data   (pe_dense[q*P +: P]),
      .collision (grp_coll[q]),
      .shared    (grp_shared[q])
    );
  end

  for (genvar k = 0; k < K; k++) begin : g_pe
    pcoo_t pkt;
    assign pkt = sparse_flag ? pcoo_t'(lanes[k]) : hdr;
    pe #(.ROWS(ROWS)) u_pe (
      .clk(clk), .rst_n(rst_n), .clear(clear), .in_valid(in_valid),
      .pkt(pkt), .edge_weight(lanes[k]), .sparse_flag(sparse_flag),
      .binary(binary), .bias_flag(bias_flag), .bias(bias),
      .addr_valid(pe_req[k]), .dense_addr(pe_col[k]), .dense_data(pe_dense[k]),
      .mv_re(mv_re), .mv_addr(mv_addr), .obuf_rdata(obuf_rdata[k]),
      .busy(pe_busy[k]), .overflow(pe_ovf[k])
    );
  end

  assign busy      = |pe_busy;
  assign collision = |grp_coll;
  assign shared    = |grp_shared;
  assign overflow  = |pe_ovf;

  initial assert (K % R == 0) else $fatal(1, "pe_array: NUM_PE must be a multiple of REPLICAS");
endmodule
