// mac_array: the LANES multiply-accumulators of one PE with their accumulator
// input selector.
//
// Every accepted element multiplies one scalar (the sparse value, the DMM edge
// weight, or 0 for an empty element) by a dense row of LANES values and adds
// the products to LANES accumulators. The addend follows the PE figure:
//   SOR = 0             -> the accumulator's own previous result
//   SOR = 1, bias_flag=0 -> the row's partial result of the previous tile,
//                           read from the output buffer
//   SOR = 1, bias_flag=1 -> the bias vector (first tile of a step)
// Multiply and add finish in the same cycle (one DSP-style MAC per lane), so
// consecutive elements of one row never see a read-after-write hazard.
// `sum` is the updated value, valid in the cycle of `valid`; the PE writes it
// to the output buffer when EOR is set. Accumulators are SINT32 and wrap.
module mac_array
  import lwgcn_pkg::*;
#(
  parameter int unsigned N = LANES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         valid,
  input  logic                         sor,
  input  logic                         bias_flag,
  input  logic signed [DW-1:0]         scalar,
  input  logic signed [N-1:0][DW-1:0]  dense,
  input  logic signed [N-1:0][ACC_W-1:0] bias,
  input  logic signed [N-1:0][ACC_W-1:0] prev,   // previous-tile partial row
  output logic signed [N-1:0][ACC_W-1:0] sum
);
  logic signed [N-1:0][ACC_W-1:0] acc;

  always_comb begin
    for (int l = 0; l < N; l++) begin
      logic signed [ACC_W-1:0] addend;
      logic signed [2*DW-1:0]  prod;
      addend = !sor ? $signed(acc[l]) : (bias_flag ? $signed(bias[l]) : $signed(prev[l]));
      prod   = scalar * $signed(dense[l]);
      sum[l] = addend + ACC_W'(prod);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (valid) acc <= sum;
  end
endmodule
