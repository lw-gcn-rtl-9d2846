// pe_addr_gen: row tracking of one PE ("Addr Gen" of the PE).
//
// Rows are assigned to PEs round-robin, so PE p sees global rows p, p+K, ...
// concatenated in one stream and never needs a row number from memory. The
// counter holds the local row index (global row / K) of the element now in
// the decode stage; an accepted element with EOR = 1 advances it, so the next
// element starts the next row. `clear` (start of every compute step) resets
// it to 0. The row of the current element is given unregistered as `row`.
module pe_addr_gen #(
  parameter int unsigned ROWS = 640
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     step,     // an element is accepted this cycle
  input  logic                     eor,      // ... and it ends its row
  output logic [$clog2(ROWS)-1:0]  row,
  output logic                     overflow  // sticky: more rows than the buffer holds
);
  localparam int unsigned RW = $clog2(ROWS);
  logic [RW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      cnt      <= '0;
      overflow <= 1'b0;
    end else if (step && eor) begin
      if (cnt == RW'(ROWS - 1)) overflow <= 1'b1;
      cnt <= (cnt == RW'(ROWS - 1)) ? '0 : cnt + 1'b1;
    end
  end

  assign row = cnt;
endmodule
