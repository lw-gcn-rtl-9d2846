// pcoo_decoder: unpacks one packet of the packet-level column-only coordinate
// list (PCOO) format.
//
// A packet is {SOR, EOR, VLD, col, val}. SOR marks the first element of a
// row, EOR the last one, VLD separates real non-zeros from the empty elements
// that the preprocessor injects (collision stalls, padding, and - together
// with SOR = EOR = 1 - rows that have no non-zero in the tile). The column is
// the position inside the tile (j mod T) and is used directly as the dense
// data memory row address. The value field is a SINT4; for a binary adjacency
// matrix ("binary" mode) the value field is not used and every valid element
// counts as 1, as the paper's edge-or-no-edge compression does.
// Purely combinational; the value is sign-extended to the dense width.
module pcoo_decoder
  import lwgcn_pkg::*;
(
  input  pcoo_t                 pkt,
  input  logic                  binary,   // 1: implicit value 1 for valid elements
  output logic                  sor,
  output logic                  eor,
  output logic                  vld,
  output logic [COL_W-1:0]      addr,     // dense data row inside the tile
  output logic signed [DW-1:0]  value
);
  always_comb begin
    sor   = pkt.sor;
    eor   = pkt.eor;
    vld   = pkt.vld;
    addr  = pkt.col;
    value = binary ? DW'(1) : DW'(signed'(pkt.val));
  end
endmodule
