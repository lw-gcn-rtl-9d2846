// tb_mem_selector: random PE requests; bank addresses, distributed rows and
// the collision / shared flags are compared with an independent model
// (bank j mod G, depth j div G, lowest PE wins). Bank contents are
// tagged so a wrong routing shows.
module tb_mem_selector;
  import lwgcn_pkg::*;
  localparam int P = 8, G = GROUPS, T = TILE, D = T / G;
  int checks = 0, failures = 0, ncoll = 0, nshare = 0;
  logic [P-1:0] req; logic [P-1:0][$clog2(T)-1:0] col;
  logic [G-1:0][$clog2(D)-1:0] bank_addr; logic [G-1:0][ROW_W-1:0] bank_data;
  logic [P-1:0][ROW_W-1:0] pe_data; logic collision, shared;
  mem_selector #(.P(P)) dut (.*);
  initial begin
    for (int n = 0; n < 5000; n++) begin
      automatic int owner [G]; automatic bit ecoll = 0, eshare = 0;
      for (int g = 0; g < G; g++) owner[g] = -1;
      for (int p = 0; p < P; p++) begin
        req[p] = $urandom % 4 != 0;
        col[p] = (n % 2) ? $urandom % T : ($urandom % 4) * G + ($urandom % 4);
      end
      #1;
      for (int g = 0; g < G; g++) bank_data[g] = {240'(g), 16'(bank_addr[g])};
      #1;
      for (int p = 0; p < P; p++) if (req[p]) begin
        automatic int g = col[p] % G;
        if (owner[g] < 0) owner[g] = p;
        else if (col[owner[g]] != col[p]) ecoll = 1;
        else eshare = 1;
      end
      for (int g = 0; g < G; g++) if (owner[g] >= 0) begin
        checks++; if (int'(bank_addr[g]) != col[owner[g]] / G) begin failures++; if (failures<4) $display("bank %0d addr %0d exp %0d", g, bank_addr[g], col[owner[g]]/G); end
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (pe_data[p] !== {240'(col[p] % G), 16'(bank_addr[col[p] % G])}) failures++;
        if (req[p] && owner[col[p] % G] >= 0 && col[owner[col[p] % G]] == col[p]) begin
          checks++; if (pe_data[p][15:0] != 16'(col[p] / G)) failures++;
        end
      end
      checks++; if (collision != ecoll || shared != eshare) begin failures++; if (failures<4) $display("coll %0d/%0d sh %0d/%0d", collision, ecoll, shared, eshare); end
      ncoll += ecoll; nshare += eshare;
    end
    checks++; if (ncoll == 0 || nshare == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
