// tb_pcoo_decoder: random PCOO packets in both value modes; every field is
// compared with a bit-level unpacking done here.
module tb_pcoo_decoder;
  import lwgcn_pkg::*;
  int checks = 0, failures = 0;
  pcoo_t pkt; logic binary, sor, eor, vld; logic [COL_W-1:0] addr; logic signed [DW-1:0] value;
  pcoo_decoder dut (.*);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic logic [15:0] raw = 16'($urandom);
      int expv;
      pkt = pcoo_t'(raw); binary = n[0];
      #1;
      expv = binary ? 1 : ((raw[3:0] >= 8) ? int'(raw[3:0]) - 16 : int'(raw[3:0]));
      checks++;
      if (sor !== raw[15] || eor !== raw[14] || vld !== raw[13] || addr !== raw[12:4] ||
          int'(value) != expv) begin
        failures++;
        if (failures < 5) $display("mismatch raw=%h value=%0d exp=%0d", raw, value, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
