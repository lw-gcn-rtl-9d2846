// tb_ewm: random pushes and pops against a queue model (data, count, empty,
// full, one-cycle read latency), a flush, and the DMM header table.
module tb_ewm;
  import lwgcn_pkg::*;
  localparam int K = 8, DEPTH = 20, HDEP = 16;
  int checks = 0, failures = 0, nfull = 0;
  logic clk = 0, rst_n = 0, flush = 0, we = 0, rd_en = 0, empty, full, hdr_we = 0;
  logic [K*PKT_W-1:0] wdata, rdata, hdr_wdata;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [$clog2(HDEP)-1:0] hdr_wbase, hdr_raddr; pcoo_t hdr_rdata;
  logic [K*PKT_W-1:0] q[$]; logic [K*PKT_W-1:0] expd; bit pend = 0;
  logic [15:0] hm [HDEP];
  ewm #(.K(K), .DEPTH(DEPTH), .HDEP(HDEP)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    wdata = '0; hdr_wdata = '0; hdr_wbase = '0; hdr_raddr = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (pend) begin checks++; if (rdata !== expd) failures++; end
      checks++; if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == DEPTH)) failures++;
      nfull += full;
      flush = (n == 2000);
      we = ((n / 500) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      we = we && !full; rd_en = ($urandom % 2) && !empty;
      wdata = {4{32'($urandom)}};
      pend = rd_en && !flush; if (rd_en) expd = q[0];
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (rd_en) void'(q.pop_front());
        if (we) q.push_back(wdata);
      end
    end
    // header table: two words of K entries, read back
    for (int w = 0; w < 2; w++) begin
      @(negedge clk); hdr_we = 1; hdr_wbase = w * K;
      for (int i = 0; i < K; i++) begin hdr_wdata[i*16 +: 16] = 16'($urandom); hm[w*K+i] = hdr_wdata[i*16 +: 16]; end
    end
    @(negedge clk); hdr_we = 0; flush = 1;
    @(negedge clk); flush = 0; we = 1;
    repeat (2 * K) @(negedge clk);
    we = 0;
    for (int i = 0; i < 2 * K; i++) begin
      @(negedge clk); hdr_raddr = i; rd_en = 1;
      @(negedge clk); rd_en = 0; checks++; if (hdr_rdata !== pcoo_t'(hm[i])) failures++;
    end
    checks++; if (nfull == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
