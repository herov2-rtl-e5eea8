// tb_l1_spm_bank: random byte-masked writes and reads against a reference
// array; checks the one-cycle read latency and that a cycle without req
// leaves the memory unchanged.
module tb_l1_spm_bank;
  localparam int W = 2048;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, we;
  logic [10:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] be;
  logic [31:0] ref_m [W];
  logic [W-1:0] written = '0;

  l1_spm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
                   .be_i(be), .rdata_o(rdata));

  initial begin
    #100000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    // fill 64 words fully so every later read is defined
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 11'(i * 31); wdata = $urandom; be = 4'hF;
      ref_m[i * 31] = wdata; written[i * 31] = 1'b1;
    end
    for (int n = 0; n < 2000; n++) begin
      int k;
      k = ($urandom % 64) * 31;
      @(negedge clk);
      req = ($urandom % 4) != 0; we = $urandom % 2; addr = 11'(k); wdata = $urandom;
      be = 4'($urandom);
      if (req && we)
        for (int b = 0; b < 4; b++) if (be[b]) ref_m[k][8*b +: 8] = wdata[8*b +: 8];
      if (req && !we) begin
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== ref_m[k]) begin
          failures++;
          $display("FAIL: addr %0d got %h exp %h", k, rdata, ref_m[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
