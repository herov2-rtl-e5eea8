// tb_l2_spm: random INCR bursts written and read back against a reference,
// byte strobes, and the one-beat-per-cycle rate of a 16-beat read burst.
module tb_l2_spm;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  axi_req_t q;
  axi_rsp_t r;
  logic [63:0] ref_m [1024];

  l2_spm #(.WORDS(32768)) dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(q), .axi_rsp_o(r));

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic wburst(input int w, input int len);
    @(negedge clk);
    q.aw = '{id: 8'd3, addr: 64'(8 * w), len: 8'(len - 1), size: 3'd3, burst: 2'b01};
    q.aw_valid = 1;
    #1 while (!r.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); q.aw_valid = 0;
    for (int b = 0; b < len; b++) begin
      q.w = '{data: {$urandom, $urandom}, strb: 8'($urandom), last: b == len - 1};
      q.w_valid = 1;
      #1 while (!r.w_ready) begin @(negedge clk); #1; end
      for (int k = 0; k < 8; k++) if (q.w.strb[k]) ref_m[w + b][8*k +: 8] = q.w.data[8*k +: 8];
      @(negedge clk);
    end
    q.w_valid = 0; q.b_ready = 1;
    #1 while (!r.b_valid) begin @(negedge clk); #1; end
    check(r.b.id == 3 && r.b.resp == RESP_OKAY, "B id and OKAY");
    @(negedge clk); q.b_ready = 0;
  endtask

  task automatic rburst(input int w, input int len, output int cyc);
    int t0;
    @(negedge clk);
    q.ar = '{id: 8'd5, addr: 64'(8 * w), len: 8'(len - 1), size: 3'd3, burst: 2'b01};
    q.ar_valid = 1; q.r_ready = 1;
    #1 while (!r.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); q.ar_valid = 0;
    t0 = $time;
    for (int b = 0; b < len; b++) begin
      #1 while (!r.r_valid) begin @(negedge clk); #1; end
      check(r.r.data == ref_m[w + b] && r.r.id == 5 && r.r.last == (b == len - 1), "read data");
      @(negedge clk);
    end
    cyc = ($time - t0) / 10;
    q.r_ready = 0;
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int cyc;
  initial begin
    q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      q.aw = '{id: 0, addr: 64'(128 * i), len: 15, size: 3, burst: 1};
    end
    // fully defined contents first
    for (int i = 0; i < 1024; i += 16) begin
      @(negedge clk);
      q.aw = '{id: 8'd3, addr: 64'(8 * i), len: 8'd15, size: 3'd3, burst: 2'b01};
      q.aw_valid = 1;
      #1 while (!r.aw_ready) begin @(negedge clk); #1; end
      @(negedge clk); q.aw_valid = 0;
      for (int b = 0; b < 16; b++) begin
        q.w = '{data: {$urandom, $urandom}, strb: 8'hFF, last: b == 15};
        q.w_valid = 1;
        #1 while (!r.w_ready) begin @(negedge clk); #1; end
        ref_m[i + b] = q.w.data;
        @(negedge clk);
      end
      q.w_valid = 0; q.b_ready = 1;
      #1 while (!r.b_valid) begin @(negedge clk); #1; end
      @(negedge clk); q.b_ready = 0;
    end
    for (int n = 0; n < 40; n++) begin
      int w, len;
      len = 1 + $urandom % 16;
      w = $urandom % (1024 - 16);
      if ($urandom % 2) wburst(w, len);
      else rburst(w, len, cyc);
    end
    rburst(100, 16, cyc);
    $display("16-beat read took %0d cycles", cyc);
    check(cyc <= 17, "one read beat per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
