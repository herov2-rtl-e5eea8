// tb_perf_counters: random event streams, checks every counter against a
// model for its selected event, one-write start/stop and clear-on-select.
module tb_perf_counters;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] evt;
  reg_req_t q;
  reg_rsp_t r;
  int model [4];
  int sel [4];
  logic [3:0] run;

  perf_counters dut (.clk_i(clk), .rst_ni(rst_n), .evt_i(evt), .cfg_req_i(q), .cfg_rsp_o(r));

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); q = '{valid: 1, write: 1, addr: a, wdata: d};
    @(negedge clk); q = '0;
  endtask

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // reference model, updated on every rising edge
  always @(posedge clk)
    if (rst_n)
      for (int i = 0; i < 4; i++) if (run[i] && evt[sel[i]]) model[i]++;

  initial begin
    evt = 0; q = '0; run = 0;
    for (int i = 0; i < 4; i++) begin model[i] = 0; sel[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 5; round++) begin
      for (int i = 0; i < 4; i++) begin
        sel[i] = $urandom % 8;
        wr(16'h10 + 4 * i, sel[i]);
        model[i] = 0;
      end
      wr(16'h0, 32'hF); run = 4'hF;
      repeat (200) begin
        @(negedge clk); evt = 8'($urandom);
      end
      @(negedge clk); evt = 0;
      wr(16'h0, 32'h0);
      run = 0;
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); q = '{valid: 1, write: 0, addr: 16'h40 + 4 * i, wdata: 0};
        #1;
        checks++;
        if (r.rdata != model[i]) begin
          failures++;
          $display("FAIL: counter %0d = %0d, expected %0d", i, r.rdata, model[i]);
        end
        @(negedge clk); q = '0;
      end
    end
    // event 0 tied high counts every cycle: RUN set for 50 edges (counting
    // starts at the edge after the RUN write)
    wr(16'h10, 0); sel[0] = 0; model[0] = 0;
    @(negedge clk); q = '{valid: 1, write: 1, addr: 16'h0, wdata: 1}; run = 1; evt = 8'h1;
    @(negedge clk); q = '0;
    repeat (49) @(negedge clk);
    q = '{valid: 1, write: 1, addr: 16'h0, wdata: 0}; run = 0;
    @(negedge clk); q = '{valid: 1, write: 0, addr: 16'h40, wdata: 0};
    #1 checks++;
    if (r.rdata != 50) begin failures++; $display("FAIL: cycle count %0d", r.rdata); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
