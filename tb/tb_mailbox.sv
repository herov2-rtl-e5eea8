// tb_mailbox: host->device and device->host words in order, the interrupt
// levels, the count register, and a full FIFO dropping extra pushes.
module tb_mailbox;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  reg_req_t hq, dq;
  reg_rsp_t hr, dr;
  logic dirq, hirq;

  mailbox dut (.clk_i(clk), .rst_ni(rst_n), .host_req_i(hq), .host_rsp_o(hr),
               .dev_req_i(dq), .dev_rsp_o(dr), .dev_irq_o(dirq), .host_irq_o(hirq));

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic wr(ref reg_req_t r, input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); r = '{valid: 1, write: 1, addr: a, wdata: d};
    @(negedge clk); r = '0;
  endtask
  task automatic rd(ref reg_req_t r, ref reg_rsp_t rs, input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); r = '{valid: 1, write: 0, addr: a, wdata: 0};
    #1 d = rs.rdata;
    @(negedge clk); r = '0;
  endtask

  initial begin
    #100000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [31:0] q [$];
  logic [31:0] d, v;
  initial begin
    hq = '0; dq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!dirq && !hirq, "no interrupt after reset");
    for (int i = 0; i < 10; i++) begin
      v = $urandom;
      wr(hq, 16'h0, v);
      if (i < 8) q.push_back(v);
    end
    check(dirq && !hirq, "device interrupt raised");
    rd(dq, dr, 16'h8, d);
    check(d[15:8] == 8, "device sees 8 words (extra pushes dropped)");
    for (int i = 0; i < 8; i++) begin
      rd(dq, dr, 16'h4, d);
      v = q.pop_front();
      check(d == v, "host->device word order");
    end
    check(!dirq, "device interrupt clears when empty");
    for (int i = 0; i < 5; i++) begin
      v = $urandom; q.push_back(v); wr(dq, 16'h0, v);
    end
    check(hirq && !dirq, "host interrupt raised");
    for (int i = 0; i < 5; i++) begin
      rd(hq, hr, 16'h4, d);
      v = q.pop_front();
      check(d == v, "device->host word order");
    end
    check(!hirq, "host interrupt clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
