// tb_l0_icache: the per-core L0 instruction buffer against a model of the
// shared cache that grants after 0-2 cycles and answers one cycle later.
// Checks returned words, that hits cause no request to the shared cache,
// FIFO replacement of the two lines (A, B hit; C evicts A), flush, the
// one-cycle hit latency, and a random fetch stream against a 2-line model.
module tb_l0_icache;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fetch_req_t cq, lq;
  fetch_rsp_t cr, lr;
  logic flush, miss;
  int l1_reqs = 0;

  l0_icache dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .core_req_i(cq),
                 .core_rsp_o(cr), .miss_o(miss), .l1_req_o(lq), .l1_rsp_i(lr));

  function automatic logic [63:0] word(input logic [31:0] a);
    return {a ^ 32'h5555_0000, ~a};
  endfunction

  // shared-cache model
  logic [1:0]  delay;
  logic        pend;
  logic [31:0] paddr;
  always_comb begin
    lr.gnt    = lq.req && (delay == 0) && !pend;
    lr.rvalid = pend;
    lr.rdata  = word(paddr);
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      delay <= 0; pend <= 0; paddr <= 0;
    end else begin
      pend <= 1'b0;
      if (lq.req && !lr.gnt && delay != 0) delay <= delay - 1'b1;
      if (lr.gnt) begin
        pend <= 1'b1; paddr <= lq.addr; delay <= 2'($urandom % 3);
        l1_reqs <= l1_reqs + 1;
      end
    end
  end

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // fetch one word; returns cycles from request to rvalid
  task automatic fetch(input logic [31:0] a, output int cyc);
    int n = 0;
    @(negedge clk);
    cq = '{req: 1, addr: a};
    #1 while (!cr.gnt && n < 100) begin @(negedge clk); #1; n++; end
    @(negedge clk);
    cq.req = 0;
    cyc = n + 1;
    check(cr.rvalid && cr.rdata == word({a[31:3], 3'b0}), "fetched word");
  endtask

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int c, r0;
  logic [28:0] line_q [$];
  initial begin
    cq = '0; flush = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    r0 = l1_reqs;
    fetch(32'h100, c);            // A miss
    fetch(32'h104, c);            // A hit (same 64-bit line)
    check(c == 1, "hit is granted at once, data next cycle");
    fetch(32'h208, c);            // B miss
    fetch(32'h100, c);            // A hit
    check(l1_reqs == r0 + 2, "two misses, hits cause no shared-cache request");
    fetch(32'h310, c);            // C miss, evicts A (oldest)
    fetch(32'h208, c);            // B hit
    check(l1_reqs == r0 + 3, "B still held");
    fetch(32'h100, c);            // A miss again
    check(l1_reqs == r0 + 4, "FIFO replacement evicted A");
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    fetch(32'h100, c);
    check(l1_reqs == r0 + 5, "flush empties the buffer");
    // random stream against a 2-line FIFO model
    line_q.delete();
    line_q.push_back(29'h100 >> 3);
    for (int i = 0; i < 400; i++) begin
      logic [31:0] a;
      bit hit;
      a = 32'(($urandom % 6) * 8 + 32'h4000) + 32'(($urandom % 2) * 4);
      hit = 0;
      foreach (line_q[k]) if (line_q[k] == a[31:3]) hit = 1;
      r0 = l1_reqs;
      fetch(a, c);
      check((l1_reqs == r0) == hit, "hit/miss as the 2-line FIFO model predicts");
      if (!hit) begin
        line_q.push_back(a[31:3]);
        if (line_q.size() > 2) void'(line_q.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
