// tb_iommu: the IOMMU in front of an l2_spm used as "host memory".
// Checks untranslated pass-through while disabled, translated write and
// read bursts through a programmed TLB entry (data lands at the physical
// address), SLVERR on every beat of a read miss and on the B of a write
// miss, the miss queue (address, interrupt, pop), SLVERR for a write to a
// read-only page while reads of it work, and the lookup latency.
module tb_iommu;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t sq, mq;
  axi_rsp_t sr, mr;
  reg_req_t cq;
  reg_rsp_t cr;
  logic irq;

  iommu dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(sq), .slv_rsp_o(sr),
             .mst_req_o(mq), .mst_rsp_i(mr), .cfg_req_i(cq), .cfg_rsp_o(cr), .miss_irq_o(irq));
  l2_spm #(.WORDS(4096)) mem (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(mq), .axi_rsp_o(mr));

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic cw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cq = '{valid: 1, write: 1, addr: a, wdata: d};
    @(negedge clk); cq = '0;
  endtask
  task automatic crd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); cq = '{valid: 1, write: 0, addr: a, wdata: 0};
    #1 d = cr.rdata;
    @(negedge clk); cq = '0;
  endtask

  task automatic wr(input logic [63:0] a, input int len, input logic [63:0] seed,
                    output logic [1:0] resp);
    @(negedge clk);
    sq.aw = '{id: 8'd1, addr: a, len: 8'(len - 1), size: 3'd3, burst: 2'b01};
    sq.aw_valid = 1;
    #1 while (!sr.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); sq.aw_valid = 0;
    for (int b = 0; b < len; b++) begin
      sq.w = '{data: seed + 64'(b), strb: 8'hFF, last: b == len - 1};
      sq.w_valid = 1;
      #1 while (!sr.w_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    sq.w_valid = 0; sq.b_ready = 1;
    #1 while (!sr.b_valid) begin @(negedge clk); #1; end
    resp = sr.b.resp;
    check(sr.b.id == 1, "B id");
    @(negedge clk); sq.b_ready = 0;
  endtask

  // returns 1 if all beats match seed+k (when check_data) and all resp == exp
  task automatic rd(input logic [63:0] a, input int len, input logic [63:0] seed,
                    input logic [1:0] exp, input bit check_data, output int cyc);
    int t0, bad = 0;
    @(negedge clk);
    sq.ar = '{id: 8'd2, addr: a, len: 8'(len - 1), size: 3'd3, burst: 2'b01};
    sq.ar_valid = 1; sq.r_ready = 1;
    t0 = $time;
    #1 while (!sr.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); sq.ar_valid = 0;
    for (int b = 0; b < len; b++) begin
      #1 while (!sr.r_valid) begin @(negedge clk); #1; end
      if (b == 0) cyc = ($time - t0) / 10;
      if (sr.r.resp != exp || sr.r.id != 2 || sr.r.last != (b == len - 1)) bad++;
      if (check_data && sr.r.data != seed + 64'(b)) bad++;
      @(negedge clk);
    end
    sq.r_ready = 0;
    check(bad == 0, "read burst data/resp");
  endtask

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [1:0]  resp;
  logic [31:0] d;
  int          cyc_by, cyc_tr;
  initial begin
    sq = '0; cq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // disabled: pass-through
    wr(64'h0000_1000, 8, 64'h1111_0000, resp);
    check(resp == RESP_OKAY, "bypass write OKAY");
    rd(64'h0000_1000, 8, 64'h1111_0000, RESP_OKAY, 1, cyc_by);
    check(!irq, "no miss while disabled");

    // entry 3: VA 0x7_1234_5000 -> PA 0x6000, writable
    cw(16'h100 + 32 * 3 + 0, 32'h1234_5000);
    cw(16'h100 + 32 * 3 + 4, 32'h7);
    cw(16'h100 + 32 * 3 + 8, 32'h0000_6000);
    cw(16'h100 + 32 * 3 + 12, 32'h0);
    cw(16'h100 + 32 * 3 + 16, 32'h1);
    // entry 9: VA 0x8000_2000 -> PA 0x1000, read-only
    cw(16'h100 + 32 * 9 + 0, 32'h8000_2000);
    cw(16'h100 + 32 * 9 + 4, 32'h0);
    cw(16'h100 + 32 * 9 + 8, 32'h0000_1000);
    cw(16'h100 + 32 * 9 + 12, 32'h0);
    cw(16'h100 + 32 * 9 + 16, 32'h3);
    cw(16'h000, 32'h1);
    crd(16'h100 + 32 * 3 + 8, d);
    check(d == 32'h6000, "entry read back");

    wr(64'h7_1234_5040, 4, 64'h2222_0000, resp);
    check(resp == RESP_OKAY, "translated write OKAY");
    rd(64'h7_1234_5040, 4, 64'h2222_0000, RESP_OKAY, 1, cyc_tr);
    $display("first read beat: bypass %0d cycles, translated %0d cycles", cyc_by, cyc_tr);
    check(cyc_tr <= cyc_by + 1, "translation costs at most one cycle");
    // the data must be at the physical address: read it untranslated
    cw(16'h000, 32'h0);
    rd(64'h0000_6040, 4, 64'h2222_0000, RESP_OKAY, 1, cyc_by);
    cw(16'h000, 32'h1);

    // read-only page: reads work, writes fail
    rd(64'h8000_2000, 8, 64'h1111_0000, RESP_OKAY, 1, cyc_tr);
    wr(64'h8000_2000, 2, 64'h0, resp);
    check(resp == RESP_SLVERR, "write to read-only page gives SLVERR");
    check(irq, "read-only violation recorded");
    crd(16'h008, d);
    check(d == 32'h8000_2000, "violating address recorded");
    cw(16'h010, 32'h0);
    @(negedge clk);
    check(!irq, "queue empty after pop");
    // the failed write must not have reached memory
    rd(64'h8000_2000, 2, 64'h1111_0000, RESP_OKAY, 1, cyc_tr);

    // misses
    rd(64'h5_0000_0000, 4, 64'h0, RESP_SLVERR, 0, cyc_tr);
    wr(64'h6_0000_0008, 3, 64'h0, resp);
    check(resp == RESP_SLVERR, "write miss gives SLVERR");
    crd(16'h004, d);
    check(d[0] && d[15:8] == 2, "two misses queued");
    crd(16'h00C, d);
    check(d == 32'h5, "first miss upper address");
    cw(16'h010, 32'h0);
    crd(16'h008, d);
    check(d == 32'h8, "second miss lower address");
    cw(16'h010, 32'h0);
    @(negedge clk);
    check(!irq, "miss queue drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
