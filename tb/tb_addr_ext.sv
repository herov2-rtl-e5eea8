// tb_addr_ext: the per-core address-extension unit between a core model, a
// one-bank L1 and an l2_spm standing in for remote memory. Checks that L1
// window accesses with the CSR at zero go to L1 with their single-cycle
// timing, that other addresses and any non-zero CSR produce AXI accesses to
// {CSR, address} (upper bits seen on AR/AW), that remote loads return the
// right 32-bit half and remote stores only write their own bytes, and that
// the port stalls while a remote access is open.
module tb_addr_ext;
  import hero_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tcdm_req_t cq, tq;
  tcdm_rsp_t cr, tr;
  logic      csr_we, busy;
  logic [31:0] csr_wd, csr;
  axi_req_t  aq;
  axi_rsp_t  ar;

  addr_ext #(.L1_BASE(32'h1000_0000), .L1_SIZE(8192)) dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(cq), .core_rsp_o(cr), .csr_we_i(csr_we),
    .csr_wdata_i(csr_wd), .csr_o(csr), .remote_busy_o(busy), .tcdm_req_o(tq),
    .tcdm_rsp_i(tr), .axi_req_o(aq), .axi_rsp_i(ar));

  // L1: one bank of 2048 words, always granting
  logic [31:0] bank_rd;
  l1_spm_bank #(.WORDS(2048)) l1 (.clk_i(clk), .req_i(tq.req), .we_i(tq.we),
    .addr_i(tq.addr[12:2]), .wdata_i(tq.wdata), .be_i(tq.be), .rdata_o(bank_rd));
  logic l1_rv;
  always_ff @(posedge clk) l1_rv <= rst_n && tq.req && !tq.we;
  assign tr = '{gnt: tq.req, rvalid: l1_rv, rdata: bank_rd};

  l2_spm #(.WORDS(4096)) rem (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(aq), .axi_rsp_o(ar));

  logic [31:0] upper_seen;
  always_ff @(posedge clk) begin
    if (!rst_n) upper_seen <= 0;
    else if (aq.ar_valid) upper_seen <= aq.ar.addr[63:32];
    else if (aq.aw_valid) upper_seen <= aq.aw.addr[63:32];
  end

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic acc(input logic we, input logic [31:0] a, input logic [31:0] wd,
                     input logic [3:0] be, output logic [31:0] rd, output int lat);
    int n = 0;
    @(negedge clk);
    cq = '{req: 1, we: we, addr: a, wdata: wd, be: be};
    #1 while (!cr.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cq.req = 0;
    rd = 0;
    if (!we) begin
      while (!cr.rvalid && n < 200) begin @(negedge clk); n++; end
      rd = cr.rdata;
    end else begin
      while (busy && n < 200) begin @(negedge clk); n++; end
    end
    lat = n + 1;
  endtask

  task automatic set_csr(input logic [31:0] v);
    @(negedge clk); csr_we = 1; csr_wd = v;
    @(negedge clk); csr_we = 0;
  endtask

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [31:0] d;
  logic [63:0] old;
  int lat;
  initial begin
    cq = '0; csr_we = 0; csr_wd = 0;
    for (int i = 0; i < 4096; i++) rem.mem_q[i] = {32'(i) ^ 32'hBBBB_0000, 32'(i) ^ 32'hAAAA_0000};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // local
    acc(1, 32'h1000_0040, 32'h1234_5678, 4'hF, d, lat);
    acc(0, 32'h1000_0040, 0, 4'hF, d, lat);
    check(d == 32'h1234_5678 && lat == 1, "local store/load, data one cycle after grant");
    check(!aq.ar_valid && !aq.aw_valid, "local access stays off AXI");
    // remote, CSR = 0, outside the window
    acc(0, 32'h0000_0108, 0, 4'hF, d, lat);
    check(d == (32'(32'h108 / 8) ^ 32'hAAAA_0000), "remote load low half");
    acc(0, 32'h0000_010C, 0, 4'hF, d, lat);
    check(d == (32'(32'h108 / 8) ^ 32'hBBBB_0000), "remote load high half");
    check(lat > 1, "remote load takes longer than local");
    // remote with upper bits from the CSR; the L1 window is not local then
    set_csr(32'h0000_00AB);
    check(csr == 32'hAB, "CSR reads back");
    acc(0, 32'h1000_0040, 0, 4'hF, d, lat);
    check(upper_seen == 32'hAB, "upper address bits from the CSR");
    check(d == (32'((32'h1000_0040 % 32768) / 8) ^ 32'hAAAA_0000), "CSR-extended load reaches remote memory");
    old = rem.mem_q[32'h204 / 8];
    acc(1, 32'h0000_0204, 32'hCAFE_BABE, 4'b0011, d, lat);
    check(rem.mem_q[32'h204 / 8] == {old[63:48], 16'hBABE, old[31:0]},
          "remote store writes only its bytes");
    set_csr(0);
    // random mix, local results against a model
    begin
      logic [31:0] m [64];
      for (int i = 0; i < 64; i++) begin
        acc(1, 32'h1000_0000 + 4 * i, 32'(i * 3), 4'hF, d, lat);
        m[i] = i * 3;
      end
      for (int n = 0; n < 200; n++) begin
        int i;
        i = $urandom % 64;
        if ($urandom % 3 == 0) begin
          acc(0, 32'h0000_0800 + 8 * i, 0, 4'hF, d, lat);
          check(d == (32'(32'h800 / 8 + i) ^ 32'hAAAA_0000), "random remote load");
        end else if ($urandom % 2) begin
          m[i] = $urandom;
          acc(1, 32'h1000_0000 + 4 * i, m[i], 4'hF, d, lat);
        end else begin
          acc(0, 32'h1000_0000 + 4 * i, 0, 4'hF, d, lat);
          check(d == m[i], "random local load");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
