// tb_tcdm_interconnect: 14 masters issue random loads and stores to 16
// banks behind the interconnect (real l1_spm_bank instances). Checks read
// data against a reference, that each bank grants at most one master per
// cycle, that requests to different banks are all granted in the same
// cycle, and that a waiting master is granted within NUM_MST cycles
// (round-robin fairness).
module tb_tcdm_interconnect;
  import hero_pkg::*;
  localparam int NM = 14, NB = 16, BW = 2048;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tcdm_req_t mq [NM];
  tcdm_rsp_t mr [NM];
  logic        breq [NB], bwe [NB];
  logic [10:0] baddr [NB];
  logic [31:0] bwd [NB], brd [NB];
  logic [3:0]  bbe [NB];

  tcdm_interconnect #(.NUM_MST(NM), .NUM_BANKS(NB), .BANK_WORDS(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mq), .mst_rsp_o(mr),
    .bank_req_o(breq), .bank_we_o(bwe), .bank_addr_o(baddr), .bank_wdata_o(bwd),
    .bank_be_o(bbe), .bank_rdata_i(brd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    l1_spm_bank #(.WORDS(BW)) i_b (.clk_i(clk), .req_i(breq[b]), .we_i(bwe[b]),
      .addr_i(baddr[b]), .wdata_i(bwd[b]), .be_i(bbe[b]), .rdata_o(brd[b]));
  end

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // 256 words used; two masters never reach one word in the same cycle
  // because a bank grants one master per cycle
  logic [31:0] ref_m [256];
  logic        pend [NM];
  logic [31:0] exp_d [NM];
  int          wait_c [NM];
  int          maxwait = 0;
  logic        granted [NM];

  initial begin
    for (int m = 0; m < NM; m++) begin mq[m] = '0; pend[m] = 0; wait_c[m] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // initialise all 256 words through master 0
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); mq[0] = '{req: 1, we: 1, addr: 32'(4 * i), wdata: 32'(i * 7), be: 4'hF};
      ref_m[i] = i * 7;
    end
    @(negedge clk); mq[0] = '0;
    // all masters to distinct banks: everyone granted at once
    @(negedge clk);
    for (int m = 0; m < NM; m++) mq[m] = '{req: 1, we: 0, addr: 32'(4 * m), wdata: 0, be: 4'hF};
    #1 begin
      int g = 0;
      for (int m = 0; m < NM; m++) g += mr[m].gnt;
      check(g == NM, "no conflict: all granted in one cycle");
    end
    @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      check(mr[m].rvalid && mr[m].rdata == ref_m[m], "parallel read data");
      mq[m] = '0;
    end
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // read data of last cycle's grants
      for (int m = 0; m < NM; m++)
        if (pend[m]) begin
          check(mr[m].rvalid && mr[m].rdata == exp_d[m], "read data");
          pend[m] = 0;
        end
      for (int m = 0; m < NM; m++)
        if (!mq[m].req && ($urandom % 3 == 0)) begin
          int w;
          w = $urandom % 256;
          mq[m] = '{req: 1, we: 1'($urandom), addr: 32'(4 * w), wdata: $urandom, be: 4'($urandom)};
        end
      #1;
      begin
        int per_bank [NB];
        for (int b = 0; b < NB; b++) per_bank[b] = 0;
        for (int m = 0; m < NM; m++) begin
          int w;
          w = mq[m].addr[31:2];
          granted[m] = mq[m].req && mr[m].gnt;
          if (mq[m].req && mr[m].gnt) begin
            per_bank[w % NB]++;
            if (mq[m].we) begin
              for (int k = 0; k < 4; k++) if (mq[m].be[k]) ref_m[w][8*k +: 8] = mq[m].wdata[8*k +: 8];
            end else begin
              pend[m] = 1; exp_d[m] = ref_m[w];
            end
            if (wait_c[m] > maxwait) maxwait = wait_c[m];
            wait_c[m] = 0;
          end else if (mq[m].req) wait_c[m]++;
        end
        for (int b = 0; b < NB; b++) if (per_bank[b] > 1) check(0, "two grants on one bank");
      end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) if (granted[m]) mq[m].req = 0;
    end
    $display("longest wait %0d cycles", maxwait);
    check(maxwait < NM, "round-robin: waiting master granted within NUM_MST cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
