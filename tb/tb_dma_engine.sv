// tb_dma_engine: the DMA engine between an L1 made of 4 real banks (behind
// a 4 x 4 tcdm_interconnect) and an l2_spm as external memory.
// Checks a 1D inbound and outbound copy word by word, a 2D gather and a 2D
// scatter with strides, a transfer crossing a 4 KiB page, in-order transfer
// ids and done counters, both directions running at the same time, and the
// rate of one 64-bit beat per cycle on a long inbound transfer.
module tb_dma_engine;
  import hero_pkg::*;
  localparam int NB = 4, BW = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dma_cmd_t    cmd;
  logic        cvalid, cready, busy, err;
  logic [31:0] cid;
  logic [31:0] done [2];
  tcdm_req_t   tq [4];
  tcdm_rsp_t   tr [4];
  axi_req_t    aq;
  axi_rsp_t    ar;
  logic        breq [NB], bwe [NB];
  logic [11:0] baddr [NB];
  logic [31:0] bwd [NB], brd [NB];
  logic [3:0]  bbe [NB];

  dma_engine dut (.clk_i(clk), .rst_ni(rst_n), .cmd_i(cmd), .cmd_valid_i(cvalid),
    .cmd_ready_o(cready), .cmd_id_o(cid), .done_cnt_o(done), .busy_o(busy), .err_o(err),
    .tcdm_req_o(tq), .tcdm_rsp_i(tr), .axi_req_o(aq), .axi_rsp_i(ar));
  tcdm_interconnect #(.NUM_MST(4), .NUM_BANKS(NB), .BANK_WORDS(BW)) ic (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(tq), .mst_rsp_o(tr),
    .bank_req_o(breq), .bank_we_o(bwe), .bank_addr_o(baddr), .bank_wdata_o(bwd),
    .bank_be_o(bbe), .bank_rdata_i(brd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    l1_spm_bank #(.WORDS(BW)) i_b (.clk_i(clk), .req_i(breq[b]), .we_i(bwe[b]),
      .addr_i(baddr[b]), .wdata_i(bwd[b]), .be_i(bbe[b]), .rdata_o(brd[b]));
  end
  l2_spm #(.WORDS(8192)) ext (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(aq), .axi_rsp_o(ar));

  task automatic check(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // backdoor views (word addressed)
  function automatic logic [31:0] l1w(input int w);
    return g_b_rd(w);
  endfunction
  function automatic logic [31:0] g_b_rd(input int w);
    case (w % NB)
      0: return g_b[0].i_b.mem_q[w / NB];
      1: return g_b[1].i_b.mem_q[w / NB];
      2: return g_b[2].i_b.mem_q[w / NB];
      default: return g_b[3].i_b.mem_q[w / NB];
    endcase
  endfunction
  function automatic logic [31:0] extw(input int w);
    return ext.mem_q[w / 2][32 * (w % 2) +: 32];
  endfunction

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic issue(input dma_dir_e dir, input int e, input int l, input int len,
                       input int reps, input int es, input int ls, output int id);
    @(negedge clk);
    cmd = '{dir: dir, ext_addr: 64'(e), loc_addr: 32'(l), len: len, reps: reps,
            ext_stride: es, loc_stride: ls};
    cvalid = 1;
    #1 while (!cready) begin @(negedge clk); #1; end
    id = cid;
    @(negedge clk); cvalid = 0;
  endtask
  task automatic wait_done(input int dir, input int n);
    int t = 0;
    while (done[dir] < n && t < 20000) begin @(negedge clk); t++; end
    check(done[dir] >= n, "transfer done");
  endtask

  initial begin
    #5000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int id0, id1, id2, t0, ok;
  initial begin
    cmd = '0; cvalid = 0;
    for (int i = 0; i < 8192; i++) ext.mem_q[i] = {32'(2 * i + 1) ^ 32'hA5A5_0000, 32'(2 * i) ^ 32'hA5A5_0000};
    for (int w = 0; w < NB * BW; w++) begin
      case (w % NB)
        0: g_b[0].i_b.mem_q[w / NB] = 32'hDEAD_0000 + w;
        1: g_b[1].i_b.mem_q[w / NB] = 32'hDEAD_0000 + w;
        2: g_b[2].i_b.mem_q[w / NB] = 32'hDEAD_0000 + w;
        default: g_b[3].i_b.mem_q[w / NB] = 32'hDEAD_0000 + w;
      endcase
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1D inbound, 2 KiB = 256 beats, across a 4 KiB page of ext (start 0xF00)
    issue(DMA_HOST2DEV, 32'h0F00, 32'h0, 2048, 1, 0, 0, id0);
    t0 = cycle;
    wait_done(0, 1);
    $display("2 KiB inbound in %0d cycles", cycle - t0);
    // 256 beats at one per cycle, plus ~2 idle cycles per 16-beat burst
    // because the l2_spm model serves one burst at a time
    check(cycle - t0 <= 256 + 48, "inbound: about one beat per cycle");
    check(id0 == 0, "first inbound id 0");
    ok = 1;
    for (int w = 0; w < 512; w++) if (l1w(w) != extw(32'h0F00 / 4 + w)) ok = 0;
    check(ok == 1, "1D inbound data");

    // full duplex: outbound of that block while a 2D gather runs inbound
    issue(DMA_DEV2HOST, 32'h8000, 32'h0, 1024, 1, 0, 0, id1);
    issue(DMA_HOST2DEV, 32'h4000, 32'h2000, 24, 5, 256, 32, id2);
    check(id1 == 32'h8000_0000 && id2 == 1, "transfer ids carry direction and sequence");
    check(done[0] == 1 && done[1] == 0, "both still running");
    wait_done(1, 1);
    wait_done(0, 2);
    ok = 1;
    for (int w = 0; w < 256; w++) if (extw(32'h8000 / 4 + w) != l1w(w)) ok = 0;
    check(ok == 1, "1D outbound data");
    ok = 1;
    for (int r = 0; r < 5; r++)
      for (int k = 0; k < 6; k++)
        if (l1w(32'h2000 / 4 + 8 * r + k) != extw((32'h4000 + 256 * r) / 4 + k)) ok = 0;
    check(ok == 1, "2D gather data");
    check(l1w(32'h2000 / 4 + 6) == 32'hDEAD_0000 + 32'h2000 / 4 + 6, "gather leaves gaps untouched");

    // 2D scatter back out
    issue(DMA_DEV2HOST, 32'hA000, 32'h2000, 16, 3, 64, 32, id1);
    wait_done(1, 2);
    ok = 1;
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 4; k++)
        if (extw((32'hA000 + 64 * r) / 4 + k) != l1w(32'h2000 / 4 + 8 * r + k)) ok = 0;
    check(ok == 1, "2D scatter data");
    check(!err && !busy, "idle without error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
