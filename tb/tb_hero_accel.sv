// tb_hero_accel: end-to-end test of the accelerator at its default size
// (one cluster, 8 core ports, 128 KiB L1, 256 KiB L2, 32-entry IOMMU).
//
// The testbench plays the parts that are not RTL: the cores (fetch, data and
// CSR ports), the host (narrow AXI master, mailbox/IOMMU/perf registers) and
// host memory (an AXI slave model, 64 KiB, one burst at a time). It runs
// one scenario per mechanism, counts each mechanism that occurred and fails
// if any never did:
//   host_l1      host writes and reads L1 over the narrow network
//   host_l2      host writes and reads L2 over the narrow network
//   dma_in       1D DMA L2 -> L1 over the wide network, one beat per cycle
//   dma_out      1D DMA L1 -> host memory through the (bypassed) IOMMU
//   dma_2d       2D DMA gather L2 -> L1
//   core_local   core load/store to L1
//   tcdm_conflict eight cores hitting one bank at once
//   remote_l2    core load from L2 via the narrow network
//   addr_ext     core load from a 64-bit host address set by the CSR
//   icache_miss / l0_hit / icache_hit   instruction fetches
//   mailbox      host -> device word with interrupt, and the reply
//   perf         cycle and DMA-busy counters
//   iommu_hit / iommu_miss   translated access and a miss with interrupt
module tb_hero_accel;
  import hero_pkg::*;

  localparam int NC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ DUT ports
  fetch_req_t  fetch_req [NC];
  fetch_rsp_t  fetch_rsp [NC];
  logic        ic_flush;
  tcdm_req_t   data_req  [NC];
  tcdm_rsp_t   data_rsp  [NC];
  logic        csr_we    [NC];
  logic [31:0] csr_wdata [NC];
  dma_cmd_t    dma_cmd;
  logic        dma_valid, dma_ready, dma_busy, dma_err;
  logic [31:0] dma_id;
  logic [31:0] dma_done [2];
  reg_req_t    perf_req, io_req, mh_req, md_req;
  reg_rsp_t    perf_rsp, io_rsp, mh_rsp, md_rsp;
  logic        io_irq, mb_dev_irq, mb_host_irq;
  axi_req_t    host_req, mem_req;
  axi_rsp_t    host_rsp, mem_rsp;

  hero_accel dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_fetch_req_i (fetch_req), .core_fetch_rsp_o (fetch_rsp),
    .icache_flush_i (ic_flush),
    .core_data_req_i (data_req), .core_data_rsp_o (data_rsp),
    .core_csr_we_i (csr_we), .core_csr_wdata_i (csr_wdata),
    .dma_cmd_i (dma_cmd), .dma_cmd_valid_i (dma_valid), .dma_cmd_ready_o (dma_ready),
    .dma_cmd_id_o (dma_id), .dma_done_cnt_o (dma_done), .dma_busy_o (dma_busy),
    .dma_err_o (dma_err),
    .perf_req_i (perf_req), .perf_rsp_o (perf_rsp),
    .iommu_cfg_req_i (io_req), .iommu_cfg_rsp_o (io_rsp), .iommu_miss_irq_o (io_irq),
    .mbox_host_req_i (mh_req), .mbox_host_rsp_o (mh_rsp),
    .mbox_dev_req_i (md_req), .mbox_dev_rsp_o (md_rsp),
    .mbox_dev_irq_o (mb_dev_irq), .mbox_host_irq_o (mb_host_irq),
    .host_req_i (host_req), .host_rsp_o (host_rsp),
    .host_mem_req_o (mem_req), .host_mem_rsp_i (mem_rsp)
  );

  // ------------------------------------------------------ host memory model
  logic [63:0] hmem [8192];
  typedef enum logic [1:0] {HI, HR, HW, HB} hs_e;
  hs_e         hs;
  logic [7:0]  hid, hlen;
  logic [63:0] haddr;
  logic        hupper_seen;   // a request carried a non-zero upper address word
  int          hmem_reads = 0;

  always_comb begin
    mem_rsp          = '0;
    mem_rsp.ar_ready = (hs == HI);
    mem_rsp.aw_ready = (hs == HI) && !mem_req.ar_valid;
    mem_rsp.r_valid  = (hs == HR);
    mem_rsp.r.id     = hid;
    mem_rsp.r.data   = hmem[haddr[15:3]];
    mem_rsp.r.last   = (hlen == 8'd0);
    mem_rsp.w_ready  = (hs == HW);
    mem_rsp.b_valid  = (hs == HB);
    mem_rsp.b.id     = hid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hs <= HI; hid <= '0; hlen <= '0; haddr <= '0; hupper_seen <= 1'b0;
    end else begin
      unique case (hs)
        HI: if (mem_req.ar_valid) begin
              hs <= HR; hid <= mem_req.ar.id; hlen <= mem_req.ar.len; haddr <= mem_req.ar.addr;
              if (mem_req.ar.addr[63:32] != 0) hupper_seen <= 1'b1;
              hmem_reads <= hmem_reads + 1;
            end else if (mem_req.aw_valid) begin
              hs <= HW; hid <= mem_req.aw.id; haddr <= mem_req.aw.addr;
            end
        HR: if (mem_req.r_ready) begin
              if (hlen == 0) hs <= HI;
              hlen <= hlen - 1'b1; haddr <= haddr + 64'd8;
            end
        HW: if (mem_req.w_valid) begin
              for (int b = 0; b < 8; b++)
                if (mem_req.w.strb[b]) hmem[haddr[15:3]][8*b +: 8] <= mem_req.w.data[8*b +: 8];
              haddr <= haddr + 64'd8;
              if (mem_req.w.last) hs <= HB;
            end
        HB: if (mem_req.b_ready) hs <= HI;
        default: hs <= HI;
      endcase
    end
  end

  // --------------------------------------------------------- watchdog
  int cycle = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (cycle > 200000) begin
      $display("FAIL: watchdog");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
      $finish;
    end
  end

  // TCDM contention observed on a core port
  int conflicts = 0;
  always @(negedge clk) begin
    for (int c = 0; c < NC; c++)
      if (rst_n && data_req[c].req && !data_rsp[c].gnt) conflicts++;
  end

  // ---------------------------------------------------------- helpers
  task automatic wait_for(ref logic sig, input int max_cycles, input string what);
    int n = 0;
    while (!sig && n < max_cycles) begin @(negedge clk); n++; end
    check(sig, what);
  endtask

  task automatic host_write(input logic [63:0] addr, input logic [63:0] data);
    @(negedge clk);
    host_req.aw = '{id: 8'd0, addr: addr, len: 8'd0, size: 3'd3, burst: 2'b01};
    host_req.aw_valid = 1'b1;
    host_req.w  = '{data: data, strb: 8'hFF, last: 1'b1};
    host_req.w_valid = 1'b1;
    host_req.b_ready = 1'b1;
    fork
      begin
        #1; while (!host_rsp.aw_ready) begin @(negedge clk); #1; end
        @(posedge clk); @(negedge clk); host_req.aw_valid = 1'b0;
      end
      begin
        #1; while (!host_rsp.w_ready) begin @(negedge clk); #1; end
        @(posedge clk); @(negedge clk); host_req.w_valid = 1'b0;
      end
    join
    #1; while (!host_rsp.b_valid) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk);
    host_req.b_ready = 1'b0;
  endtask

  task automatic host_read(input logic [63:0] addr, output logic [63:0] data,
                           output logic [1:0] resp);
    @(negedge clk);
    host_req.ar = '{id: 8'd0, addr: addr, len: 8'd0, size: 3'd3, burst: 2'b01};
    host_req.ar_valid = 1'b1;
    host_req.r_ready  = 1'b1;
    #1; while (!host_rsp.ar_ready) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk);
    host_req.ar_valid = 1'b0;
    #1; while (!host_rsp.r_valid) begin @(negedge clk); #1; end
    data = host_rsp.r.data;
    resp = host_rsp.r.resp;
    @(posedge clk); @(negedge clk);
    host_req.r_ready = 1'b0;
  endtask

  task automatic core_acc(input int c, input logic we, input logic [31:0] addr,
                          input logic [31:0] wdata, output logic [31:0] rdata);
    int n = 0;
    @(negedge clk);
    data_req[c] = '{req: 1'b1, we: we, addr: addr, wdata: wdata, be: 4'hF};
    #1; while (!data_rsp[c].gnt) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk);
    data_req[c].req = 1'b0;
    rdata = '0;
    if (!we) begin
      while (!data_rsp[c].rvalid && n < 1000) begin @(negedge clk); n++; end
      rdata = data_rsp[c].rdata;
    end
  endtask

  task automatic fetch(input int c, input logic [31:0] addr, output logic [63:0] data);
    int n = 0;
    @(negedge clk);
    fetch_req[c] = '{req: 1'b1, addr: addr};
    #1; while (!fetch_rsp[c].gnt && n < 1000) begin @(negedge clk); #1; n++; end
    @(posedge clk); @(negedge clk);
    fetch_req[c].req = 1'b0;
    data = fetch_rsp[c].rdata;
    check(fetch_rsp[c].rvalid, "fetch rvalid after grant");
  endtask

  task automatic reg_wr(ref reg_req_t r, input logic [15:0] addr, input logic [31:0] data);
    @(negedge clk);
    r = '{valid: 1'b1, write: 1'b1, addr: addr, wdata: data};
    @(posedge clk); @(negedge clk);
    r = '0;
  endtask

  task automatic reg_rd(ref reg_req_t r, ref reg_rsp_t rsp, input logic [15:0] addr,
                        output logic [31:0] data);
    @(negedge clk);
    r = '{valid: 1'b1, write: 1'b0, addr: addr, wdata: 32'd0};
    #1 data = rsp.rdata;
    @(posedge clk); @(negedge clk);
    r = '0;
  endtask

  task automatic dma(input dma_dir_e dir, input logic [63:0] ext, input logic [31:0] loc,
                     input int len, input int reps, input int es, input int ls,
                     output int cycles);
    int n0, target;
    @(negedge clk);
    dma_cmd = '{dir: dir, ext_addr: ext, loc_addr: loc, len: len, reps: reps,
                ext_stride: es, loc_stride: ls};
    dma_valid = 1'b1;
    #1; while (!dma_ready) begin @(negedge clk); #1; end
    target = dma_done[dir] + 1;
    n0 = cycle;
    @(posedge clk); @(negedge clk);
    dma_valid = 1'b0;
    while (dma_done[dir] < target && cycle - n0 < 5000) @(negedge clk);
    cycles = cycle - n0;
    check(dma_done[dir] == target, "DMA transfer completes");
  endtask

  // ------------------------------------------------------ mechanism counts
  localparam int NM = 18;
  string mech_name [NM] = '{"host_l1", "host_l2", "dma_in", "dma_out", "dma_2d",
                            "core_local", "tcdm_conflict", "remote_l2", "addr_ext",
                            "icache_miss", "l0_hit", "icache_hit", "mailbox", "perf",
                            "iommu_hit", "iommu_miss", "dma_rate", "mailbox_reply"};
  int mech [NM];

  function automatic logic [63:0] l2pat(input int i);
    return {32'(32'hA5000000 + 2*i + 1), 32'(32'h5A000000 + 2*i)};
  endfunction

  // ------------------------------------------------------------- scenario
  logic [63:0] d64;
  logic [31:0] d32;
  logic [1:0]  resp;
  int          cyc, ok, reads0;

  initial begin
    for (int i = 0; i < NM; i++) mech[i] = 0;
    for (int i = 0; i < 8192; i++) hmem[i] = {32'(i), ~32'(i)};
    for (int c = 0; c < NC; c++) begin
      fetch_req[c] = '0; data_req[c] = '0; csr_we[c] = 1'b0; csr_wdata[c] = '0;
    end
    ic_flush = 1'b0; dma_cmd = '0; dma_valid = 1'b0;
    perf_req = '0; io_req = '0; mh_req = '0; md_req = '0;
    host_req = '0;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // perf counters: counter 0 counts cycles, counter 1 DMA-busy cycles
    reg_wr(perf_req, 16'h10, 32'd0);
    reg_wr(perf_req, 16'h14, 32'd3);
    reg_wr(perf_req, 16'h00, 32'h3);

    // host <-> L1 and L2 over the narrow network
    host_write(64'h1000_0800, 64'h0123_4567_89AB_CDEF);
    host_read (64'h1000_0800, d64, resp);
    check(d64 == 64'h0123_4567_89AB_CDEF && resp == RESP_OKAY, "host L1 write/read");
    if (d64 == 64'h0123_4567_89AB_CDEF) mech[0]++;
    for (int i = 0; i < 64; i++) host_write(64'h1C00_0000 + 8 * i, l2pat(i));
    host_read(64'h1C00_0000 + 8 * 5, d64, resp);
    check(d64 == l2pat(5), "host L2 write/read");
    if (d64 == l2pat(5)) mech[1]++;

    // 1D DMA L2 -> L1, 256 B = 32 beats
    dma(DMA_HOST2DEV, 64'h1C00_0000, 32'h1000_0100, 256, 1, 0, 0, cyc);
    ok = 1;
    for (int i = 0; i < 32; i += 7) begin
      host_read(64'h1000_0100 + 8 * i, d64, resp);
      if (d64 != l2pat(i)) ok = 0;
    end
    check(ok == 1, "DMA L2->L1 data");
    if (ok) mech[2]++;
    // one beat per cycle plus a fixed latency of the path
    $display("DMA 32 beats in %0d cycles", cyc);
    check(cyc <= 32 + 24, "DMA in-bound rate close to one beat per cycle");
    if (cyc <= 32 + 24) mech[16]++;

    // 1D DMA L1 -> host memory (IOMMU bypassed)
    dma(DMA_DEV2HOST, 64'h0000_8000, 32'h1000_0100, 256, 1, 0, 0, cyc);
    ok = 1;
    for (int i = 0; i < 32; i++) if (hmem[(16'h8000 >> 3) + i] != l2pat(i)) ok = 0;
    check(ok == 1, "DMA L1->host data");
    if (ok) mech[3]++;
    $display("DMA out 32 beats in %0d cycles", cyc);

    // 2D DMA: 4 rows of 16 B, source stride 64 B, destination stride 16 B
    dma(DMA_HOST2DEV, 64'h1C00_0000, 32'h1000_1000, 16, 4, 64, 16, cyc);
    ok = 1;
    for (int r = 0; r < 4; r++)
      for (int k = 0; k < 4; k++) begin
        core_acc(0, 1'b0, 32'h1000_1000 + 16 * r + 4 * k, 32'd0, d32);
        if (d32 != l2pat(8 * r + k / 2)[32 * (k % 2) +: 32]) ok = 0;
      end
    check(ok == 1, "2D DMA gather");
    if (ok) mech[4]++;

    // core local load/store
    core_acc(0, 1'b1, 32'h1000_2000, 32'hCAFE_F00D, d32);
    core_acc(0, 1'b0, 32'h1000_2000, 32'd0, d32);
    check(d32 == 32'hCAFE_F00D, "core L1 store/load");
    if (d32 == 32'hCAFE_F00D) mech[5]++;

    // eight cores on one bank at the same time
    ok = conflicts;
    for (int c = 0; c < NC; c++) begin
      automatic int cc = c;
      fork
        begin
          logic [31:0] dd;
          core_acc(cc, 1'b1, 32'h1000_3000 + 64 * cc, 32'(cc + 100), dd);
        end
      join_none
    end
    wait fork;
    check(conflicts - ok >= NC - 1, "bank conflicts serialise the cores");
    if (conflicts > ok) mech[6]++;
    ok = 1;
    for (int c = 0; c < NC; c++) begin
      core_acc(c, 1'b0, 32'h1000_3000 + 64 * c, 32'd0, d32);
      if (d32 != 32'(c + 100)) ok = 0;
    end
    check(ok == 1, "all conflicting stores landed");

    // core load from L2 (outside L1, CSR = 0)
    core_acc(1, 1'b0, 32'h1C00_0000 + 8 * 3 + 4, 32'd0, d32);
    check(d32 == l2pat(3)[63:32], "core remote load from L2");
    if (d32 == l2pat(3)[63:32]) mech[7]++;

    // core load from a 64-bit host address via the extension CSR
    @(negedge clk); csr_we[2] = 1'b1; csr_wdata[2] = 32'h1;
    @(negedge clk); csr_we[2] = 1'b0;
    core_acc(2, 1'b0, 32'h0000_0040, 32'd0, d32);
    check(d32 == hmem[8][31:0] && hupper_seen, "core load via address extension");
    if (d32 == hmem[8][31:0] && hupper_seen) mech[8]++;
    @(negedge clk); csr_we[2] = 1'b1; csr_wdata[2] = 32'h0;
    @(negedge clk); csr_we[2] = 1'b0;

    // instruction fetch: miss, L0 hit, shared-cache hit for another core
    reads0 = hmem_reads;
    fetch(3, 32'h0000_4000, d64);
    check(d64 == hmem[16'h4000 >> 3] && hmem_reads == reads0 + 1, "fetch miss refills");
    if (d64 == hmem[16'h4000 >> 3]) mech[9]++;
    fetch(3, 32'h0000_4000, d64);
    check(d64 == hmem[16'h4000 >> 3] && hmem_reads == reads0 + 1, "fetch L0 hit");
    if (d64 == hmem[16'h4000 >> 3]) mech[10]++;
    fetch(4, 32'h0000_4008, d64);
    check(d64 == hmem[(16'h4000 >> 3) + 1] && hmem_reads == reads0 + 1, "fetch shared-cache hit");
    if (d64 == hmem[(16'h4000 >> 3) + 1] && hmem_reads == reads0 + 1) mech[11]++;

    // mailbox
    reg_wr(mh_req, 16'h0, 32'h0000_1234);
    @(negedge clk);
    check(mb_dev_irq, "mailbox raises device interrupt");
    reg_rd(md_req, md_rsp, 16'h4, d32);
    check(d32 == 32'h1234 && !mb_dev_irq, "device reads mailbox word");
    if (d32 == 32'h1234) mech[12]++;
    reg_wr(md_req, 16'h0, 32'h0000_BEEF);
    @(negedge clk);
    check(mb_host_irq, "mailbox raises host interrupt");
    reg_rd(mh_req, mh_rsp, 16'h4, d32);
    check(d32 == 32'hBEEF, "host reads reply");
    if (d32 == 32'hBEEF) mech[17]++;

    // performance counters
    reg_rd(perf_req, perf_rsp, 16'h40, d32);
    ok = d32;
    reg_rd(perf_req, perf_rsp, 16'h44, d32);
    $display("perf: cycles %0d, DMA busy %0d", ok, d32);
    check(ok > 200 && d32 > 32 && d32 < ok, "cycle and DMA-busy counters");
    if (ok > 200 && d32 > 32) mech[13]++;

    // IOMMU: map VA page 0x4000_0000 to PA 0x3000 and enable translation
    reg_wr(io_req, 16'h100, 32'h4000_0000);
    reg_wr(io_req, 16'h104, 32'h0);
    reg_wr(io_req, 16'h108, 32'h0000_3000);
    reg_wr(io_req, 16'h10C, 32'h0);
    reg_wr(io_req, 16'h110, 32'h1);
    reg_wr(io_req, 16'h000, 32'h1);
    core_acc(5, 1'b0, 32'h4000_0010, 32'd0, d32);
    check(d32 == hmem[(16'h3010 >> 3)][31:0], "IOMMU translated load");
    if (d32 == hmem[(16'h3010 >> 3)][31:0]) mech[14]++;
    check(!io_irq, "no miss interrupt on a hit");
    core_acc(6, 1'b0, 32'h5000_0000, 32'd0, d32);
    @(negedge clk);
    reg_rd(io_req, io_rsp, 16'h008, d32);
    check(io_irq && d32 == 32'h5000_0000, "IOMMU miss recorded with interrupt");
    if (io_irq && d32 == 32'h5000_0000) mech[15]++;
    reg_wr(io_req, 16'h010, 32'h0);
    @(negedge clk);
    check(!io_irq, "miss queue drained");

    check(!dma_err, "no DMA error");

    for (int i = 0; i < NM; i++) begin
      $display("mechanism %-14s occurred %0d", mech_name[i], mech[i]);
      check(mech[i] > 0, mech_name[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
