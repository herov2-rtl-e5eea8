// hero_cluster: one accelerator cluster.
//
// What is inside (the right half of the accelerator block diagram):
//  * per core: an L0 instruction buffer (l0_icache) in front of the
//    cluster-shared instruction cache, and an addr_ext unit that holds the
//    address-extension CSR and sends each data access either to L1 or, as a
//    64-bit-address AXI access, to the narrow network;
//  * the L1 data scratchpad: NUM_BANKS l1_spm_bank instances behind the
//    single-cycle tcdm_interconnect. Its masters are numbered
//    0..NUM_CORES-1 cores, then 4 DMA ports, then 2 ports of the AXI slave;
//  * the DMA engine (dma_engine), which shares the wide AXI port with the
//    instruction-cache refills through an axi_mux;
//  * the AXI slave (axi_to_tcdm) through which the host or the narrow
//    network reads and writes L1;
//  * performance counters (perf_counters) with the events
//    0 cycles, 1 L1 contention (a core request not granted), 2 shared
//    instruction-cache misses, 3 DMA busy, 4 remote core accesses in
//    flight, 5 L0 misses.
// The RV32 cores and their FPUs are not part of this RTL: their instruction
// fetch, data and CSR ports are ports of the cluster.
//
// L1 is mapped at L1_BASE (0x1000_0000 by default) and is 128 KiB (16 banks
// x 2048 words) as in the evaluated configuration; all cores see it at the
// same address. The address map is this design's choice.
module hero_cluster
  import hero_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 8,
  parameter int unsigned NUM_BANKS  = 16,
  parameter int unsigned BANK_WORDS = 2048,
  parameter logic [31:0] L1_BASE    = 32'h1000_0000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // cores
  input  fetch_req_t  core_fetch_req_i [NUM_CORES],
  output fetch_rsp_t  core_fetch_rsp_o [NUM_CORES],
  input  logic        icache_flush_i,
  input  tcdm_req_t   core_data_req_i  [NUM_CORES],
  output tcdm_rsp_t   core_data_rsp_o  [NUM_CORES],
  input  logic        core_csr_we_i    [NUM_CORES],
  input  logic [31:0] core_csr_wdata_i [NUM_CORES],
  // DMA descriptor port
  input  dma_cmd_t    dma_cmd_i,
  input  logic        dma_cmd_valid_i,
  output logic        dma_cmd_ready_o,
  output logic [31:0] dma_cmd_id_o,
  output logic [31:0] dma_done_cnt_o [2],
  output logic        dma_busy_o,
  output logic        dma_err_o,
  // performance counters
  input  reg_req_t    perf_req_i,
  output reg_rsp_t    perf_rsp_o,
  // networks
  output axi_req_t    wide_req_o,
  input  axi_rsp_t    wide_rsp_i,
  output axi_req_t    narrow_req_o,
  input  axi_rsp_t    narrow_rsp_i,
  input  axi_req_t    slv_req_i,
  output axi_rsp_t    slv_rsp_o
);
  localparam int unsigned NUM_MST = NUM_CORES + 4 + 2;
  localparam int unsigned RW      = $clog2(BANK_WORDS);

  // ----------------------------------------------------------- L1 memory
  tcdm_req_t tcdm_req [NUM_MST];
  tcdm_rsp_t tcdm_rsp [NUM_MST];

  logic          bank_req   [NUM_BANKS];
  logic          bank_we    [NUM_BANKS];
  logic [RW-1:0] bank_addr  [NUM_BANKS];
  logic [31:0]   bank_wdata [NUM_BANKS];
  logic [3:0]    bank_be    [NUM_BANKS];
  logic [31:0]   bank_rdata [NUM_BANKS];

  tcdm_interconnect #(
    .NUM_MST(NUM_MST), .NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS)
  ) i_tcdm_ic (
    .clk_i, .rst_ni,
    .mst_req_i    (tcdm_req),
    .mst_rsp_o    (tcdm_rsp),
    .bank_req_o   (bank_req),
    .bank_we_o    (bank_we),
    .bank_addr_o  (bank_addr),
    .bank_wdata_o (bank_wdata),
    .bank_be_o    (bank_be),
    .bank_rdata_i (bank_rdata)
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    l1_spm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i,
      .req_i   (bank_req[b]),
      .we_i    (bank_we[b]),
      .addr_i  (bank_addr[b]),
      .wdata_i (bank_wdata[b]),
      .be_i    (bank_be[b]),
      .rdata_o (bank_rdata[b])
    );
  end

  // ------------------------------------------------------------- cores
  fetch_req_t l0_l1_req [NUM_CORES];
  fetch_rsp_t l0_l1_rsp [NUM_CORES];
  axi_req_t   core_axi_req [NUM_CORES];
  axi_rsp_t   core_axi_rsp [NUM_CORES];
  logic [NUM_CORES-1:0] l0_miss, remote_busy, core_stall;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    l0_icache i_l0 (
      .clk_i, .rst_ni,
      .flush_i    (icache_flush_i),
      .core_req_i (core_fetch_req_i[c]),
      .core_rsp_o (core_fetch_rsp_o[c]),
      .miss_o     (l0_miss[c]),
      .l1_req_o   (l0_l1_req[c]),
      .l1_rsp_i   (l0_l1_rsp[c])
    );

    addr_ext #(.L1_BASE(L1_BASE), .L1_SIZE(NUM_BANKS * BANK_WORDS * 4)) i_addr_ext (
      .clk_i, .rst_ni,
      .core_req_i    (core_data_req_i[c]),
      .core_rsp_o    (core_data_rsp_o[c]),
      .csr_we_i      (core_csr_we_i[c]),
      .csr_wdata_i   (core_csr_wdata_i[c]),
      .csr_o         (),
      .remote_busy_o (remote_busy[c]),
      .tcdm_req_o    (tcdm_req[c]),
      .tcdm_rsp_i    (tcdm_rsp[c]),
      .axi_req_o     (core_axi_req[c]),
      .axi_rsp_i     (core_axi_rsp[c])
    );
    assign core_stall[c] = tcdm_req[c].req && !tcdm_rsp[c].gnt;
  end

  // narrow network: the cores' remote accesses
  axi_mux #(.NUM_IN(NUM_CORES)) i_narrow_mux (
    .clk_i, .rst_ni,
    .in_req_i  (core_axi_req),
    .in_rsp_o  (core_axi_rsp),
    .out_req_o (narrow_req_o),
    .out_rsp_i (narrow_rsp_i)
  );

  // ---------------------------------------------------- instruction path
  axi_req_t wide_in_req [2];
  axi_rsp_t wide_in_rsp [2];
  logic     ic_miss;

  icache_shared #(.NUM_PORTS(NUM_CORES)) i_icache (
    .clk_i, .rst_ni,
    .flush_i     (icache_flush_i),
    .fetch_req_i (l0_l1_req),
    .fetch_rsp_o (l0_l1_rsp),
    .miss_o      (ic_miss),
    .axi_req_o   (wide_in_req[1]),
    .axi_rsp_i   (wide_in_rsp[1])
  );

  // ---------------------------------------------------------------- DMA
  tcdm_req_t dma_tcdm_req [4];
  tcdm_rsp_t dma_tcdm_rsp [4];

  dma_engine i_dma (
    .clk_i, .rst_ni,
    .cmd_i       (dma_cmd_i),
    .cmd_valid_i (dma_cmd_valid_i),
    .cmd_ready_o (dma_cmd_ready_o),
    .cmd_id_o    (dma_cmd_id_o),
    .done_cnt_o  (dma_done_cnt_o),
    .busy_o      (dma_busy_o),
    .err_o       (dma_err_o),
    .tcdm_req_o  (dma_tcdm_req),
    .tcdm_rsp_i  (dma_tcdm_rsp),
    .axi_req_o   (wide_in_req[0]),
    .axi_rsp_i   (wide_in_rsp[0])
  );

  for (genvar p = 0; p < 4; p++) begin : g_dma_port
    assign tcdm_req[NUM_CORES + p] = dma_tcdm_req[p];
    assign dma_tcdm_rsp[p]         = tcdm_rsp[NUM_CORES + p];
  end

  axi_mux #(.NUM_IN(2)) i_wide_mux (
    .clk_i, .rst_ni,
    .in_req_i  (wide_in_req),
    .in_rsp_o  (wide_in_rsp),
    .out_req_o (wide_req_o),
    .out_rsp_i (wide_rsp_i)
  );

  // ------------------------------------------------------- AXI slave port
  tcdm_req_t slv_tcdm_req [2];
  tcdm_rsp_t slv_tcdm_rsp [2];

  axi_to_tcdm i_slv (
    .clk_i, .rst_ni,
    .axi_req_i  (slv_req_i),
    .axi_rsp_o  (slv_rsp_o),
    .tcdm_req_o (slv_tcdm_req),
    .tcdm_rsp_i (slv_tcdm_rsp)
  );

  for (genvar p = 0; p < 2; p++) begin : g_slv_port
    assign tcdm_req[NUM_CORES + 4 + p] = slv_tcdm_req[p];
    assign slv_tcdm_rsp[p]             = tcdm_rsp[NUM_CORES + 4 + p];
  end

  // -------------------------------------------------- performance counters
  logic [7:0] evt;
  assign evt = {2'b00, |l0_miss, |remote_busy, dma_busy_o, ic_miss, |core_stall, 1'b1};

  perf_counters #(.NUM_CNT(4), .NUM_EVT(8)) i_perf (
    .clk_i, .rst_ni,
    .evt_i     (evt),
    .cfg_req_i (perf_req_i),
    .cfg_rsp_o (perf_rsp_o)
  );
endmodule
