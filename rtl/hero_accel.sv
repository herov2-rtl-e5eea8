// hero_accel: the HERO accelerator (top of this design).
//
// One cluster (hero_cluster: 8 cores' memory side, 128 KiB L1, DMA, shared
// instruction cache) plus the accelerator-level parts around it:
//  * the wide (DMA and instruction refills) and narrow (core remote
//    accesses, host access) 64-bit AXI networks, each an axi_xbar;
//  * the shared L2 scratchpad (l2_spm, 256 KiB), reachable from both
//    networks through an axi_mux;
//  * the IOMMU (iommu), through which every accelerator access to host
//    memory leaves (host_mem_req_o / host_mem_rsp_i), also reached from both
//    networks through an axi_mux;
//  * the mailbox (mailbox) between host and accelerator with an interrupt
//    each way.
//
// Address map (this design's choice, the paper gives none):
//   0x1000_0000 - 0x1003_FFFF  cluster L1 (128 KiB used)
//   0x1C00_0000 - 0x1C03_FFFF  L2 scratchpad (256 KiB)
//   everything else            host memory, translated by the IOMMU
// The wide network has no path to L1 (the DMA already sits at L1).
//
// Parts the paper names but which are not RTL of this design are ports:
// the RV32 cores (fetch, data and address-extension CSR ports), the host
// (host_req_i into the narrow network, mailbox, IOMMU and perf register
// ports, host memory behind the IOMMU). DMA descriptors come in on a port
// as the cores would issue them.
//
// AXI ids: each mux level shifts the id left and adds its input index,
// so ids at host_mem_req_o carry the path (at most 5 of the 8 bits used).
//
// The linter reports UNOPTFLAT (circular logic) here: it treats each array of
// request/response structs as one signal, although its elements are driven
// from different places. Valid never depends on ready here, so there is no
// combinational loop at bit level.
module hero_accel
  import hero_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 8,
  parameter int unsigned NUM_BANKS   = 16,
  parameter int unsigned BANK_WORDS  = 2048,
  parameter int unsigned L2_WORDS    = 32768,
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned MBOX_DEPTH  = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // cores (not part of this RTL)
  input  fetch_req_t  core_fetch_req_i [NUM_CORES],
  output fetch_rsp_t  core_fetch_rsp_o [NUM_CORES],
  input  logic        icache_flush_i,
  input  tcdm_req_t   core_data_req_i  [NUM_CORES],
  output tcdm_rsp_t   core_data_rsp_o  [NUM_CORES],
  input  logic        core_csr_we_i    [NUM_CORES],
  input  logic [31:0] core_csr_wdata_i [NUM_CORES],
  // DMA descriptors
  input  dma_cmd_t    dma_cmd_i,
  input  logic        dma_cmd_valid_i,
  output logic        dma_cmd_ready_o,
  output logic [31:0] dma_cmd_id_o,
  output logic [31:0] dma_done_cnt_o [2],
  output logic        dma_busy_o,
  output logic        dma_err_o,
  // register ports
  input  reg_req_t    perf_req_i,
  output reg_rsp_t    perf_rsp_o,
  input  reg_req_t    iommu_cfg_req_i,
  output reg_rsp_t    iommu_cfg_rsp_o,
  output logic        iommu_miss_irq_o,
  input  reg_req_t    mbox_host_req_i,
  output reg_rsp_t    mbox_host_rsp_o,
  input  reg_req_t    mbox_dev_req_i,
  output reg_rsp_t    mbox_dev_rsp_o,
  output logic        mbox_dev_irq_o,
  output logic        mbox_host_irq_o,
  // host side
  input  axi_req_t    host_req_i,
  output axi_rsp_t    host_rsp_o,
  output axi_req_t    host_mem_req_o,
  input  axi_rsp_t    host_mem_rsp_i
);
  // ------------------------------------------------------------- cluster
  axi_req_t cl_wide_req, cl_narrow_req, cl_slv_req;
  axi_rsp_t cl_wide_rsp, cl_narrow_rsp, cl_slv_rsp;

  hero_cluster #(
    .NUM_CORES(NUM_CORES), .NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS)
  ) i_cluster (
    .clk_i, .rst_ni,
    .core_fetch_req_i, .core_fetch_rsp_o, .icache_flush_i,
    .core_data_req_i, .core_data_rsp_o, .core_csr_we_i, .core_csr_wdata_i,
    .dma_cmd_i, .dma_cmd_valid_i, .dma_cmd_ready_o, .dma_cmd_id_o,
    .dma_done_cnt_o, .dma_busy_o, .dma_err_o,
    .perf_req_i, .perf_rsp_o,
    .wide_req_o   (cl_wide_req),
    .wide_rsp_i   (cl_wide_rsp),
    .narrow_req_o (cl_narrow_req),
    .narrow_rsp_i (cl_narrow_rsp),
    .slv_req_i    (cl_slv_req),
    .slv_rsp_o    (cl_slv_rsp)
  );

  // --------------------------------------------------------- wide network
  // slaves: [0] L2, [1] host (default)
  axi_req_t wx_mst_req [1];
  axi_rsp_t wx_mst_rsp [1];
  axi_req_t wx_slv_req [2];
  axi_rsp_t wx_slv_rsp [2];

  assign wx_mst_req[0] = cl_wide_req;
  assign cl_wide_rsp   = wx_mst_rsp[0];

  axi_xbar #(
    .NUM_MST(1), .NUM_SLV(2),
    .SLV_BASE({64'h0, 64'h1C00_0000}),
    .SLV_MASK({64'h0, 64'hFFFF_FFFF_FFFC_0000})
  ) i_wide_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (wx_mst_req),
    .mst_rsp_o (wx_mst_rsp),
    .slv_req_o (wx_slv_req),
    .slv_rsp_i (wx_slv_rsp)
  );

  // ------------------------------------------------------- narrow network
  // masters: [0] cluster, [1] host; slaves: [0] L1, [1] L2, [2] host
  axi_req_t nx_mst_req [2];
  axi_rsp_t nx_mst_rsp [2];
  axi_req_t nx_slv_req [3];
  axi_rsp_t nx_slv_rsp [3];

  assign nx_mst_req[0] = cl_narrow_req;
  assign cl_narrow_rsp = nx_mst_rsp[0];
  assign nx_mst_req[1] = host_req_i;
  assign host_rsp_o    = nx_mst_rsp[1];

  axi_xbar #(.NUM_MST(2), .NUM_SLV(3)) i_narrow_xbar (
    .clk_i, .rst_ni,
    .mst_req_i (nx_mst_req),
    .mst_rsp_o (nx_mst_rsp),
    .slv_req_o (nx_slv_req),
    .slv_rsp_i (nx_slv_rsp)
  );

  assign cl_slv_req    = nx_slv_req[0];
  assign nx_slv_rsp[0] = cl_slv_rsp;

  // ------------------------------------------------------------------ L2
  axi_req_t l2_in_req [2];
  axi_rsp_t l2_in_rsp [2];
  axi_req_t l2_req;
  axi_rsp_t l2_rsp;

  assign l2_in_req[0]  = wx_slv_req[0];
  assign wx_slv_rsp[0] = l2_in_rsp[0];
  assign l2_in_req[1]  = nx_slv_req[1];
  assign nx_slv_rsp[1] = l2_in_rsp[1];

  axi_mux #(.NUM_IN(2)) i_l2_mux (
    .clk_i, .rst_ni,
    .in_req_i  (l2_in_req),
    .in_rsp_o  (l2_in_rsp),
    .out_req_o (l2_req),
    .out_rsp_i (l2_rsp)
  );

  l2_spm #(.WORDS(L2_WORDS)) i_l2 (
    .clk_i, .rst_ni,
    .axi_req_i (l2_req),
    .axi_rsp_o (l2_rsp)
  );

  // ---------------------------------------------------------------- IOMMU
  axi_req_t io_in_req [2];
  axi_rsp_t io_in_rsp [2];
  axi_req_t io_req;
  axi_rsp_t io_rsp;

  assign io_in_req[0]  = wx_slv_req[1];
  assign wx_slv_rsp[1] = io_in_rsp[0];
  assign io_in_req[1]  = nx_slv_req[2];
  assign nx_slv_rsp[2] = io_in_rsp[1];

  axi_mux #(.NUM_IN(2)) i_host_mux (
    .clk_i, .rst_ni,
    .in_req_i  (io_in_req),
    .in_rsp_o  (io_in_rsp),
    .out_req_o (io_req),
    .out_rsp_i (io_rsp)
  );

  iommu #(.TLB_ENTRIES(TLB_ENTRIES)) i_iommu (
    .clk_i, .rst_ni,
    .slv_req_i  (io_req),
    .slv_rsp_o  (io_rsp),
    .mst_req_o  (host_mem_req_o),
    .mst_rsp_i  (host_mem_rsp_i),
    .cfg_req_i  (iommu_cfg_req_i),
    .cfg_rsp_o  (iommu_cfg_rsp_o),
    .miss_irq_o (iommu_miss_irq_o)
  );

  // -------------------------------------------------------------- mailbox
  mailbox #(.DEPTH(MBOX_DEPTH)) i_mbox (
    .clk_i, .rst_ni,
    .host_req_i (mbox_host_req_i),
    .host_rsp_o (mbox_host_rsp_o),
    .dev_req_i  (mbox_dev_req_i),
    .dev_rsp_o  (mbox_dev_rsp_o),
    .dev_irq_o  (mbox_dev_irq_o),
    .host_irq_o (mbox_host_irq_o)
  );
endmodule
