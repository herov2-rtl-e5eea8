// tcdm_interconnect: single-cycle crossbar from the cluster's masters to
// the banks of the L1 scratchpad (tightly-coupled data memory, TCDM).
//
// Banks are word-interleaved: byte address bits [BW+1:2] pick the bank and
// the bits above them the row, so consecutive words fall into consecutive
// banks and linear streams from different masters rarely collide. Each bank
// has a round-robin arbiter. A master's request is granted in the same cycle
// (req -> bank arbiter -> gnt is one combinational path, the critical path
// the paper reports for the FPGA prototype); read data and rvalid follow in
// the next cycle. A master that is not granted keeps its request and retries.
//
// Interface: NUM_MST tcdm_req_t/tcdm_rsp_t pairs on the master side, and
// NUM_BANKS plain SRAM ports (bank_*) on the memory side, to be connected to
// l1_spm_bank instances. Address bits above the L1 size are ignored; the
// caller only sends L1 addresses here.
//
// 14 masters x 16 banks is the paper's figure for the 64-bit configuration
// (8 cores, 4 DMA ports, 2 ports of the AXI slave into L1, by this design's
// reading). Interleaving and round-robin arbitration are this design's choice.
//
// The linter reports UNOPTFLAT (circular logic) here: it treats each array of
// request/response structs as one signal, although its elements are driven
// from different places. Valid never depends on ready here, so there is no
// combinational loop at bit level.
module tcdm_interconnect
  import hero_pkg::*;
#(
  parameter int unsigned NUM_MST    = 14,
  parameter int unsigned NUM_BANKS  = 16,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  tcdm_req_t                     mst_req_i [NUM_MST],
  output tcdm_rsp_t                     mst_rsp_o [NUM_MST],
  output logic                          bank_req_o   [NUM_BANKS],
  output logic                          bank_we_o    [NUM_BANKS],
  output logic [$clog2(BANK_WORDS)-1:0] bank_addr_o  [NUM_BANKS],
  output logic [31:0]                   bank_wdata_o [NUM_BANKS],
  output logic [3:0]                    bank_be_o    [NUM_BANKS],
  input  logic [31:0]                   bank_rdata_i [NUM_BANKS]
);
  localparam int unsigned BW = $clog2(NUM_BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned MW = $clog2(NUM_MST);

  logic [NUM_MST-1:0] bank_sel [NUM_BANKS];
  logic [NUM_MST-1:0] bank_gnt [NUM_BANKS];
  logic [MW-1:0]      bank_idx [NUM_BANKS];
  logic               bank_vld [NUM_BANKS];

  // which bank each master addresses
  logic [BW-1:0] mst_bank [NUM_MST];
  always_comb begin
    for (int m = 0; m < NUM_MST; m++) mst_bank[m] = mst_req_i[m].addr[2 +: BW];
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    always_comb begin
      for (int m = 0; m < NUM_MST; m++)
        bank_sel[b][m] = mst_req_i[m].req && (mst_bank[m] == BW'(b));
    end

    hero_rr_arb #(.N(NUM_MST)) i_arb (
      .clk_i, .rst_ni,
      .req_i     (bank_sel[b]),
      .advance_i (1'b1),
      .gnt_o     (bank_gnt[b]),
      .idx_o     (bank_idx[b]),
      .valid_o   (bank_vld[b])
    );

    always_comb begin
      bank_req_o[b]   = bank_vld[b];
      bank_we_o[b]    = mst_req_i[bank_idx[b]].we;
      bank_addr_o[b]  = mst_req_i[bank_idx[b]].addr[2+BW +: RW];
      bank_wdata_o[b] = mst_req_i[bank_idx[b]].wdata;
      bank_be_o[b]    = mst_req_i[bank_idx[b]].be;
    end
  end

  // response path: remember which bank served each master's read
  logic          rd_pend_q [NUM_MST];
  logic [BW-1:0] rd_bank_q [NUM_MST];

  always_comb begin
    for (int m = 0; m < NUM_MST; m++) begin
      mst_rsp_o[m].gnt    = bank_gnt[mst_bank[m]][m];
      mst_rsp_o[m].rvalid = rd_pend_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rd_bank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int m = 0; m < NUM_MST; m++) begin
        rd_pend_q[m] <= 1'b0;
        rd_bank_q[m] <= '0;
      end
    end else begin
      for (int m = 0; m < NUM_MST; m++) begin
        rd_pend_q[m] <= mst_rsp_o[m].gnt && !mst_req_i[m].we;
        if (mst_rsp_o[m].gnt) rd_bank_q[m] <= mst_bank[m];
      end
    end
  end

  // a grant only ever answers a request
  for (genvar m = 0; m < NUM_MST; m++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     mst_rsp_o[m].gnt |-> mst_req_i[m].req);
  end
endmodule
