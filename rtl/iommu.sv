// iommu: the hybrid, software-managed IOMMU between the accelerator and
// the host's system interconnect.
//
// Its core is a fully-associative TLB of TLB_ENTRIES entries, each mapping
// one 4 KiB virtual page of the host application to a physical page, with a
// read-only flag. The TLB is filled by software (the accelerator's own
// virtual-memory library walks the host page table) through the cfg port;
// the hardware never walks page tables, which is what makes it "hybrid".
//
// Each AXI channel (AR, AW) holds one request in a register, looks it up in
// the cycle after it was accepted and then forwards it with the physical
// address; this costs one cycle per burst. With enable = 0 addresses pass
// untranslated (physically contiguous buffers, no shared virtual memory).
// On a miss, or a write to a read-only page, nothing is forwarded: once all
// earlier bursts of that channel have been answered (to keep AXI ordering),
// the IOMMU answers the burst itself with SLVERR (all read beats, or one B
// after swallowing the W beats), and records the virtual address in a miss
// queue for the miss handler.
//
// cfg register map (reg_req_t, single cycle):
//   0x000 CTRL      bit 0 enable translation
//   0x004 MISS_STAT bit 0 miss queue not empty, [15:8] fill level
//   0x008 MISS_LO / 0x00C MISS_HI  oldest missing virtual address
//   0x010 write: drop the oldest miss
//   0x100 + 32*i + {0x0, 0x4, 0x8, 0xC, 0x10}: entry i VA_LO, VA_HI,
//         PA_LO, PA_HI (page-aligned), FLAGS (bit 0 valid, bit 1 read-only)
// The paper gives the principle (TLB managed by the accelerator, misses
// handled in software, read-only page table access); entry count, page size,
// error signalling and the register map are this design's.
module iommu
  import hero_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned MISS_DEPTH  = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i,
  input  reg_req_t cfg_req_i,
  output reg_rsp_t cfg_rsp_o,
  output logic     miss_irq_o
);
  localparam int unsigned PB = 12;
  localparam int unsigned PN = 64 - PB;

  // ------------------------------------------------------------------ TLB
  logic          en_q;
  logic          v_q  [TLB_ENTRIES];
  logic          ro_q [TLB_ENTRIES];
  logic [PN-1:0] vpn_q [TLB_ENTRIES];
  logic [PN-1:0] ppn_q [TLB_ENTRIES];

  typedef struct packed {
    logic          hit;
    logic          ro;
    logic [63:0]   pa;
  } xlate_t;

  function automatic xlate_t lookup(logic [63:0] va);
    xlate_t x;
    x = '0;
    if (!en_q) begin
      x.hit = 1'b1;
      x.pa  = va;
    end else begin
      for (int i = 0; i < TLB_ENTRIES; i++) begin
        if (!x.hit && v_q[i] && vpn_q[i] == va[63:PB]) begin
          x.hit = 1'b1;
          x.ro  = ro_q[i];
          x.pa  = {ppn_q[i], va[PB-1:0]};
        end
      end
    end
    return x;
  endfunction

  // --------------------------------------------------------- read channel
  typedef enum logic [1:0] {R_IDLE, R_LOOK, R_FWD, R_ERR} rst_e;
  rst_e          rs_q;
  axi_ax_t       ar_q;
  xlate_t        ar_x;
  logic [8:0]    rerr_q;
  logic [15:0]   rd_out_q;   // forwarded bursts not yet answered
  logic          rd_miss;

  assign ar_x = lookup(ar_q.addr);

  // --------------------------------------------------------- write channel
  typedef enum logic [2:0] {W_IDLE, W_LOOK, W_FWD, W_DATA, W_DROP, W_BERR} wst_e;
  wst_e          ws_q;
  axi_ax_t       aw_q;
  xlate_t        aw_x;
  logic [15:0]   wr_out_q;
  logic          wr_miss;

  assign aw_x = lookup(aw_q.addr);

  assign rd_miss = (rs_q == R_LOOK) && !ar_x.hit;
  assign wr_miss = (ws_q == W_LOOK) && (!aw_x.hit || aw_x.ro);

  // ------------------------------------------------------------- datapath
  logic r_err_fire, r_fwd_fire, b_fwd_fire;

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.ar       = ar_q;
    mst_req_o.ar.addr  = ar_x.pa;
    mst_req_o.ar_valid = (rs_q == R_FWD);
    mst_req_o.aw       = aw_q;
    mst_req_o.aw.addr  = aw_x.pa;
    mst_req_o.aw_valid = (ws_q == W_FWD);
    mst_req_o.w        = slv_req_i.w;
    mst_req_o.w_valid  = (ws_q == W_DATA) && slv_req_i.w_valid;
    mst_req_o.r_ready  = slv_req_i.r_ready;
    mst_req_o.b_ready  = slv_req_i.b_ready;

    slv_rsp_o          = '0;
    slv_rsp_o.ar_ready = (rs_q == R_IDLE);
    slv_rsp_o.aw_ready = (ws_q == W_IDLE);
    slv_rsp_o.w_ready  = ((ws_q == W_DATA) && mst_rsp_i.w_ready) || (ws_q == W_DROP);
    // downstream responses have priority; an error burst only starts when
    // nothing is outstanding, so the two never interleave
    if (mst_rsp_i.r_valid) begin
      slv_rsp_o.r       = mst_rsp_i.r;
      slv_rsp_o.r_valid = 1'b1;
    end else if (rs_q == R_ERR && rd_out_q == 0) begin
      slv_rsp_o.r.id    = ar_q.id;
      slv_rsp_o.r.resp  = RESP_SLVERR;
      slv_rsp_o.r.last  = (rerr_q == 9'd1);
      slv_rsp_o.r_valid = 1'b1;
    end
    if (mst_rsp_i.b_valid) begin
      slv_rsp_o.b       = mst_rsp_i.b;
      slv_rsp_o.b_valid = 1'b1;
    end else if (ws_q == W_BERR && wr_out_q == 0) begin
      slv_rsp_o.b.id    = aw_q.id;
      slv_rsp_o.b.resp  = RESP_SLVERR;
      slv_rsp_o.b_valid = 1'b1;
    end
  end

  assign r_fwd_fire = mst_rsp_i.r_valid && slv_req_i.r_ready && mst_rsp_i.r.last;
  assign r_err_fire = !mst_rsp_i.r_valid && (rs_q == R_ERR) && (rd_out_q == 0) && slv_req_i.r_ready;
  assign b_fwd_fire = mst_rsp_i.b_valid && slv_req_i.b_ready;

  // miss queue
  logic        mq_full, mq_empty;
  logic [63:0] mq_head;
  logic [2:0]  mq_cnt_unused;
  logic [$clog2(MISS_DEPTH+1)-1:0] mq_cnt;
  logic        mq_pop;

  assign mq_pop = cfg_req_i.valid && cfg_req_i.write && cfg_req_i.addr == 16'h010;

  hero_fifo #(.WIDTH(64), .DEPTH(MISS_DEPTH)) i_missq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i (rd_miss || wr_miss),
    .data_i (rd_miss ? ar_q.addr : aw_q.addr),
    .pop_i  (mq_pop),
    .data_o (mq_head), .full_o(mq_full), .empty_o(mq_empty), .count_o(mq_cnt)
  );
  assign miss_irq_o    = !mq_empty;
  assign mq_cnt_unused = '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rs_q     <= R_IDLE;
      ws_q     <= W_IDLE;
      ar_q     <= '0;
      aw_q     <= '0;
      rerr_q   <= '0;
      rd_out_q <= '0;
      wr_out_q <= '0;
    end else begin
      // read FSM
      unique case (rs_q)
        R_IDLE: if (slv_req_i.ar_valid) begin ar_q <= slv_req_i.ar; rs_q <= R_LOOK; end
        R_LOOK: begin
          if (ar_x.hit) rs_q <= R_FWD;
          else begin rs_q <= R_ERR; rerr_q <= 9'(ar_q.len) + 9'd1; end
        end
        R_FWD:  if (mst_rsp_i.ar_ready) rs_q <= R_IDLE;
        R_ERR:  if (r_err_fire) begin
                  rerr_q <= rerr_q - 1'b1;
                  if (rerr_q == 9'd1) rs_q <= R_IDLE;
                end
        default: rs_q <= R_IDLE;
      endcase
      rd_out_q <= rd_out_q + 16'((rs_q == R_FWD) && mst_rsp_i.ar_ready) - 16'(r_fwd_fire);

      // write FSM
      unique case (ws_q)
        W_IDLE: if (slv_req_i.aw_valid) begin aw_q <= slv_req_i.aw; ws_q <= W_LOOK; end
        W_LOOK: ws_q <= wr_miss ? W_DROP : W_FWD;
        W_FWD:  if (mst_rsp_i.aw_ready) ws_q <= W_DATA;
        W_DATA: if (slv_req_i.w_valid && mst_rsp_i.w_ready && slv_req_i.w.last) ws_q <= W_IDLE;
        W_DROP: if (slv_req_i.w_valid && slv_req_i.w.last) ws_q <= W_BERR;
        W_BERR: if (!mst_rsp_i.b_valid && wr_out_q == 0 && slv_req_i.b_ready) ws_q <= W_IDLE;
        default: ws_q <= W_IDLE;
      endcase
      wr_out_q <= wr_out_q + 16'((ws_q == W_FWD) && mst_rsp_i.aw_ready) - 16'(b_fwd_fire);
    end
  end

  // ------------------------------------------------------- configuration
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= 1'b0;
      for (int i = 0; i < TLB_ENTRIES; i++) begin
        v_q[i]   <= 1'b0;
        ro_q[i]  <= 1'b0;
        vpn_q[i] <= '0;
        ppn_q[i] <= '0;
      end
    end else if (cfg_req_i.valid && cfg_req_i.write) begin
      if (cfg_req_i.addr == 16'h000) en_q <= cfg_req_i.wdata[0];
      for (int i = 0; i < TLB_ENTRIES; i++) begin
        if (cfg_req_i.addr == 16'(16'h100 + 32*i))        vpn_q[i][19:0]  <= cfg_req_i.wdata[31:PB];
        if (cfg_req_i.addr == 16'(16'h100 + 32*i + 4))    vpn_q[i][PN-1:20] <= cfg_req_i.wdata;
        if (cfg_req_i.addr == 16'(16'h100 + 32*i + 8))    ppn_q[i][19:0]  <= cfg_req_i.wdata[31:PB];
        if (cfg_req_i.addr == 16'(16'h100 + 32*i + 12))   ppn_q[i][PN-1:20] <= cfg_req_i.wdata;
        if (cfg_req_i.addr == 16'(16'h100 + 32*i + 16)) begin
          v_q[i]  <= cfg_req_i.wdata[0];
          ro_q[i] <= cfg_req_i.wdata[1];
        end
      end
    end
  end

  always_comb begin
    cfg_rsp_o.rdata = '0;
    unique case (cfg_req_i.addr)
      16'h000: cfg_rsp_o.rdata = {31'd0, en_q};
      16'h004: cfg_rsp_o.rdata = {16'd0, 8'(mq_cnt), 7'd0, !mq_empty};
      16'h008: cfg_rsp_o.rdata = mq_head[31:0];
      16'h00C: cfg_rsp_o.rdata = mq_head[63:32];
      default: ;
    endcase
    for (int i = 0; i < TLB_ENTRIES; i++) begin
      if (cfg_req_i.addr == 16'(16'h100 + 32*i))      cfg_rsp_o.rdata = {vpn_q[i][19:0], 12'd0};
      if (cfg_req_i.addr == 16'(16'h100 + 32*i + 4))  cfg_rsp_o.rdata = vpn_q[i][PN-1:20];
      if (cfg_req_i.addr == 16'(16'h100 + 32*i + 8))  cfg_rsp_o.rdata = {ppn_q[i][19:0], 12'd0};
      if (cfg_req_i.addr == 16'(16'h100 + 32*i + 12)) cfg_rsp_o.rdata = ppn_q[i][PN-1:20];
      if (cfg_req_i.addr == 16'(16'h100 + 32*i + 16)) cfg_rsp_o.rdata = {30'd0, ro_q[i], v_q[i]};
    end
  end

  // a full miss queue loses the address, not the error response
  logic unused;
  assign unused = ^{mq_full, mq_cnt_unused};
endmodule
