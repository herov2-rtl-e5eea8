// dma_engine: the cluster's DMA engine, moving data between the L1
// scratchpad and any 64-bit address over the wide AXI network.
//
// How it works. A transfer is described by a dma_cmd_t: direction, external
// 64-bit address, L1 address, row length in bytes, number of rows and a
// stride per side (one row = a plain 1D copy, several rows = 2D gather or
// scatter). The engine has two independent channels, so it runs full duplex:
//  * host2dev: a burst generator issues AR bursts ahead of the data, up to
//    MAX_OUTSTANDING of them; each 64-bit R beat is split into two 32-bit
//    words that two L1 write ports (tcdm_req_o[0..1]) store independently.
//  * dev2host: a burst generator issues AW bursts; two L1 read ports
//    (tcdm_req_o[2..3]) fetch the low and high word of every beat, each into
//    its own small queue, and W beats are formed when both queues hold data.
//    B responses are counted against the bursts.
// Without L1 contention and with a ready AXI slave each channel moves one
// 64-bit beat per cycle.
//
// Interface. cmd_valid_i/cmd_ready_o take a descriptor; in that cycle
// cmd_id_o shows its transfer id, {direction, 31-bit sequence number}. Per
// direction, done_cnt_o counts completed transfers, which complete in order
// within a direction, so transfer (d, n) is done once done_cnt_o[d] > n.
// A host2dev transfer is complete when its last word is written into L1, a
// dev2host one when its last write response has arrived. err_o is sticky on
// any error response. The AXI ids are 0 for both channels.
//
// From the paper: the engine addresses the full 64-bit space, runs full
// duplex, keeps many bursts outstanding, executes 2D transfers in hardware
// and returns transfer ids to wait on. This design's own choices: the
// descriptor port (the paper programs the engine through memory-mapped
// registers), queue depths, 16-beat bursts, 8-byte alignment and in-order
// completion per direction.
//
// The linter reports UNOPTFLAT (circular logic) here: it treats each array of
// request/response structs as one signal, although its elements are driven
// from different places. Valid never depends on ready here, so there is no
// combinational loop at bit level.
module dma_engine
  import hero_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 16,
  parameter int unsigned MAX_BURST_BEATS = 16,
  parameter int unsigned CMD_DEPTH       = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  dma_cmd_t    cmd_i,
  input  logic        cmd_valid_i,
  output logic        cmd_ready_o,
  output logic [31:0] cmd_id_o,
  output logic [31:0] done_cnt_o [2],
  output logic        busy_o,
  output logic        err_o,
  output tcdm_req_t   tcdm_req_o [4],
  input  tcdm_rsp_t   tcdm_rsp_i [4],
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i
);
  localparam int unsigned CMD_W  = $bits(dma_cmd_t);
  localparam int unsigned INFO_W = 32 + 9 + 1;   // loc, beats, last
  localparam int unsigned QD     = 4;            // per-port word queues

  // ---------------------------------------------------------------- front
  logic [30:0] seq_q [2];
  logic        cq_full [2], cq_empty [2];
  logic [CMD_W-1:0] cq_data [2];
  logic        cq_pop [2];
  logic        bg_busy [2];

  assign cmd_ready_o = !cq_full[cmd_i.dir];
  assign cmd_id_o    = {cmd_i.dir, seq_q[cmd_i.dir]};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      seq_q[0] <= '0;
      seq_q[1] <= '0;
    end else if (cmd_valid_i && cmd_ready_o) begin
      seq_q[cmd_i.dir] <= seq_q[cmd_i.dir] + 1'b1;
    end
  end

  // burst generator outputs
  logic        bg_valid [2], bg_ready [2], bg_last [2];
  logic [63:0] bg_ext [2];
  logic [31:0] bg_loc [2];
  logic [8:0]  bg_beats [2];

  for (genvar d = 0; d < 2; d++) begin : g_dir
    hero_fifo #(.WIDTH(CMD_W), .DEPTH(CMD_DEPTH)) i_cmdq (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i  (cmd_valid_i && (cmd_i.dir == dma_dir_e'(d))),
      .data_i  (cmd_i),
      .pop_i   (cq_pop[d]),
      .data_o  (cq_data[d]),
      .full_o  (cq_full[d]),
      .empty_o (cq_empty[d]),
      .count_o ()
    );

    dma_burst_gen #(.MAX_BURST_BEATS(MAX_BURST_BEATS)) i_bg (
      .clk_i, .rst_ni,
      .cmd_i         (dma_cmd_t'(cq_data[d])),
      .cmd_valid_i   (!cq_empty[d]),
      .cmd_pop_o     (cq_pop[d]),
      .burst_valid_o (bg_valid[d]),
      .burst_ready_i (bg_ready[d]),
      .burst_ext_o   (bg_ext[d]),
      .burst_loc_o   (bg_loc[d]),
      .burst_beats_o (bg_beats[d]),
      .burst_last_o  (bg_last[d]),
      .busy_o        (bg_busy[d])
    );
  end

  // ------------------------------------------------------ host2dev (read)
  logic              rb_full, rb_empty;
  logic [INFO_W-1:0] rb_data;
  logic [31:0]       rb_loc;
  logic [8:0]        rb_beats;
  logic              rb_last;
  logic [8:0]        r_beat_q;
  logic              r_take;

  assign bg_ready[0] = axi_rsp_i.ar_ready && !rb_full;
  assign {rb_loc, rb_beats, rb_last} = rb_data;

  hero_fifo #(.WIDTH(INFO_W), .DEPTH(MAX_OUTSTANDING)) i_rbursts (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i  (bg_valid[0] && bg_ready[0]),
    .data_i  ({bg_loc[0], bg_beats[0], bg_last[0]}),
    .pop_i   (r_take && axi_rsp_i.r.last),
    .data_o  (rb_data),
    .full_o  (rb_full),
    .empty_o (rb_empty),
    .count_o ()
  );

  // two write queues: {last-of-transfer, addr, data}
  localparam int unsigned WQ_W = 1 + 32 + 32;
  logic            wq_full [2], wq_empty [2];
  logic [WQ_W-1:0] wq_data [2];
  logic [31:0]     done_port_q [2];
  logic            r_xfer_last;

  assign r_xfer_last = rb_last && (r_beat_q == rb_beats - 1'b1);
  assign r_take      = axi_rsp_i.r_valid && !rb_empty && !wq_full[0] && !wq_full[1];

  for (genvar p = 0; p < 2; p++) begin : g_wq
    logic [31:0] waddr;
    assign waddr = rb_loc + {r_beat_q, 3'b000} + 32'(4 * p);
    hero_fifo #(.WIDTH(WQ_W), .DEPTH(QD)) i_wq (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i  (r_take),
      .data_i  ({r_xfer_last, waddr, axi_rsp_i.r.data[32*p +: 32]}),
      .pop_i   (tcdm_rsp_i[p].gnt),
      .data_o  (wq_data[p]),
      .full_o  (wq_full[p]),
      .empty_o (wq_empty[p]),
      .count_o ()
    );
    always_comb begin
      tcdm_req_o[p].req   = !wq_empty[p];
      tcdm_req_o[p].we    = 1'b1;
      tcdm_req_o[p].addr  = wq_data[p][63:32];
      tcdm_req_o[p].wdata = wq_data[p][31:0];
      tcdm_req_o[p].be    = 4'hF;
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) done_port_q[p] <= '0;
      else if (tcdm_rsp_i[p].gnt && wq_data[p][64]) done_port_q[p] <= done_port_q[p] + 1'b1;
    end
  end

  assign done_cnt_o[0] = (done_port_q[0] < done_port_q[1]) ? done_port_q[0] : done_port_q[1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) r_beat_q <= '0;
    else if (r_take) r_beat_q <= axi_rsp_i.r.last ? '0 : r_beat_q + 1'b1;
  end

  // ----------------------------------------------------- dev2host (write)
  logic              wb_full, wb_empty, bb_full, bb_empty, bb_last;
  logic [INFO_W-1:0] wb_data;
  logic [31:0]       wb_loc;
  logic [8:0]        wb_beats;
  logic              wb_last_unused;
  logic [31:0]       done_out_q;
  logic              rd_adv, rd_beat_last;

  assign bg_ready[1] = axi_rsp_i.aw_ready && !wb_full && !bb_full;
  assign {wb_loc, wb_beats, wb_last_unused} = wb_data;

  hero_fifo #(.WIDTH(INFO_W), .DEPTH(MAX_OUTSTANDING)) i_wbursts (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i  (bg_valid[1] && bg_ready[1]),
    .data_i  ({bg_loc[1], bg_beats[1], bg_last[1]}),
    .pop_i   (rd_adv && rd_beat_last),
    .data_o  (wb_data),
    .full_o  (wb_full),
    .empty_o (wb_empty),
    .count_o ()
  );

  hero_fifo #(.WIDTH(1), .DEPTH(MAX_OUTSTANDING)) i_bbursts (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i  (bg_valid[1] && bg_ready[1]),
    .data_i  (bg_last[1]),
    .pop_i   (axi_rsp_i.b_valid),
    .data_o  (bb_last),
    .full_o  (bb_full),
    .empty_o (bb_empty),
    .count_o ()
  );

  // L1 read issue: both halves of a beat, each port may be granted on its own
  logic [8:0] rd_beat_q;
  logic       half_done_q [2];
  logic       rq_full [2], rq_empty [2];
  logic [2:0] rq_cnt [2];
  logic       inflight_q [2];
  logic [32:0] rq_data [2];
  logic       w_fire;
  logic       port_issue [2];

  assign rd_beat_last = (rd_beat_q == wb_beats - 1'b1);

  for (genvar p = 0; p < 2; p++) begin : g_rd
    logic space;
    assign space = (32'(rq_cnt[p]) + 32'(inflight_q[p])) < QD;
    always_comb begin
      tcdm_req_o[2+p].req   = !wb_empty && !half_done_q[p] && space;
      tcdm_req_o[2+p].we    = 1'b0;
      tcdm_req_o[2+p].addr  = wb_loc + {rd_beat_q, 3'b000} + 32'(4 * p);
      tcdm_req_o[2+p].wdata = '0;
      tcdm_req_o[2+p].be    = 4'hF;
    end
    assign port_issue[p] = tcdm_req_o[2+p].req && tcdm_rsp_i[2+p].gnt;

    // last-beat-of-burst flag travels with the low word
    logic last_q;
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        inflight_q[p] <= 1'b0;
        last_q        <= 1'b0;
      end else begin
        inflight_q[p] <= port_issue[p];
        if (port_issue[p]) last_q <= rd_beat_last;
      end
    end

    hero_fifo #(.WIDTH(33), .DEPTH(QD)) i_rq (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i  (tcdm_rsp_i[2+p].rvalid),
      .data_i  ({last_q, tcdm_rsp_i[2+p].rdata}),
      .pop_i   (w_fire),
      .data_o  (rq_data[p]),
      .full_o  (rq_full[p]),
      .empty_o (rq_empty[p]),
      .count_o (rq_cnt[p])
    );
  end

  assign rd_adv = (half_done_q[0] || port_issue[0]) && (half_done_q[1] || port_issue[1]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_beat_q      <= '0;
      half_done_q[0] <= 1'b0;
      half_done_q[1] <= 1'b0;
    end else if (rd_adv) begin
      rd_beat_q      <= rd_beat_last ? '0 : rd_beat_q + 1'b1;
      half_done_q[0] <= 1'b0;
      half_done_q[1] <= 1'b0;
    end else begin
      if (port_issue[0]) half_done_q[0] <= 1'b1;
      if (port_issue[1]) half_done_q[1] <= 1'b1;
    end
  end

  assign w_fire = !rq_empty[0] && !rq_empty[1] && axi_rsp_i.w_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) done_out_q <= '0;
    else if (axi_rsp_i.b_valid && !bb_empty && bb_last) done_out_q <= done_out_q + 1'b1;
  end
  assign done_cnt_o[1] = done_out_q;

  // ------------------------------------------------------------ AXI port
  always_comb begin
    axi_req_o = '0;
    axi_req_o.ar_valid  = bg_valid[0] && !rb_full;
    axi_req_o.ar.addr   = bg_ext[0];
    axi_req_o.ar.len    = 8'(bg_beats[0] - 1'b1);
    axi_req_o.ar.size   = 3'd3;
    axi_req_o.ar.burst  = 2'b01;
    axi_req_o.r_ready   = r_take;
    axi_req_o.aw_valid  = bg_valid[1] && !wb_full && !bb_full;
    axi_req_o.aw.addr   = bg_ext[1];
    axi_req_o.aw.len    = 8'(bg_beats[1] - 1'b1);
    axi_req_o.aw.size   = 3'd3;
    axi_req_o.aw.burst  = 2'b01;
    axi_req_o.w_valid   = !rq_empty[0] && !rq_empty[1];
    axi_req_o.w.data    = {rq_data[1][31:0], rq_data[0][31:0]};
    axi_req_o.w.strb    = '1;
    axi_req_o.w.last    = rq_data[0][32];
    axi_req_o.b_ready   = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) err_o <= 1'b0;
    else if ((axi_rsp_i.r_valid && r_take && axi_rsp_i.r.resp != RESP_OKAY) ||
             (axi_rsp_i.b_valid && axi_rsp_i.b.resp != RESP_OKAY)) err_o <= 1'b1;
  end

  assign busy_o = bg_busy[0] || bg_busy[1] || !cq_empty[0] || !cq_empty[1] ||
                  !rb_empty || !wb_empty || !bb_empty || !wq_empty[0] || !wq_empty[1];

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   axi_rsp_i.r_valid |-> !rb_empty);
endmodule
