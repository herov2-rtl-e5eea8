// axi_mux: merges NUM_IN AXI4 masters onto one AXI4 port.
//
// AR and AW each have a round-robin arbiter; a request passes straight
// through (no register) with its id shifted left by IDX_W bits and the input
// index placed in the freed low bits. Read data and write responses are
// returned to the input named by those low bits, with the id shifted back.
// W beats follow the order of the granted AW requests: the index of every
// accepted AW goes into a small queue, and W is taken only from the input at
// its head until that burst's last beat. Inputs must keep the top IDX_W id
// bits zero.
//
// The cluster uses it where the DMA engine and the shared instruction cache
// share the wide AXI port; the crossbar and the top use it wherever two
// networks meet. Arbitration and id handling are this design's choice.
//
// The linter reports UNOPTFLAT (circular logic) here: it treats each array of
// request/response structs as one signal, although its elements are driven
// from different places. Valid never depends on ready here, so there is no
// combinational loop at bit level.
module axi_mux
  import hero_pkg::*;
#(
  parameter int unsigned NUM_IN = 2,
  parameter int unsigned W_FIFO = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t in_req_i [NUM_IN],
  output axi_rsp_t in_rsp_o [NUM_IN],
  output axi_req_t out_req_o,
  input  axi_rsp_t out_rsp_i
);
  localparam int unsigned IDX_W = (NUM_IN > 1) ? $clog2(NUM_IN) : 1;

  logic [NUM_IN-1:0] ar_vld, aw_vld, ar_gnt, aw_gnt;
  logic [IDX_W-1:0]  ar_idx, aw_idx;
  logic              ar_any, aw_any;
  logic              wq_full, wq_empty;
  logic [IDX_W-1:0]  w_idx;
  logic              aw_fire, w_fire;

  always_comb begin
    for (int i = 0; i < NUM_IN; i++) begin
      ar_vld[i] = in_req_i[i].ar_valid;
      aw_vld[i] = in_req_i[i].aw_valid;
    end
  end

  hero_rr_arb #(.N(NUM_IN)) i_ar_arb (
    .clk_i, .rst_ni, .req_i(ar_vld), .advance_i(out_rsp_i.ar_ready),
    .gnt_o(ar_gnt), .idx_o(ar_idx), .valid_o(ar_any)
  );
  hero_rr_arb #(.N(NUM_IN)) i_aw_arb (
    .clk_i, .rst_ni, .req_i(aw_vld), .advance_i(out_rsp_i.aw_ready && !wq_full),
    .gnt_o(aw_gnt), .idx_o(aw_idx), .valid_o(aw_any)
  );

  assign aw_fire = aw_any && out_rsp_i.aw_ready && !wq_full;
  assign w_fire  = !wq_empty && in_req_i[w_idx].w_valid && out_rsp_i.w_ready;

  hero_fifo #(.WIDTH(IDX_W), .DEPTH(W_FIFO)) i_wq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i(aw_fire), .data_i(aw_idx),
    .pop_i(w_fire && in_req_i[w_idx].w.last),
    .data_o(w_idx), .full_o(wq_full), .empty_o(wq_empty), .count_o()
  );

  logic [IDX_W-1:0] r_idx, b_idx;
  assign r_idx = out_rsp_i.r.id[IDX_W-1:0];
  assign b_idx = out_rsp_i.b.id[IDX_W-1:0];

  always_comb begin
    out_req_o = '0;
    // AR
    out_req_o.ar       = in_req_i[ar_idx].ar;
    out_req_o.ar.id    = AXI_IW'({in_req_i[ar_idx].ar.id, ar_idx});
    out_req_o.ar_valid = ar_any;
    // AW
    out_req_o.aw       = in_req_i[aw_idx].aw;
    out_req_o.aw.id    = AXI_IW'({in_req_i[aw_idx].aw.id, aw_idx});
    out_req_o.aw_valid = aw_any && !wq_full;
    // W
    out_req_o.w        = in_req_i[w_idx].w;
    out_req_o.w_valid  = !wq_empty && in_req_i[w_idx].w_valid;
    // responses
    out_req_o.r_ready  = in_req_i[r_idx].r_ready;
    out_req_o.b_ready  = in_req_i[b_idx].b_ready;

    for (int i = 0; i < NUM_IN; i++) begin
      in_rsp_o[i]          = '0;
      in_rsp_o[i].ar_ready = ar_gnt[i] && out_rsp_i.ar_ready;
      in_rsp_o[i].aw_ready = aw_gnt[i] && out_rsp_i.aw_ready && !wq_full;
      in_rsp_o[i].w_ready  = !wq_empty && (w_idx == IDX_W'(i)) && out_rsp_i.w_ready;
      in_rsp_o[i].r        = out_rsp_i.r;
      in_rsp_o[i].r.id     = out_rsp_i.r.id >> IDX_W;
      in_rsp_o[i].r_valid  = out_rsp_i.r_valid && (r_idx == IDX_W'(i));
      in_rsp_o[i].b        = out_rsp_i.b;
      in_rsp_o[i].b.id     = out_rsp_i.b.id >> IDX_W;
      in_rsp_o[i].b_valid  = out_rsp_i.b_valid && (b_idx == IDX_W'(i));
    end
  end
endmodule
