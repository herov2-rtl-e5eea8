// axi_xbar: the accelerator's AXI4 crossbar, NUM_MST masters to NUM_SLV
// slaves. The top instantiates it twice, once for the wide network (DMA
// and instruction refills) and once for the narrow one (core and host
// accesses).
//
// Address decoding: slave s owns the addresses a with
// (a & SLV_MASK[s]) == SLV_BASE[s]; the first match wins and an address that
// matches no rule goes to the last slave (the port toward the host).
// Each slave port has an axi_mux that arbitrates round robin among the
// masters addressing it and extends the id with the master index. On the
// way back, each master has a round-robin arbiter over the slaves: a read
// burst keeps the arbiter until its last beat, a write response takes one
// cycle. To keep the W channel deadlock free, a master may have only one
// write burst whose data has not been fully sent; its next AW waits.
// Everything is combinational from request to grant; no pipeline registers.
//
// The paper names the two networks and their roles; the decoding rules,
// the fallback to the host port and the arbitration are this design's.
//
// The linter reports UNOPTFLAT (circular logic) here: it treats each array of
// request/response structs as one signal, although its elements are driven
// from different places. Valid never depends on ready here, so there is no
// combinational loop at bit level.
module axi_xbar
  import hero_pkg::*;
#(
  parameter int unsigned                    NUM_MST  = 2,
  parameter int unsigned                    NUM_SLV  = 3,
  parameter logic [NUM_SLV-1:0][63:0]       SLV_BASE = {64'h0, 64'h1C00_0000, 64'h1000_0000},
  parameter logic [NUM_SLV-1:0][63:0]       SLV_MASK = {64'h0, 64'hFFFF_FFFF_FFFC_0000, 64'hFFFF_FFFF_FFFC_0000}
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t mst_req_i [NUM_MST],
  output axi_rsp_t mst_rsp_o [NUM_MST],
  output axi_req_t slv_req_o [NUM_SLV],
  input  axi_rsp_t slv_rsp_i [NUM_SLV]
);
  localparam int unsigned SW = (NUM_SLV > 1) ? $clog2(NUM_SLV) : 1;

  function automatic logic [SW-1:0] decode(logic [63:0] a);
    logic [SW-1:0] s;
    logic          hit;
    s   = SW'(NUM_SLV - 1);
    hit = 1'b0;
    for (int k = 0; k < NUM_SLV; k++) begin
      if (!hit && ((a & SLV_MASK[k]) == SLV_BASE[k])) begin
        s   = SW'(k);
        hit = 1'b1;
      end
    end
    return s;
  endfunction

  // per-slave multiplexer inputs
  axi_req_t mux_in_req [NUM_SLV][NUM_MST];
  axi_rsp_t mux_in_rsp [NUM_SLV][NUM_MST];

  logic [SW-1:0] ar_dst [NUM_MST];
  logic [SW-1:0] aw_dst [NUM_MST];
  logic          wpend_q [NUM_MST];
  logic [SW-1:0] wdst_q  [NUM_MST];

  // response arbitration per master
  logic [NUM_SLV-1:0] r_vld [NUM_MST], b_vld [NUM_MST], r_gnt [NUM_MST], b_gnt [NUM_MST];
  logic [SW-1:0]      r_sel [NUM_MST], b_sel [NUM_MST];
  logic               r_any [NUM_MST], b_any [NUM_MST];
  logic               r_lock_q [NUM_MST];
  logic [SW-1:0]      r_lsel_q [NUM_MST];
  logic [SW-1:0]      r_src [NUM_MST];

  for (genvar m = 0; m < NUM_MST; m++) begin : g_mst
    assign ar_dst[m] = decode(mst_req_i[m].ar.addr);
    assign aw_dst[m] = decode(mst_req_i[m].aw.addr);

    always_comb begin
      for (int s = 0; s < NUM_SLV; s++) begin
        r_vld[m][s] = mux_in_rsp[s][m].r_valid;
        b_vld[m][s] = mux_in_rsp[s][m].b_valid;
      end
    end

    hero_rr_arb #(.N(NUM_SLV)) i_r_arb (
      .clk_i, .rst_ni, .req_i(r_vld[m]),
      .advance_i(!r_lock_q[m] && mst_req_i[m].r_ready),
      .gnt_o(r_gnt[m]), .idx_o(r_sel[m]), .valid_o(r_any[m])
    );
    hero_rr_arb #(.N(NUM_SLV)) i_b_arb (
      .clk_i, .rst_ni, .req_i(b_vld[m]), .advance_i(mst_req_i[m].b_ready),
      .gnt_o(b_gnt[m]), .idx_o(b_sel[m]), .valid_o(b_any[m])
    );

    assign r_src[m] = r_lock_q[m] ? r_lsel_q[m] : r_sel[m];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        r_lock_q[m] <= 1'b0;
        r_lsel_q[m] <= '0;
        wpend_q[m]  <= 1'b0;
        wdst_q[m]   <= '0;
      end else begin
        // read burst lock
        if (mst_rsp_o[m].r_valid && mst_req_i[m].r_ready) begin
          r_lock_q[m] <= !mst_rsp_o[m].r.last;
          r_lsel_q[m] <= r_src[m];
        end
        // pending write data
        if (mst_req_i[m].aw_valid && mst_rsp_o[m].aw_ready) begin
          wpend_q[m] <= 1'b1;
          wdst_q[m]  <= aw_dst[m];
        end else if (mst_req_i[m].w_valid && mst_rsp_o[m].w_ready && mst_req_i[m].w.last) begin
          wpend_q[m] <= 1'b0;
        end
      end
    end

    always_comb begin
      mst_rsp_o[m]          = '0;
      mst_rsp_o[m].ar_ready = mux_in_rsp[ar_dst[m]][m].ar_ready;
      mst_rsp_o[m].aw_ready = !wpend_q[m] && mux_in_rsp[aw_dst[m]][m].aw_ready;
      mst_rsp_o[m].w_ready  = wpend_q[m] && mux_in_rsp[wdst_q[m]][m].w_ready;
      mst_rsp_o[m].r        = mux_in_rsp[r_src[m]][m].r;
      mst_rsp_o[m].r_valid  = r_lock_q[m] ? mux_in_rsp[r_lsel_q[m]][m].r_valid : r_any[m];
      mst_rsp_o[m].b        = mux_in_rsp[b_sel[m]][m].b;
      mst_rsp_o[m].b_valid  = b_any[m];
    end
  end

  for (genvar s = 0; s < NUM_SLV; s++) begin : g_slv
    always_comb begin
      for (int m = 0; m < NUM_MST; m++) begin
        mux_in_req[s][m]          = mst_req_i[m];
        mux_in_req[s][m].ar_valid = mst_req_i[m].ar_valid && (ar_dst[m] == SW'(s));
        mux_in_req[s][m].aw_valid = mst_req_i[m].aw_valid && !wpend_q[m] && (aw_dst[m] == SW'(s));
        mux_in_req[s][m].w_valid  = mst_req_i[m].w_valid && wpend_q[m] && (wdst_q[m] == SW'(s));
        mux_in_req[s][m].r_ready  = mst_req_i[m].r_ready && (r_src[m] == SW'(s));
        mux_in_req[s][m].b_ready  = mst_req_i[m].b_ready && b_gnt[m][s];
      end
    end

    axi_mux #(.NUM_IN(NUM_MST)) i_mux (
      .clk_i, .rst_ni,
      .in_req_i  (mux_in_req[s]),
      .in_rsp_o  (mux_in_rsp[s]),
      .out_req_o (slv_req_o[s]),
      .out_rsp_i (slv_rsp_i[s])
    );
  end
endmodule
