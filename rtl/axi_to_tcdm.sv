// axi_to_tcdm: the AXI4 slave port through which the host and the narrow
// network reach a cluster's L1 scratchpad.
//
// One burst at a time; an AR waiting is served before an AW. Each 64-bit
// beat is split into its low and high 32-bit word, which go to two TCDM
// master ports (tcdm_req_o[0] low, [1] high) of the L1 interconnect. The two
// ports are granted independently; a beat is finished when both halves have
// been granted. A read beat is returned on R in the cycle after its last
// half returned data (about three cycles per beat without contention); a
// write beat skips a half whose four strobes are all zero and is accepted
// on W once both halves are granted. A write burst ends with one OKAY B.
// The L1 address of beat k is the AXI address + 8k (bits 31:0).
//
// The paper shows a narrow AXI port into the cluster's TCDM interconnect
// (used, among others, by the host to program the accelerator); this
// unpipelined organisation is this design's simplest choice.
module axi_to_tcdm
  import hero_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  axi_req_t  axi_req_i,
  output axi_rsp_t  axi_rsp_o,
  output tcdm_req_t tcdm_req_o [2],
  input  tcdm_rsp_t tcdm_rsp_i [2]
);
  typedef enum logic [2:0] {IDLE, RD_REQ, RD_RSP, WR_REQ, WR_RSP} state_e;
  state_e state_q;

  logic [AXI_IW-1:0] id_q;
  logic [31:0]       addr_q;
  logic [7:0]        rem_q;       // beats left - 1
  logic [1:0]        done_q;      // halves granted for this beat
  logic [1:0]        pend_q;      // halves whose read data is due this cycle
  logic [63:0]       rdata_q;
  logic [1:0]        issue, need;
  logic              beat_done;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      need[p] = (state_q == RD_REQ) ||
                ((state_q == WR_REQ) && axi_req_i.w_valid && (axi_req_i.w.strb[4*p +: 4] != 4'b0));
      tcdm_req_o[p].req   = need[p] && !done_q[p];
      tcdm_req_o[p].we    = (state_q == WR_REQ);
      tcdm_req_o[p].addr  = addr_q + 32'(4 * p);
      tcdm_req_o[p].wdata = axi_req_i.w.data[32*p +: 32];
      tcdm_req_o[p].be    = axi_req_i.w.strb[4*p +: 4];
      issue[p] = tcdm_req_o[p].req && tcdm_rsp_i[p].gnt;
    end
  end

  // a beat is done when every needed half is granted (now or before)
  assign beat_done = ((state_q == RD_REQ) || (state_q == WR_REQ && axi_req_i.w_valid)) &&
                     (done_q[0] || issue[0] || !need[0]) && (done_q[1] || issue[1] || !need[1]);

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.ar_ready = (state_q == IDLE);
    axi_rsp_o.aw_ready = (state_q == IDLE) && !axi_req_i.ar_valid;
    axi_rsp_o.w_ready  = (state_q == WR_REQ) && beat_done;
    axi_rsp_o.r_valid  = (state_q == RD_RSP) && (pend_q == 2'b00);
    axi_rsp_o.r.id     = id_q;
    axi_rsp_o.r.data   = rdata_q;
    axi_rsp_o.r.resp   = RESP_OKAY;
    axi_rsp_o.r.last   = (rem_q == 8'd0);
    axi_rsp_o.b_valid  = (state_q == WR_RSP);
    axi_rsp_o.b.id     = id_q;
    axi_rsp_o.b.resp   = RESP_OKAY;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      id_q    <= '0;
      addr_q  <= '0;
      rem_q   <= '0;
      done_q  <= '0;
      pend_q  <= '0;
      rdata_q <= '0;
    end else begin
      // read data of halves granted in the previous cycle
      for (int p = 0; p < 2; p++)
        if (pend_q[p] && tcdm_rsp_i[p].rvalid) rdata_q[32*p +: 32] <= tcdm_rsp_i[p].rdata;
      pend_q <= (state_q == RD_REQ) ? issue : 2'b00;

      unique case (state_q)
        IDLE: begin
          done_q <= '0;
          if (axi_req_i.ar_valid) begin
            state_q <= RD_REQ;
            id_q    <= axi_req_i.ar.id;
            addr_q  <= axi_req_i.ar.addr[31:0];
            rem_q   <= axi_req_i.ar.len;
          end else if (axi_req_i.aw_valid) begin
            state_q <= WR_REQ;
            id_q    <= axi_req_i.aw.id;
            addr_q  <= axi_req_i.aw.addr[31:0];
            rem_q   <= axi_req_i.aw.len;
          end
        end
        RD_REQ: begin
          if (beat_done) begin
            done_q  <= '0;
            state_q <= RD_RSP;
          end else begin
            done_q <= done_q | issue;
          end
        end
        RD_RSP: begin
          if (axi_rsp_o.r_valid && axi_req_i.r_ready) begin
            addr_q <= addr_q + 32'd8;
            rem_q  <= rem_q - 1'b1;
            state_q <= (rem_q == 8'd0) ? IDLE : RD_REQ;
          end
        end
        WR_REQ: begin
          if (beat_done) begin
            done_q <= '0;
            addr_q <= addr_q + 32'd8;
            rem_q  <= rem_q - 1'b1;
            if (axi_req_i.w.last) state_q <= WR_RSP;
          end else begin
            done_q <= done_q | issue;
          end
        end
        WR_RSP: if (axi_req_i.b_ready) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
