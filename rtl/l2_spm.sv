// l2_spm: the L2 scratchpad shared by all clusters, with its AXI4 SRAM
// controller.
//
// The memory is WORDS x 64 bit, written as an array. The controller serves
// one burst at a time, reads first when both an AR and an AW wait. A read
// burst streams one beat per cycle through a one-entry output register (the
// array is read in the cycle a beat is loaded into it, and the register is
// refilled in the same cycle its beat is taken). A write burst takes one W
// beat per cycle, honouring the byte strobes, and ends with one B response.
// Addresses wrap modulo the memory size; only INCR bursts are supported and
// all responses are OKAY.
//
// The paper says only that a high-bandwidth on-chip SRAM controller attaches
// the shared L2 SPM to the accelerator interconnect; its size (256 KiB by
// default here) and this organisation are this design's choice.
module l2_spm
  import hero_pkg::*;
#(
  parameter int unsigned WORDS = 32768
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o
);
  localparam int unsigned AW = $clog2(WORDS);

  typedef enum logic [1:0] {IDLE, READ, WRITE, WRESP} state_e;
  state_e state_q;

  logic [63:0]       mem_q [WORDS];
  logic [AXI_IW-1:0] id_q;
  logic [AW-1:0]     addr_q;
  logic [8:0]        rem_q;       // read beats still to load
  logic [63:0]       rdata_q;
  logic              rvalid_q, rlast_q;
  logic              load;

  assign load = (state_q == READ) && (rem_q != 0) && (!rvalid_q || axi_req_i.r_ready);

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.ar_ready = (state_q == IDLE);
    axi_rsp_o.aw_ready = (state_q == IDLE) && !axi_req_i.ar_valid;
    axi_rsp_o.w_ready  = (state_q == WRITE);
    axi_rsp_o.r_valid  = rvalid_q;
    axi_rsp_o.r.id     = id_q;
    axi_rsp_o.r.data   = rdata_q;
    axi_rsp_o.r.resp   = RESP_OKAY;
    axi_rsp_o.r.last   = rlast_q;
    axi_rsp_o.b_valid  = (state_q == WRESP);
    axi_rsp_o.b.id     = id_q;
    axi_rsp_o.b.resp   = RESP_OKAY;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= IDLE;
      id_q     <= '0;
      addr_q   <= '0;
      rem_q    <= '0;
      rvalid_q <= 1'b0;
      rlast_q  <= 1'b0;
    end else begin
      unique case (state_q)
        IDLE: begin
          if (axi_req_i.ar_valid) begin
            state_q <= READ;
            id_q    <= axi_req_i.ar.id;
            addr_q  <= axi_req_i.ar.addr[3 +: AW];
            rem_q   <= 9'(axi_req_i.ar.len) + 9'd1;
          end else if (axi_req_i.aw_valid) begin
            state_q <= WRITE;
            id_q    <= axi_req_i.aw.id;
            addr_q  <= axi_req_i.aw.addr[3 +: AW];
          end
        end
        READ: begin
          if (load) begin
            rvalid_q <= 1'b1;
            rlast_q  <= (rem_q == 9'd1);
            addr_q   <= addr_q + 1'b1;
            rem_q    <= rem_q - 1'b1;
          end else if (axi_req_i.r_ready) begin
            rvalid_q <= 1'b0;
            if (rlast_q) state_q <= IDLE;
          end
        end
        WRITE: begin
          if (axi_req_i.w_valid) begin
            addr_q <= addr_q + 1'b1;
            if (axi_req_i.w.last) state_q <= WRESP;
          end
        end
        WRESP: if (axi_req_i.b_ready) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (load) rdata_q <= mem_q[addr_q];
    if (state_q == WRITE && axi_req_i.w_valid) begin
      for (int b = 0; b < 8; b++)
        if (axi_req_i.w.strb[b]) mem_q[addr_q][8*b +: 8] <= axi_req_i.w.data[8*b +: 8];
    end
  end
endmodule
