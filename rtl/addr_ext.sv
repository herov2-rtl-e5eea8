// addr_ext: a core's data-port splitter with the address-extension CSR.
//
// Every 32-bit core owns one. The CSR holds the upper 32 bits of a 64-bit
// address and is written by the core (csr_we_i / csr_wdata_i); the compiler
// sets it around accesses through 64-bit host pointers. A core request
// (tcdm_req_t) is steered:
//  * CSR == 0 and address inside the cluster's L1 window
//    [L1_BASE, L1_BASE + L1_SIZE): straight through to the TCDM
//    interconnect, with its same-cycle grant and next-cycle read data;
//  * otherwise: it is granted at once and becomes a single-beat AXI access
//    (4-byte size, id 0) to {CSR, address} on the narrow network. A read
//    returns its word with rvalid when R arrives; a write completes with B
//    and, like an L1 write, gives no rvalid. The port takes no further
//    request, local or remote, until the remote access has finished, so
//    responses stay in order.
// The paper gives the CSR and its 32 upper bits; the L1 window, the
// one-outstanding-access rule and the port protocol are this design's.
module addr_ext
  import hero_pkg::*;
#(
  parameter logic [31:0] L1_BASE = 32'h1000_0000,
  parameter int unsigned L1_SIZE = 131072
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  tcdm_req_t   core_req_i,
  output tcdm_rsp_t   core_rsp_o,
  input  logic        csr_we_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_o,
  output logic        remote_busy_o,
  output tcdm_req_t   tcdm_req_o,
  input  tcdm_rsp_t   tcdm_rsp_i,
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i
);
  typedef enum logic [2:0] {IDLE, AR, R, AW, W, B} state_e;
  state_e state_q;

  logic [31:0] csr_q;
  logic        local_hit;
  logic [63:0] addr_q;
  logic [31:0] wdata_q;
  logic [3:0]  be_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;

  assign csr_o         = csr_q;
  assign remote_busy_o = (state_q != IDLE);
  assign local_hit = (csr_q == 32'd0) && (core_req_i.addr >= L1_BASE) &&
                     (core_req_i.addr - L1_BASE < L1_SIZE);

  always_comb begin
    tcdm_req_o     = core_req_i;
    tcdm_req_o.req = core_req_i.req && local_hit && (state_q == IDLE);

    core_rsp_o.gnt    = (state_q == IDLE) && core_req_i.req &&
                        (local_hit ? tcdm_rsp_i.gnt : 1'b1);
    core_rsp_o.rvalid = tcdm_rsp_i.rvalid || rvalid_q;
    core_rsp_o.rdata  = rvalid_q ? rdata_q : tcdm_rsp_i.rdata;

    axi_req_o          = '0;
    axi_req_o.ar.addr  = addr_q;
    axi_req_o.ar.size  = 3'd2;
    axi_req_o.ar.burst = 2'b01;
    axi_req_o.ar_valid = (state_q == AR);
    axi_req_o.r_ready  = (state_q == R);
    axi_req_o.aw.addr  = addr_q;
    axi_req_o.aw.size  = 3'd2;
    axi_req_o.aw.burst = 2'b01;
    axi_req_o.aw_valid = (state_q == AW);
    axi_req_o.w.data   = {wdata_q, wdata_q};
    axi_req_o.w.strb   = addr_q[2] ? {be_q, 4'b0} : {4'b0, be_q};
    axi_req_o.w.last   = 1'b1;
    axi_req_o.w_valid  = (state_q == W);
    axi_req_o.b_ready  = (state_q == B);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= IDLE;
      csr_q    <= '0;
      addr_q   <= '0;
      wdata_q  <= '0;
      be_q     <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= 1'b0;
      if (csr_we_i) csr_q <= csr_wdata_i;
      unique case (state_q)
        IDLE: if (core_req_i.req && !local_hit) begin
          addr_q  <= {csr_q, core_req_i.addr};
          wdata_q <= core_req_i.wdata;
          be_q    <= core_req_i.be;
          state_q <= core_req_i.we ? AW : AR;
        end
        AR: if (axi_rsp_i.ar_ready) state_q <= R;
        R:  if (axi_rsp_i.r_valid) begin
          rvalid_q <= 1'b1;
          rdata_q  <= addr_q[2] ? axi_rsp_i.r.data[63:32] : axi_rsp_i.r.data[31:0];
          state_q  <= IDLE;
        end
        AW: if (axi_rsp_i.aw_ready) state_q <= W;
        W:  if (axi_rsp_i.w_ready) state_q <= B;
        B:  if (axi_rsp_i.b_valid) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
