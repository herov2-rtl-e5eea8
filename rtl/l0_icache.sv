// l0_icache: per-core level-0 instruction buffer in front of the shared
// instruction cache.
//
// It holds LINES fully-associative 64-bit lines; with the default of two
// that is 128 bit, eight 16-bit compressed instructions, enough to run a
// short loop without touching the shared cache. A core fetch (fetch_req_t,
// 64-bit aligned) that hits is granted at once and answered with rvalid in
// the next cycle. On a miss the request goes to the shared cache; when the
// line returns it replaces the oldest line (FIFO order) and the core's
// request, still pending, hits in the following cycle. flush_i empties it.
//
// The paper gives the capacity (eight compressed instructions); the
// organisation and replacement are this design's own choices.
module l0_icache
  import hero_pkg::*;
#(
  parameter int unsigned LINES = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       flush_i,
  input  fetch_req_t core_req_i,
  output fetch_rsp_t core_rsp_o,
  output logic       miss_o,
  output fetch_req_t l1_req_o,
  input  fetch_rsp_t l1_rsp_i
);
  localparam int unsigned LW = (LINES > 1) ? $clog2(LINES) : 1;

  logic [LINES-1:0] v_q;
  logic [28:0]      tag_q  [LINES];
  logic [63:0]      data_q [LINES];
  logic [LW-1:0]    repl_q;
  logic             wait_q;          // a refill is in flight
  logic             hit;
  logic [LW-1:0]    hit_idx;
  logic             rvalid_q;
  logic [63:0]      rdata_q;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < LINES; i++)
      if (v_q[i] && tag_q[i] == core_req_i.addr[31:3]) begin
        hit     = 1'b1;
        hit_idx = LW'(i);
      end
  end

  assign miss_o           = core_req_i.req && !hit && !wait_q;
  assign l1_req_o.req     = miss_o;
  assign l1_req_o.addr    = {core_req_i.addr[31:3], 3'b000};
  assign core_rsp_o.gnt   = core_req_i.req && hit && !flush_i;
  assign core_rsp_o.rvalid = rvalid_q;
  assign core_rsp_o.rdata = rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v_q      <= '0;
      repl_q   <= '0;
      wait_q   <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      for (int i = 0; i < LINES; i++) begin
        tag_q[i]  <= '0;
        data_q[i] <= '0;
      end
    end else begin
      rvalid_q <= core_rsp_o.gnt;
      if (core_rsp_o.gnt) rdata_q <= data_q[hit_idx];
      if (l1_req_o.req && l1_rsp_i.gnt) wait_q <= 1'b1;
      if (l1_rsp_i.rvalid) begin
        wait_q         <= 1'b0;
        v_q[repl_q]    <= 1'b1;
        tag_q[repl_q]  <= core_req_i.addr[31:3];
        data_q[repl_q] <= l1_rsp_i.rdata;
        repl_q         <= (repl_q == LW'(LINES-1)) ? '0 : repl_q + 1'b1;
      end
      if (flush_i) v_q <= '0;
    end
  end

  logic unused;
  assign unused = ^{l1_rsp_i.gnt, core_req_i.addr[2:0]};
endmodule
