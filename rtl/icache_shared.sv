// icache_shared: the L1 instruction cache shared by all cores of a cluster.
//
// Direct-mapped, SIZE_BYTES large, lines of LINE_BEATS x 64 bit. The cores'
// fetch ports (fetch_req_t, 64-bit aligned addresses) compete through a
// round-robin arbiter for one lookup per cycle. On a hit the port is
// granted in that cycle and gets the 64-bit word with rvalid in the next.
// On a miss nobody is granted; the cache fetches the line with one AXI INCR
// burst of LINE_BEATS beats (id 0) over the wide network, writes it and
// returns to lookups, where the waiting port now hits. flush_i invalidates
// all lines (after new code has been loaded).
//
// The paper says the cache is shared by all cores of a cluster, refills
// over the accelerator network and delivers at most 64 bit per cycle; size,
// mapping, line length and arbitration are this design's own choices.
module icache_shared
  import hero_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = 8,
  parameter int unsigned SIZE_BYTES = 4096,
  parameter int unsigned LINE_BEATS = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       flush_i,
  input  fetch_req_t fetch_req_i [NUM_PORTS],
  output fetch_rsp_t fetch_rsp_o [NUM_PORTS],
  output logic       miss_o,
  output axi_req_t   axi_req_o,
  input  axi_rsp_t   axi_rsp_i
);
  localparam int unsigned LINES = SIZE_BYTES / (8 * LINE_BEATS);
  localparam int unsigned OW    = 3 + $clog2(LINE_BEATS);  // offset bits
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = 32 - OW - IW;
  localparam int unsigned BW    = (LINE_BEATS > 1) ? $clog2(LINE_BEATS) : 1;
  localparam int unsigned PW    = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;

  typedef enum logic [1:0] {LOOKUP, REQ, FILL} state_e;
  state_e state_q;

  logic [LINES-1:0] valid_q;
  logic [TW-1:0]    tag_q  [LINES];
  logic [63:0]      data_q [LINES * LINE_BEATS];

  logic [NUM_PORTS-1:0] req, gnt;
  logic [PW-1:0]        sel;
  logic                 any, hit;
  logic [31:0]          a;
  logic [IW-1:0]        idx;
  logic [TW-1:0]        tag;
  logic [BW-1:0]        beat;
  logic [31:0]          miss_addr_q;
  logic [BW-1:0]        fill_beat_q;

  logic [NUM_PORTS-1:0] rvalid_q;
  logic [63:0]          rdata_q;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) req[p] = fetch_req_i[p].req && (state_q == LOOKUP);
  end

  hero_rr_arb #(.N(NUM_PORTS)) i_arb (
    .clk_i, .rst_ni, .req_i(req), .advance_i(hit),
    .gnt_o(gnt), .idx_o(sel), .valid_o(any)
  );

  assign a    = fetch_req_i[sel].addr;
  assign idx  = a[OW +: IW];
  assign tag  = a[31 -: TW];
  assign beat = BW'(a[3 +: BW]);
  assign hit  = any && valid_q[idx] && (tag_q[idx] == tag);
  assign miss_o = any && !hit;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      fetch_rsp_o[p].gnt    = gnt[p] && hit;
      fetch_rsp_o[p].rvalid = rvalid_q[p];
      fetch_rsp_o[p].rdata  = rdata_q;
    end
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar_valid = (state_q == REQ);
    axi_req_o.ar.addr  = {32'd0, miss_addr_q[31:OW], OW'(0)};
    axi_req_o.ar.len   = 8'(LINE_BEATS - 1);
    axi_req_o.ar.size  = 3'd3;
    axi_req_o.ar.burst = 2'b01;
    axi_req_o.r_ready  = (state_q == FILL);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= LOOKUP;
      valid_q     <= '0;
      rvalid_q    <= '0;
      miss_addr_q <= '0;
      fill_beat_q <= '0;
      for (int l = 0; l < LINES; l++) tag_q[l] <= '0;
    end else begin
      rvalid_q <= hit ? gnt : '0;
      unique case (state_q)
        LOOKUP: begin
          if (flush_i) valid_q <= '0;
          else if (any && !hit) begin
            state_q     <= REQ;
            miss_addr_q <= a;
          end
        end
        REQ: if (axi_rsp_i.ar_ready) begin
          state_q     <= FILL;
          fill_beat_q <= '0;
        end
        FILL: if (axi_rsp_i.r_valid) begin
          fill_beat_q <= fill_beat_q + 1'b1;
          if (axi_rsp_i.r.last) begin
            state_q                          <= LOOKUP;
            valid_q[miss_addr_q[OW +: IW]]   <= 1'b1;
            tag_q[miss_addr_q[OW +: IW]]     <= miss_addr_q[31 -: TW];
          end
        end
        default: state_q <= LOOKUP;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (hit) rdata_q <= data_q[{idx, beat}];
    if (state_q == FILL && axi_rsp_i.r_valid)
      data_q[{miss_addr_q[OW +: IW], fill_beat_q}] <= axi_rsp_i.r.data;
  end
endmodule
