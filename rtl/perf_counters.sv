// perf_counters: the cluster's hardware performance counters.
//
// NUM_CNT 32-bit counters, each with an event chosen at run time from
// NUM_EVT event inputs (one-cycle pulses or levels, counted per cycle).
// Selecting an event also clears the counter, which is what allocating a
// counter for an event needs. All counters start or stop together with a
// single register write, so measurement brackets cost one store each.
//
// Register map (reg_req_t, single cycle):
//   0x00        RUN    : bit i enables counter i (write all ones to start
//                        all, zero to pause all); readable
//   0x10 + 4*i  EVSEL_i: event number of counter i; a write clears the count
//   0x40 + 4*i  COUNT_i: current value (writable, to preset)
// The paper describes counters with dynamically assigned events and one-write
// start/stop; the map, the counter count and the event list are this
// design's.
module perf_counters
  import hero_pkg::*;
#(
  parameter int unsigned NUM_CNT = 4,
  parameter int unsigned NUM_EVT = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NUM_EVT-1:0] evt_i,
  input  reg_req_t           cfg_req_i,
  output reg_rsp_t           cfg_rsp_o
);
  localparam int unsigned EW = $clog2(NUM_EVT);

  logic [NUM_CNT-1:0] run_q;
  logic [EW-1:0]      sel_q [NUM_CNT];
  logic [31:0]        cnt_q [NUM_CNT];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      run_q <= '0;
      for (int i = 0; i < NUM_CNT; i++) begin
        sel_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NUM_CNT; i++)
        if (run_q[i] && evt_i[sel_q[i]]) cnt_q[i] <= cnt_q[i] + 1'b1;
      if (cfg_req_i.valid && cfg_req_i.write) begin
        if (cfg_req_i.addr == 16'h0) run_q <= cfg_req_i.wdata[NUM_CNT-1:0];
        for (int i = 0; i < NUM_CNT; i++) begin
          if (cfg_req_i.addr == 16'(16'h10 + 4*i)) begin
            sel_q[i] <= cfg_req_i.wdata[EW-1:0];
            cnt_q[i] <= '0;
          end
          if (cfg_req_i.addr == 16'(16'h40 + 4*i)) cnt_q[i] <= cfg_req_i.wdata;
        end
      end
    end
  end

  always_comb begin
    cfg_rsp_o.rdata = '0;
    if (cfg_req_i.addr == 16'h0) cfg_rsp_o.rdata = 32'(run_q);
    for (int i = 0; i < NUM_CNT; i++) begin
      if (cfg_req_i.addr == 16'(16'h10 + 4*i)) cfg_rsp_o.rdata = 32'(sel_q[i]);
      if (cfg_req_i.addr == 16'(16'h40 + 4*i)) cfg_rsp_o.rdata = cnt_q[i];
    end
  end
endmodule
