// mailbox: hardware mailbox between the host and the accelerator.
//
// Two FIFOs of 32-bit words, one per direction. The host starts an offload
// by writing words (for example a pointer to the offloaded function and its
// data) into the host-to-device FIFO; while that FIFO holds data, dev_irq_o
// is high and wakes the accelerator's offload manager core. The accelerator
// answers through the device-to-host FIFO, which raises host_irq_o.
//
// Register map, the same on both sides (reg_req_t ports, single cycle):
//   0x0  write: push a word toward the other side (dropped when full)
//   0x4  read : head word from the other side; the read pops it
//   0x8  read : {rx count [15:8], tx count [7:0]}
// The paper names the mailbox and its interrupt; the depth and the register
// map are this design's own.
module mailbox
  import hero_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t host_req_i,
  output reg_rsp_t host_rsp_o,
  input  reg_req_t dev_req_i,
  output reg_rsp_t dev_rsp_o,
  output logic     dev_irq_o,
  output logic     host_irq_o
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  // index 0: host -> device, index 1: device -> host
  logic          push [2], pop [2], full [2], empty [2];
  logic [31:0]   wdata [2], head [2];
  logic [CW-1:0] cnt [2];

  assign push[0]  = host_req_i.valid && host_req_i.write && host_req_i.addr[3:0] == 4'h0;
  assign wdata[0] = host_req_i.wdata;
  assign push[1]  = dev_req_i.valid && dev_req_i.write && dev_req_i.addr[3:0] == 4'h0;
  assign wdata[1] = dev_req_i.wdata;
  assign pop[0]   = dev_req_i.valid && !dev_req_i.write && dev_req_i.addr[3:0] == 4'h4;
  assign pop[1]   = host_req_i.valid && !host_req_i.write && host_req_i.addr[3:0] == 4'h4;

  for (genvar d = 0; d < 2; d++) begin : g_dir
    hero_fifo #(.WIDTH(32), .DEPTH(DEPTH)) i_fifo (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i(push[d]), .data_i(wdata[d]), .pop_i(pop[d]),
      .data_o(head[d]), .full_o(full[d]), .empty_o(empty[d]), .count_o(cnt[d])
    );
  end

  always_comb begin
    host_rsp_o.rdata = '0;
    dev_rsp_o.rdata  = '0;
    unique case (host_req_i.addr[3:0])
      4'h4:    host_rsp_o.rdata = empty[1] ? '0 : head[1];
      4'h8:    host_rsp_o.rdata = {16'd0, 8'(cnt[1]), 8'(cnt[0])};
      default: host_rsp_o.rdata = '0;
    endcase
    unique case (dev_req_i.addr[3:0])
      4'h4:    dev_rsp_o.rdata = empty[0] ? '0 : head[0];
      4'h8:    dev_rsp_o.rdata = {16'd0, 8'(cnt[0]), 8'(cnt[1])};
      default: dev_rsp_o.rdata = '0;
    endcase
  end

  assign dev_irq_o  = !empty[0];
  assign host_irq_o = !empty[1];

  // full FIFOs drop writes; unused bits of the register ports
  logic unused;
  assign unused = ^{full[0], full[1], host_req_i.addr[15:4], dev_req_i.addr[15:4]};
endmodule
