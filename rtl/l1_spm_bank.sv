// l1_spm_bank: one bank of the cluster's L1 data scratchpad (SPM).
//
// A single-port, 32-bit wide synchronous memory written as an array. An
// access presented with req_i in cycle t is performed at the clock edge
// ending t; for a read, rdata_o holds the word from cycle t+1 until the
// next read. Writes honour the four byte enables.
//
// The paper gives the total L1 size (128 KiB) and the banking factor of two
// (16 banks for 8 cores), hence 2048 words per bank by default. The one-cycle
// read latency is what a core's single-cycle L1 access needs; byte enables
// are this design's choice. The memory content is not reset.
module l1_spm_bank #(
  parameter int unsigned WORDS = 2048
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  input  logic [3:0]               be_i,
  output logic [31:0]              rdata_o
);
  logic [31:0] mem_q [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end
endmodule
