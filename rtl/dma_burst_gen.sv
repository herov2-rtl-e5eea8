// dma_burst_gen: splits DMA transfers into AXI bursts; a helper of
// dma_engine, one per direction.
//
// It takes descriptors from a queue (cmd_*). For each row of the transfer
// it emits bursts of at most MAX_BURST_BEATS 64-bit beats that never cross a
// 4 KiB boundary of the external address. For every burst it presents the
// external address, the beat count, the matching L1 address and a flag that
// marks the final burst of the transfer (burst_*); the burst is taken when
// burst_valid_o and burst_ready_i are both high, one per cycle at most.
// After a row the addresses restart at the row start plus the row strides,
// which gives the two-dimensional (gather/scatter) transfers.
// len and reps must be non-zero and everything 8-byte aligned.
module dma_burst_gen
  import hero_pkg::*;
#(
  parameter int unsigned MAX_BURST_BEATS = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  dma_cmd_t    cmd_i,
  input  logic        cmd_valid_i,
  output logic        cmd_pop_o,
  output logic        burst_valid_o,
  input  logic        burst_ready_i,
  output logic [63:0] burst_ext_o,
  output logic [31:0] burst_loc_o,
  output logic [8:0]  burst_beats_o,
  output logic        burst_last_o,
  output logic        busy_o
);
  logic        act_q;
  logic [63:0] ext_q, row_ext_q;
  logic [31:0] loc_q, row_loc_q;
  logic [31:0] rem_q, len_q, rows_q, ext_str_q, loc_str_q;

  logic [31:0] rem_beats, page_beats, beats;
  logic        row_done, xfer_done;

  always_comb begin
    rem_beats  = rem_q >> 3;
    page_beats = (32'd4096 - {20'd0, ext_q[11:0]}) >> 3;
    beats      = rem_beats;
    if (page_beats < beats)                 beats = page_beats;
    if (32'(MAX_BURST_BEATS) < beats)       beats = 32'(MAX_BURST_BEATS);
    row_done   = (beats == rem_beats);
    xfer_done  = row_done && (rows_q == 32'd1);
  end

  assign burst_valid_o = act_q;
  assign burst_ext_o   = ext_q;
  assign burst_loc_o   = loc_q;
  assign burst_beats_o = beats[8:0];
  assign burst_last_o  = xfer_done;
  assign cmd_pop_o     = !act_q && cmd_valid_i;
  assign busy_o        = act_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q <= 1'b0;
      ext_q <= '0; row_ext_q <= '0;
      loc_q <= '0; row_loc_q <= '0;
      rem_q <= '0; len_q <= '0; rows_q <= '0;
      ext_str_q <= '0; loc_str_q <= '0;
    end else if (!act_q) begin
      if (cmd_valid_i) begin
        act_q     <= 1'b1;
        ext_q     <= cmd_i.ext_addr;  row_ext_q <= cmd_i.ext_addr;
        loc_q     <= cmd_i.loc_addr;  row_loc_q <= cmd_i.loc_addr;
        rem_q     <= cmd_i.len;       len_q     <= cmd_i.len;
        rows_q    <= cmd_i.reps;
        ext_str_q <= cmd_i.ext_stride;
        loc_str_q <= cmd_i.loc_stride;
      end
    end else if (burst_ready_i) begin
      if (xfer_done) begin
        act_q <= 1'b0;
      end else if (row_done) begin
        rows_q    <= rows_q - 1;
        rem_q     <= len_q;
        ext_q     <= row_ext_q + 64'(ext_str_q);
        row_ext_q <= row_ext_q + 64'(ext_str_q);
        loc_q     <= row_loc_q + loc_str_q;
        row_loc_q <= row_loc_q + loc_str_q;
      end else begin
        rem_q <= rem_q - (beats << 3);
        ext_q <= ext_q + 64'(beats << 3);
        loc_q <= loc_q + (beats << 3);
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   cmd_pop_o |-> (cmd_i.len != 0 && cmd_i.reps != 0 && cmd_i.len[2:0] == 3'b0));
endmodule
