// hero_rr_arb: round-robin arbiter, a helper. Among the set bits of req_i
// it grants the first one at or after a rotating priority pointer; the
// pointer moves just past the winner when advance_i is high (the grant was
// used). req_i to gnt_o is purely combinational; the pointer is the only
// state, so every requester is served within N uses of the grant.
//
// The linter reports UNOPTFLAT (circular logic) through this arbiter when its
// advance input is fed from a response path: it treats arrays of structs as
// one signal. The grant depends only on the requests and the pointer
// register, so there is no combinational loop at bit level.
module hero_rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic [N-1:0]                     req_i,
  input  logic                             advance_i,
  output logic [N-1:0]                     gnt_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o,
  output logic                             valid_o
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(i);
        gnt_o[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (advance_i && valid_o) ptr_q <= (idx_o == IW'(N-1)) ? '0 : idx_o + 1'b1;
  end
endmodule
