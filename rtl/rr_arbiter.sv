// rr_arbiter: round-robin arbiter with N requesters and a one-hot grant.
//
// The grant goes to the first requester at or after the priority pointer; when
// `advance` is high and a grant is given, the pointer moves to the requester just
// after the winner, so every requester is served within N grants. The grant is
// combinational from `req`; the pointer is the only state. A helper used by the
// interconnects; the round-robin policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N+1)-1:0] idx_o,
  output logic                 valid_o
);
  localparam int unsigned IdxW = $clog2(N+1);

  logic [IdxW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        gnt_o[i] = 1'b1;
        idx_o    = IdxW'(i);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (advance_i && valid_o)
      ptr_q <= (idx_o == IdxW'(N - 1)) ? '0 : idx_o + 1'b1;
  end

endmodule
