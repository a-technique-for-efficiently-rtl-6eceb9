// rr_arbiter: round-robin arbiter among N requesters.
//
// The bank structure of the cache puts N independent banks behind one
// response port and one main-memory port; this arbiter decides which bank
// uses a shared port. The grant is combinational: the first requester at or
// after the priority pointer wins. When the granted transfer is accepted
// (`accept`), the pointer moves to the requester after the winner, so every
// requester is served within N transfers. The paper only states that the
// cache has 8 banks; the round-robin choice is this design's.
module rr_arbiter #(
  parameter int unsigned N = 8,
  localparam int unsigned IDX_BITS = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        req,
  input  logic                accept,
  output logic                valid,
  output logic [IDX_BITS-1:0] grant
);

  logic [IDX_BITS-1:0] ptr;

  always_comb begin
    valid = 1'b0;
    grant = '0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IDX_BITS:0] idx;
      idx = {1'b0, ptr} + (IDX_BITS+1)'(k);
      if (32'(idx) >= N) idx = idx - (IDX_BITS+1)'(N);
      if (!valid && req[idx[IDX_BITS-1:0]]) begin
        valid = 1'b1;
        grant = idx[IDX_BITS-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (valid && accept) ptr <= (32'(grant) == N - 1) ? '0 : grant + 1'b1;
  end

endmodule
