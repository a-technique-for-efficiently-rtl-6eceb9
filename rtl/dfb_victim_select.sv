// dfb_victim_select: dead-fast-block (DFB) replacement candidate.
//
// Combinational form of the paper's Algorithm 2. Ways are scanned from way 0
// upward; the first way that satisfies either test is the victim:
//   - it is a fast (SRAM) way, w < N_FAST, and its LRU_Order is >= Z, or
//   - its LRU_Order is Assoc, i.e. it sits at the bottom of the LRU stack.
// A fast block is thus treated as dead once it has sunk to position Z, long
// before it would reach the bottom; the freed SRAM way takes the incoming
// block. Orders arrive 0-based (0 = MRU), so "LRU_Order >= Z" becomes
// order + 1 >= Z. Z is the 3-bit value kept by z_update.
// `early` flags a victim that is a fast way not at the bottom of the stack,
// i.e. an eviction that plain LRU would not have made.
module dfb_victim_select #(
  parameter int unsigned ASSOC  = 8,
  parameter int unsigned N_FAST = 2,
  localparam int unsigned OW       = $clog2(ASSOC),
  localparam int unsigned WAY_BITS = $clog2(ASSOC)
) (
  input  logic [ASSOC-1:0][OW-1:0] order,
  input  logic [2:0]               z,
  output logic [WAY_BITS-1:0]      victim,
  output logic                     early
);

  logic found;

  always_comb begin
    found  = 1'b0;
    victim = '0;
    early  = 1'b0;
    for (int unsigned w = 0; w < ASSOC; w++) begin
      if (!found) begin
        if (w < N_FAST && (32'(order[w]) + 32'd1) >= 32'(z)) begin
          found  = 1'b1;
          victim = WAY_BITS'(w);
          early  = (32'(order[w]) != ASSOC - 1);
        end else if (32'(order[w]) == ASSOC - 1) begin
          found  = 1'b1;
          victim = WAY_BITS'(w);
        end
      end
    end
  end

endmodule
