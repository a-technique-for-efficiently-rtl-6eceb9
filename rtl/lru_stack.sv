// lru_stack: LRU_Order storage of one cache bank.
//
// Every set keeps, for each of its ASSOC ways, the way's position in the LRU
// stack (0 = most recently used, ASSOC-1 = bottom of the stack). The paper
// numbers the positions 1..Assoc; hardware stores position-1 in
// $clog2(ASSOC) bits. The storage is a plain memory written once per
// operation, so it maps onto a RAM.
//
// Operations (one per cycle, priority init > touch):
//   init_en : write the start-up order of init_set: way w at position w, so
//             the SRAM ways 0..N_FAST-1 sit at the top of the stack, as the
//             paper assumes at the start of execution. Because only accessed
//             or filled ways are ever promoted, never-filled (invalid) ways
//             stay below all valid ones, i.e. they hold the largest orders.
//   touch_en: promote touch_way of touch_set to the top. The caller passes
//             the set's current order vector (read earlier through rd_*),
//             every way that was above touch_way sinks by one.
//   rd_en   : read rd_set; rd_order is valid on the next cycle.
// The sweep that initialises every set is driven by the bank controller.
module lru_stack #(
  parameter int unsigned SETS  = 2048,
  parameter int unsigned ASSOC = 8,
  localparam int unsigned SET_BITS = $clog2(SETS),
  localparam int unsigned OW       = $clog2(ASSOC),
  localparam int unsigned WAY_BITS = $clog2(ASSOC)
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [SET_BITS-1:0]           rd_set,
  output logic [ASSOC-1:0][OW-1:0]      rd_order,
  input  logic                          touch_en,
  input  logic [SET_BITS-1:0]           touch_set,
  input  logic [WAY_BITS-1:0]           touch_way,
  input  logic [ASSOC-1:0][OW-1:0]      touch_order,
  input  logic                          init_en,
  input  logic [SET_BITS-1:0]           init_set
);

  logic [ASSOC-1:0][OW-1:0] mem [SETS];

  logic [ASSOC-1:0][OW-1:0] promoted, initial_order;
  logic                     wr_en;
  logic [SET_BITS-1:0]      wr_set;
  logic [ASSOC-1:0][OW-1:0] wr_data;

  always_comb begin
    for (int unsigned w = 0; w < ASSOC; w++) begin
      initial_order[w] = OW'(w);
      if (WAY_BITS'(w) == touch_way)
        promoted[w] = '0;
      else if (touch_order[w] < touch_order[touch_way])
        promoted[w] = touch_order[w] + OW'(1);
      else
        promoted[w] = touch_order[w];
    end
  end

  always_comb begin
    wr_en   = init_en | touch_en;
    wr_set  = init_en ? init_set : touch_set;
    wr_data = init_en ? initial_order : promoted;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_set] <= wr_data;
    if (rd_en) rd_order <= mem[rd_set];
  end

endmodule
