// tag_array: tag, valid and dirty bits of every way of every set of one bank,
// with the tag comparison.
//
// rd_en reads the set rd_set and registers rd_tag; on the next cycle the
// outputs give each way's entry, `hit`, and `hit_way` (lowest matching valid
// way; a tag is never stored twice in a set). wr_en overwrites one way's
// entry; clr_en invalidates a whole set (used by the reset sweep). The paper
// only says the cache is 8-way set-associative with 64-byte blocks; the entry
// layout and the one-cycle read are this design's choices.
module tag_array #(
  parameter int unsigned SETS     = 2048,
  parameter int unsigned ASSOC    = 8,
  parameter int unsigned TAG_BITS = 28,
  localparam int unsigned SET_BITS = $clog2(SETS),
  localparam int unsigned WAY_BITS = $clog2(ASSOC)
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [SET_BITS-1:0]           rd_set,
  input  logic [TAG_BITS-1:0]           rd_tag,
  output logic [ASSOC-1:0]              valid,
  output logic [ASSOC-1:0]              dirty,
  output logic [ASSOC-1:0][TAG_BITS-1:0] tags,
  output logic                          hit,
  output logic [WAY_BITS-1:0]           hit_way,
  input  logic                          wr_en,
  input  logic [SET_BITS-1:0]           wr_set,
  input  logic [WAY_BITS-1:0]           wr_way,
  input  logic                          wr_valid,
  input  logic                          wr_dirty,
  input  logic [TAG_BITS-1:0]           wr_tag,
  input  logic                          clr_en,
  input  logic [SET_BITS-1:0]           clr_set
);

  typedef struct packed {
    logic                valid;
    logic                dirty;
    logic [TAG_BITS-1:0] tag;
  } entry_t;

  entry_t [ASSOC-1:0]  mem [SETS];
  entry_t [ASSOC-1:0]  rd_q;
  logic [TAG_BITS-1:0] tag_q;

  always_ff @(posedge clk) begin
    if (clr_en) mem[clr_set] <= '0;
    else if (wr_en) mem[wr_set][wr_way] <= '{valid: wr_valid, dirty: wr_dirty, tag: wr_tag};
    if (rd_en) begin
      rd_q  <= mem[rd_set];
      tag_q <= rd_tag;
    end
  end

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned w = 0; w < ASSOC; w++) begin
      valid[w] = rd_q[w].valid;
      dirty[w] = rd_q[w].dirty;
      tags[w]  = rd_q[w].tag;
    end
    for (int w = ASSOC - 1; w >= 0; w--) begin
      if (rd_q[w].valid && rd_q[w].tag == tag_q) begin
        hit     = 1'b1;
        hit_way = WAY_BITS'(w);
      end
    end
  end

endmodule
