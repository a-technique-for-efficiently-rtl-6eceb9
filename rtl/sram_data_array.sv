// sram_data_array: data blocks of the SRAM ("fast") ways of one bank.
//
// The first N_FAST physical ways of every set are built from SRAM. This
// module stores their 64-byte blocks as a memory of SETS*WAYS lines and
// models the SRAM access time in cycles: a read returns its data RD_CYCLES
// cycles after it is accepted, a write finishes WR_CYCLES cycles after it is
// accepted. The defaults come from the paper's 1 MB SRAM figures (hit
// latency 0.697 ns, write latency 0.3 ns) at its 2 GHz clock, rounded up to
// whole cycles. The array serves one access at a time (a bank serves one
// access at a time).
//
// Interface: req with req_ready high starts an access to (req_set, req_way)
// at a clock edge t. done is high for the one cycle before edge
// t + latency, with rdata valid in that cycle for a read, so a latency of L
// cycles means the result is taken at edge t + L. req_ready is low while an
// access is in progress.
module sram_data_array #(
  parameter int unsigned SETS      = 2048,
  parameter int unsigned WAYS      = 2,
  parameter int unsigned RD_CYCLES = 2,
  parameter int unsigned WR_CYCLES = 1,
  localparam int unsigned SET_BITS = $clog2(SETS),
  localparam int unsigned WAY_BITS = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned CNT_BITS = $clog2(((RD_CYCLES > WR_CYCLES) ? RD_CYCLES : WR_CYCLES) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [SET_BITS-1:0]  req_set,
  input  logic [WAY_BITS-1:0]  req_way,
  input  llc_pkg::line_t       req_wdata,
  output logic                 done,
  output llc_pkg::line_t       rdata
);

  llc_pkg::line_t      mem [SETS*WAYS];
  logic [CNT_BITS-1:0] remaining;
  logic                busy;

  initial begin
    assert (RD_CYCLES >= 1 && WR_CYCLES >= 1) else $error("latencies must be at least one cycle");
  end

  assign req_ready = !busy;
  assign done      = busy && (remaining == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      remaining <= '0;
    end else begin
      if (!busy && req) begin
        busy      <= 1'b1;
        remaining <= req_we ? CNT_BITS'(WR_CYCLES - 1) : CNT_BITS'(RD_CYCLES - 1);
      end else if (busy) begin
        if (remaining == '0) begin
          busy <= 1'b0;
        end else begin
          remaining <= remaining - 1'b1;
        end
      end
    end
  end

  // Storage: the write is committed when it is accepted, the read is sampled
  // when it is accepted and presented until the next read.
  always_ff @(posedge clk) begin
    if (!busy && req) begin
      if (req_we) mem[32'(req_set) * WAYS + 32'(req_way)] <= req_wdata;
      else        rdata <= mem[32'(req_set) * WAYS + 32'(req_way)];
    end
  end

endmodule
