// hybrid_llc: 8 MB SRAM-PCM hybrid last-level (L2) cache with dead-fast-block
// (DFB) replacement.
//
// The cache is 8-way set-associative with 64-byte lines. In every set the
// first N_FAST = 2 ways are SRAM, fast to write and practically unlimited in
// write endurance, and the other 6 are PCM, dense and low-leakage but slow
// and wear-limited on writes. DFB evicts an SRAM block as soon as it sinks to
// LRU position Z, so new blocks, and the writes that hit them, land in
// SRAM far more often than under LRU. Z (2..5) is re-chosen every
// Z_INTERVAL cycles from the cache-wide miss rate by z_update.
//
// The cache is split into N_BANKS llc_bank instances selected by the low bits
// of the line address; each serves one access at a time, so up to N_BANKS
// accesses are in flight. Requests enter through one valid/ready port and go
// to the bank that owns the address; a request waits (req_ready low) while
// its bank is busy. Responses carry the request id and may come back out of
// order; a round-robin rr_arbiter merges them onto the response port.
// Another rr_arbiter shares the main-memory port among the banks; memory
// read data must return with the `src` field of its request, which routes it
// to the bank that asked.
//
// Paper: capacity, associativity, 2 SRAM + 6 PCM ways, 8 banks, DFB,
// Z update every 5 M cycles starting at Z = 4, SRAM/PCM latencies (Table 1
// at 2 GHz). This design's own choices: the ports, the id-tagged responses,
// the bank interleaving and the arbiters.
//
// The st_* outputs are one-cycle event pulses per bank (lookup, miss, early
// DFB eviction of a fast block, dirty writeback, write into an SRAM way,
// write into a PCM way) for counting writes per region and hit rates.
module hybrid_llc #(
  parameter int unsigned N_BANKS       = 8,
  parameter int unsigned SETS_PER_BANK = 2048,
  parameter int unsigned ASSOC         = 8,
  parameter int unsigned N_FAST        = 2,
  parameter int unsigned SRAM_RD       = 2,
  parameter int unsigned SRAM_WR       = 1,
  parameter int unsigned PCM_RD        = 2,
  parameter int unsigned PCM_WR        = 301,
  parameter int unsigned Z_INTERVAL    = 5_000_000,
  parameter int unsigned Z_INIT        = 4,
  localparam int unsigned BANK_BITS    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               init_done,
  input  logic               req_valid,
  output logic               req_ready,
  input  llc_pkg::llc_req_t  req,
  output logic               resp_valid,
  input  logic               resp_ready,
  output llc_pkg::llc_resp_t resp,
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output llc_pkg::mem_req_t  mem_req,
  input  logic               mem_resp_valid,
  input  llc_pkg::mem_resp_t mem_resp,
  output logic [2:0]         z,
  output logic               z_updated,
  output logic [N_BANKS-1:0] st_access,
  output logic [N_BANKS-1:0] st_miss,
  output logic [N_BANKS-1:0] st_early,
  output logic [N_BANKS-1:0] st_writeback,
  output logic [N_BANKS-1:0] st_fast_write,
  output logic [N_BANKS-1:0] st_slow_write
);
  import llc_pkg::*;

  logic [N_BANKS-1:0]      b_req_valid, b_req_ready, b_resp_valid, b_resp_ready;
  logic [N_BANKS-1:0]      b_mem_valid, b_mem_ready, b_mem_resp_valid, b_init_done;
  llc_resp_t               b_resp [N_BANKS];
  mem_req_t                b_mem  [N_BANKS];
  logic [BANK_BITS-1:0]    sel, r_grant, m_grant;
  logic                    r_valid, m_valid;

  // Request routing: bank = low bits of the line address.
  assign sel = (N_BANKS > 1) ? req.addr[OFFSET_BITS +: BANK_BITS] : '0;

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      b_req_valid[b]      = req_valid && (32'(sel) == b);
      b_resp_ready[b]     = resp_ready && r_valid && (32'(r_grant) == b);
      b_mem_ready[b]      = mem_req_ready && m_valid && (32'(m_grant) == b);
      b_mem_resp_valid[b] = mem_resp_valid && (32'(mem_resp.src) == b);
    end
  end

  assign req_ready = b_req_ready[sel];
  assign init_done = &b_init_done;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    llc_bank #(
      .BANK_ID(b), .N_BANKS(N_BANKS), .SETS(SETS_PER_BANK), .ASSOC(ASSOC),
      .N_FAST(N_FAST), .SRAM_RD(SRAM_RD), .SRAM_WR(SRAM_WR),
      .PCM_RD(PCM_RD), .PCM_WR(PCM_WR)
    ) u_bank (
      .clk, .rst_n, .z, .init_done(b_init_done[b]),
      .req_valid(b_req_valid[b]), .req_ready(b_req_ready[b]), .req,
      .resp_valid(b_resp_valid[b]), .resp_ready(b_resp_ready[b]), .resp(b_resp[b]),
      .mem_req_valid(b_mem_valid[b]), .mem_req_ready(b_mem_ready[b]), .mem_req(b_mem[b]),
      .mem_resp_valid(b_mem_resp_valid[b]), .mem_resp,
      .st_access(st_access[b]), .st_miss(st_miss[b]), .st_early(st_early[b]),
      .st_writeback(st_writeback[b]), .st_fast_write(st_fast_write[b]),
      .st_slow_write(st_slow_write[b])
    );
  end

  rr_arbiter #(.N(N_BANKS)) u_resp_arb (
    .clk, .rst_n, .req(b_resp_valid), .accept(resp_ready), .valid(r_valid), .grant(r_grant)
  );
  assign resp_valid = r_valid;
  assign resp       = b_resp[r_grant];

  rr_arbiter #(.N(N_BANKS)) u_mem_arb (
    .clk, .rst_n, .req(b_mem_valid), .accept(mem_req_ready), .valid(m_valid), .grant(m_grant)
  );
  assign mem_req_valid = m_valid;
  assign mem_req       = b_mem[m_grant];

  z_update #(.INTERVAL(Z_INTERVAL), .Z_INIT(Z_INIT), .N_PORTS(N_BANKS)) u_z (
    .clk, .rst_n, .access(st_access), .miss(st_miss), .z, .update(z_updated)
  );

endmodule
