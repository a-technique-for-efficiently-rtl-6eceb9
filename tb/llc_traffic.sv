// llc_traffic: traffic generator and checker for the whole cache, shared by
// the end-to-end testbenches.
//
// It runs three phases against the cache's request/response port:
//   hot    : random reads and writes to HOT_PER_SET lines in each of the
//            first sets of every bank (fewer lines than ways, so mostly hits)
//            for PHASE_CYCLES cycles; afterwards Z must be 5 (miss rate
//            below 80 %).
//   stream : reads and writes of lines never used before, all misses, for
//            PHASE_CYCLES cycles, like a streaming program; afterwards Z
//            must be 2 (miss rate 100 %). Dirty victims are written back.
//   verify : every hot line and every streamed line that was written is
//            read again and must return its last written value (from the
//            cache or back from memory).
// Requests are issued without waiting for earlier responses; each carries a
// unique id and the expected read data is fixed when it is issued (a bank
// serves its requests in order). The checker counts how often each
// mechanism of the design occurs (hit, miss, early DFB eviction of an SRAM
// block, dirty writeback, SRAM write, PCM write, Z change, requests in flight
// in several banks, request stall on a busy bank, response and memory-port
// contention, out-of-order response) and counts a failure for any that never
// occurs. PHASE_CYCLES should cover at least two Z intervals.
module llc_traffic #(
  parameter int unsigned N_BANKS       = 8,
  parameter int unsigned HOT_SETS      = 4,
  parameter int unsigned HOT_PER_SET   = 4,
  parameter longint unsigned PHASE_CYCLES = 10000,
  parameter int unsigned MAX_STREAM    = 4096
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init_done,
  output logic               req_valid,
  input  logic               req_ready,
  output llc_pkg::llc_req_t  req,
  input  logic               resp_valid,
  output logic               resp_ready,
  input  llc_pkg::llc_resp_t resp,
  input  logic [2:0]         z,
  input  logic [N_BANKS-1:0] st_access, st_miss, st_early, st_writeback, st_fast_write, st_slow_write,
  input  logic [N_BANKS-1:0] bank_busy,
  input  logic [N_BANKS-1:0] bank_resp_valid,
  input  logic [N_BANKS-1:0] bank_mem_valid,
  output logic               done,
  output int                 checks,
  output int                 failures
);
  import llc_pkg::*;

  localparam int unsigned BANK_BITS = $clog2(N_BANKS);

  longint cyc;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- events
  longint ev_hit, ev_miss, ev_early, ev_wb, ev_fw, ev_sw, ev_zchg, ev_multi, ev_stall;
  longint ev_resp_conf, ev_mem_conf, ev_ooo;
  int     max_busy;
  logic [2:0] z_prev;
  always @(posedge clk) if (rst_n && init_done) begin
    ev_hit   += $countones(st_access & ~st_miss);
    ev_miss  += $countones(st_miss);
    ev_early += $countones(st_early);
    ev_wb    += $countones(st_writeback);
    ev_fw    += $countones(st_fast_write);
    ev_sw    += $countones(st_slow_write);
    if (z != z_prev) ev_zchg++;
    if ($countones(bank_busy) > 1) ev_multi++;
    if ($countones(bank_busy) > max_busy) max_busy = $countones(bank_busy);
    if (req_valid && !req_ready) ev_stall++;
    if ($countones(bank_resp_valid) > 1) ev_resp_conf++;
    if ($countones(bank_mem_valid) > 1) ev_mem_conf++;
    z_prev = z;
  end

  // -------------------------------------------------------------- scoreboard
  line_t  golden [laddr_t];
  bit     pend    [256];
  bit     pend_we [256];
  line_t  pend_d  [256];
  longint pend_t  [256];
  int     n_pend;
  int     next_id;

  assign resp_ready = 1'b1;

  always @(posedge clk) if (rst_n && resp_valid) begin
    int i;
    i = int'(resp.id);
    checks++;
    if (!pend[i] || pend_we[i] != resp.we) begin
      failures++;
      $display("FAIL unexpected response id %0d", i);
    end else begin
      if (!resp.we) begin
        checks++;
        if (resp.rdata != pend_d[i]) begin failures++; $display("FAIL read data id %0d", i); end
      end
      for (int k = 0; k < 256; k++) if (pend[k] && pend_t[k] < pend_t[i]) begin ev_ooo++; break; end
      pend[i] = 0;
      n_pend--;
    end
  end

  function automatic line_t init_line(laddr_t la);
    line_t l;
    for (int unsigned i = 0; i < LINE_BITS / 64; i++)
      l[i*64 +: 64] = {16'hC0DE, 8'(i), 40'(la)};
    return l;
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic issue(bit we, laddr_t la);
    line_t d;
    while (pend[next_id]) @(negedge clk);
    d = rand_line();
    pend[next_id]    = 1;
    pend_we[next_id] = we;
    pend_t[next_id]  = cyc;
    pend_d[next_id]  = golden.exists(la) ? golden[la] : init_line(la);
    n_pend++;
    if (we) golden[la] = d;
    req_valid = 1;
    req = '{we: we, addr: {la, 6'd0}, id: id_t'(next_id), wdata: d};
    #1;
    while (!req_ready) begin   // held until the edge that takes it
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    req_valid = 0;
    next_id = (next_id + 1) % 256;
  endtask

  // hot lines: HOT_PER_SET tags in each of sets 0..HOT_SETS-1 of every bank
  function automatic laddr_t hot_line(int k);
    int b, s, t;
    b = k % N_BANKS;
    s = (k / N_BANKS) % HOT_SETS;
    t = k / (N_BANKS * HOT_SETS);
    return laddr_t'(((64'(t) + 64'd1) << 40) | (64'(s) << BANK_BITS) | 64'(b));
  endfunction

  laddr_t streamed [$];

  initial begin
    longint t_end;
    int n_hot;
    laddr_t la;
    checks = 0; failures = 0; done = 0;
    req_valid = 0; req = '0;
    n_hot = N_BANKS * HOT_SETS * HOT_PER_SET;
    @(posedge rst_n);
    while (!init_done) @(negedge clk);
    @(negedge clk);
    // hot phase
    t_end = cyc + longint'(PHASE_CYCLES);
    while (cyc < t_end) issue($urandom_range(99) < 40, hot_line($urandom_range(n_hot - 1)));
    checks++;
    if (z != 3'd5) begin failures++; $display("FAIL Z after hot phase %0d, expected 5", z); end
    // streaming phase: fresh lines walking through all sets of every bank
    t_end = cyc + longint'(PHASE_CYCLES);
    for (longint n = 0; cyc < t_end; n++) begin
      la = laddr_t'((64'd1 << 41) | 64'(n));
      if ($urandom_range(1) == 1 && streamed.size() < MAX_STREAM) begin
        issue(1, la);
        streamed.push_back(la);
      end else issue(0, la);
    end
    checks++;
    if (z != 3'd2) begin failures++; $display("FAIL Z after streaming phase %0d, expected 2", z); end
    // verify phase
    for (int k = 0; k < n_hot; k++) issue(0, hot_line(k));
    foreach (streamed[i]) issue(0, streamed[i]);
    while (n_pend > 0) @(negedge clk);
    checks++;
    if (ev_hit == 0 || ev_miss == 0 || ev_early == 0 || ev_wb == 0 || ev_fw == 0 || ev_sw == 0 ||
        ev_zchg < 2 || ev_multi == 0 || ev_stall == 0 || ev_resp_conf == 0 || ev_mem_conf == 0 ||
        ev_ooo == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    checks++;
    if (max_busy != N_BANKS) begin failures++; $display("FAIL at most %0d banks busy at once", max_busy); end
    $display("events: hits %0d misses %0d early-DFB %0d writebacks %0d sram-writes %0d pcm-writes %0d",
             ev_hit, ev_miss, ev_early, ev_wb, ev_fw, ev_sw);
    $display("events: Z changes %0d, cycles with >1 bank busy %0d (max %0d), stalls %0d, resp contention %0d, mem contention %0d, out-of-order responses %0d",
             ev_zchg, ev_multi, max_busy, ev_stall, ev_resp_conf, ev_mem_conf, ev_ooo);
    $display("SRAM share of cache writes: %0d %%", (100 * ev_fw) / (ev_fw + ev_sw));
    done = 1;
  end
endmodule
