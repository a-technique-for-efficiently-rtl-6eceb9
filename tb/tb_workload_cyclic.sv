// tb_workload_cyclic: a streaming workload that cycles over a footprint
// somewhat larger than the cache, the access pattern of a streaming program.
//
// Every set of every bank is visited by 10 lines in turn, round after round,
// all reads (1.25 times the capacity of the 8-way sets). Under plain LRU
// every access of such a loop misses: each line is evicted just before it
// is used again. The testbench keeps a plain-LRU model of the same trace to
// show this (its hit count must be 0). DFB keeps replacing in the upper part
// of the stack, so some blocks stay in the lower part long enough to be hit:
// the cache under test must show hits, and every read must return the
// memory content. The cache is hybrid_llc with 16 sets per bank and a
// 20000-cycle Z interval; Z adapts during the run.
module tb_workload_cyclic;
  import llc_pkg::*;
  localparam int unsigned NB = 8, SETS = 16, LINES = 10, ROUNDS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       init_done, req_valid = 0, req_ready, resp_valid, resp_ready;
  llc_req_t   req = '0;
  llc_resp_t  resp;
  logic       mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t   mem_req;
  mem_resp_t  mem_resp;
  logic [2:0] z;
  logic       z_updated;
  logic [NB-1:0] st_access, st_miss, st_early, st_writeback, st_fast_write, st_slow_write;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;

  hybrid_llc #(.SETS_PER_BANK(SETS), .Z_INTERVAL(20000)) dut (.*);
  main_memory_model u_mem (.*);

  assign resp_ready = 1'b1;

  longint hits, misses, responses;
  laddr_t expect_la [256];   // line address of each id in flight (at most 9)
  int     zmin = 7, zmax = 0;
  always @(posedge clk) if (rst_n && init_done) begin
    hits   += $countones(st_access & ~st_miss);
    misses += $countones(st_miss);
    if (int'(z) < zmin) zmin = int'(z);
    if (int'(z) > zmax) zmax = int'(z);
  end

  always @(posedge clk) if (rst_n && resp_valid) begin
    responses++;
    checks++;
    if (resp.rdata != u_mem.mem_init_line(expect_la[resp.id])) begin
      failures++;
      $display("FAIL read data, id %0d", resp.id);
    end
  end

  // plain LRU reference of the same trace
  int lru [NB*SETS][$];
  longint lru_hits;
  function automatic void lru_access(int key, int tag);
    int pos;
    pos = -1;
    foreach (lru[key][i]) if (lru[key][i] == tag) pos = i;
    if (pos >= 0) begin lru_hits++; lru[key].delete(pos); end
    else if (lru[key].size() == 8) void'(lru[key].pop_back());
    lru[key].push_front(tag);
  endfunction

  int seq;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(negedge clk);
    seq = 0;
    for (int r = 0; r < ROUNDS; r++)
      for (int t = 0; t < LINES; t++)
        for (int s = 0; s < SETS; s++)
          for (int b = 0; b < NB; b++) begin
            laddr_t la;
            la = laddr_t'((t + 1) << 7 | s << 3 | b);
            lru_access(b * SETS + s, t);
            req_valid = 1;
            expect_la[seq % 256] = la;
            req = '{we: 1'b0, addr: {la, 6'd0}, id: id_t'(seq % 256), wdata: '0};
            seq++;
            #1;
            while (!req_ready) begin @(negedge clk); #1; end
            @(negedge clk);
            req_valid = 0;
          end
    while (responses < ROUNDS * LINES * SETS * NB) @(negedge clk);
    checks++;
    if (lru_hits != 0) begin failures++; $display("FAIL LRU reference hit %0d times", lru_hits); end
    checks++;
    if (hits == 0) begin failures++; $display("FAIL DFB cache never hit"); end
    $display("accesses %0d, DFB hits %0d (miss rate %0d %%), LRU hits %0d, Z range %0d..%0d",
             hits + misses, hits, (100 * misses) / (hits + misses), lru_hits, zmin, zmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
