// tb_llc_bank: self-checking test of one cache bank against a reference
// model, with main memory modelled by main_memory_model.
//
// The bank is bank 3 of 8 with 4 sets (so evictions are frequent) and the
// paper's SRAM/PCM latencies. Requests go one at a time to a small pool of
// lines per set, as random full-line reads and writes, while Z is changed
// between requests over 1..7. The reference model keeps its own tags, dirty
// bits and LRU stacks (as lists of ways, MRU first) and its own DFB victim
// search. Checked for every request: read data (against a golden copy of
// every line written), hit flag, id, the bank's event pulses (lookup, miss,
// early fast-block eviction, writeback, SRAM write, PCM write), and for hits
// the exact latency from request to response: 1 tag cycle + array latency +
// 1 response cycle (read hit 4, SRAM write hit 3, PCM write hit 303 cycles).
// After the traffic every line is read back once more.
module tb_llc_bank;
  import llc_pkg::*;
  localparam int unsigned SETS = 4, ASSOC = 8, N_FAST = 2, BANK = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       init_done, req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  llc_req_t   req = '0;
  llc_resp_t  resp;
  logic       mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t   mem_req;
  mem_resp_t  mem_resp;
  logic [2:0] z = 3'd4;
  logic       st_access, st_miss, st_early, st_writeback, st_fast_write, st_slow_write;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;

  llc_bank #(.BANK_ID(BANK), .N_BANKS(8), .SETS(SETS), .ASSOC(ASSOC), .N_FAST(N_FAST)) dut (.*);
  main_memory_model u_mem (.clk, .rst_n, .mem_req_valid, .mem_req_ready, .mem_req,
                           .mem_resp_valid, .mem_resp, .n_reads, .n_writes);

  // event counters
  int c_acc, c_miss, c_early, c_wb, c_fw, c_sw;
  always @(posedge clk) if (rst_n) begin
    c_acc += int'(st_access); c_miss += int'(st_miss); c_early += int'(st_early);
    c_wb  += int'(st_writeback); c_fw += int'(st_fast_write); c_sw += int'(st_slow_write);
  end
  longint cyc;
  always @(posedge clk) cyc++;

  // reference model
  bit     r_v [SETS][ASSOC];
  bit     r_d [SETS][ASSOC];
  laddr_t r_t [SETS][ASSOC];
  int     r_stack [SETS][$];
  line_t  golden [laddr_t];
  int     e_acc, e_miss, e_early, e_wb, e_fw, e_sw;
  int     n_hit, n_pcm_write_hit;

  function automatic int pos_of(int s, int w);
    foreach (r_stack[s][i]) if (r_stack[s][i] == w) return i;
    return -1;
  endfunction

  function automatic void promote(int s, int w);
    r_stack[s].delete(pos_of(s, w));
    r_stack[s].push_front(w);
  endfunction

  function automatic int dfb(int s, int zz, output bit early);
    early = 0;
    for (int w = 0; w < ASSOC; w++) begin
      if (w < N_FAST && pos_of(s, w) + 1 >= zz) begin
        early = (pos_of(s, w) != ASSOC - 1);
        return w;
      end
      if (pos_of(s, w) == ASSOC - 1) return w;
    end
    return -1;
  endfunction

  task automatic do_req(bit we, laddr_t la, int id);
    int s, hw, lat, exp_lat;
    bit hit, early;
    line_t d, exp_d;
    longint t0;
    s = int'(la[5:3]) % SETS;
    d = '0;
    for (int i = 0; i < LINE_BITS / 32; i++) d[i*32 +: 32] = $urandom;
    // model
    hit = 0; hw = 0;
    for (int w = 0; w < ASSOC; w++) if (r_v[s][w] && r_t[s][w] == la) begin hit = 1; hw = w; end
    exp_d = golden.exists(la) ? golden[la] : u_mem.mem_init_line(la);
    e_acc++;
    if (hit) begin
      n_hit++;
      promote(s, hw);
      if (we) begin
        r_d[s][hw] = 1;
        if (hw < N_FAST) e_fw++; else begin e_sw++; n_pcm_write_hit++; end
      end
      exp_lat = we ? (hw < N_FAST ? 3 : 303) : 4;
    end else begin
      int v;
      e_miss++;
      v = dfb(s, int'(z), early);
      if (early) e_early++;
      if (r_v[s][v] && r_d[s][v]) e_wb++;
      r_v[s][v] = 1; r_d[s][v] = we; r_t[s][v] = la;
      promote(s, v);
      if (v < N_FAST) e_fw++; else e_sw++;
      exp_lat = -1;
    end
    if (we) golden[la] = d;
    // drive
    @(negedge clk);
    req_valid = 1;
    req = '{we: we, addr: {la, 6'(id)}, id: id_t'(id), wdata: d};
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = int'(cyc - t0);
    @(negedge clk);
    checks++;
    if (resp.id != id_t'(id) || resp.we != we || resp.hit != hit) begin
      failures++;
      $display("FAIL req %0d la=%h: id %0d we %0d hit %0d, expected hit %0d", id, la, resp.id, resp.we, resp.hit, hit);
    end
    if (!we) begin
      checks++;
      if (resp.rdata != exp_d) begin failures++; $display("FAIL read data la=%h", la); end
    end
    if (exp_lat >= 0) begin
      checks++;
      if (lat != exp_lat) begin failures++; $display("FAIL latency %0d, expected %0d (we=%0d way=%0d)", lat, exp_lat, we, hw); end
    end
    // wait for the bank to finish a fill behind an early read-miss response
    while (!req_ready) @(negedge clk);
    checks++;
    if (c_acc != e_acc || c_miss != e_miss || c_early != e_early || c_wb != e_wb ||
        c_fw != e_fw || c_sw != e_sw) begin
      failures++;
      $display("FAIL events acc %0d/%0d miss %0d/%0d early %0d/%0d wb %0d/%0d fw %0d/%0d sw %0d/%0d",
               c_acc, e_acc, c_miss, e_miss, c_early, e_early, c_wb, e_wb, c_fw, e_fw, c_sw, e_sw);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    laddr_t lines [$];
    for (int s = 0; s < SETS; s++) begin
      for (int w = 0; w < ASSOC; w++) r_v[s][w] = 0;
      for (int w = 0; w < ASSOC; w++) r_stack[s].push_back(w);
    end
    // 12 tags per set: more lines than ways, so lines are evicted and return
    for (int s = 0; s < SETS; s++)
      for (int t = 0; t < 12; t++) lines.push_back(laddr_t'({36'(t * 977 + 1), 3'(s), 3'(BANK)}));
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(negedge clk);
    checks++;
    if (cyc < SETS) begin failures++; $display("FAIL init sweep too short"); end
    for (int n = 0; n < 1500; n++) begin
      if (n % 100 == 0) z = 3'($urandom_range(7, 1));
      // favour a few hot lines per set so hits happen
      do_req($urandom_range(99) < 40, lines[$urandom_range(1) ? $urandom_range(lines.size() - 1)
                                                              : $urandom_range(7)], n % 256);
    end
    foreach (lines[i]) do_req(0, lines[i], i);
    checks++;
    if (n_hit == 0 || e_early == 0 || e_wb == 0 || n_pcm_write_hit == 0) begin
      failures++;
      $display("FAIL coverage: hits %0d early %0d writebacks %0d pcm write hits %0d", n_hit, e_early, e_wb, n_pcm_write_hit);
    end
    $display("hits %0d misses %0d early %0d writebacks %0d sram writes %0d pcm writes %0d",
             n_hit, e_miss, e_early, e_wb, e_fw, e_sw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
