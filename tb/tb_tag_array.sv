// tb_tag_array: self-checking test of the tag store and tag comparison.
//
// Clears all sets, then mixes random way writes with lookups. Lookup tags are
// taken from the reference model half of the time (expected hits) and are
// random otherwise. valid, dirty, tags, hit and hit_way are compared with the
// reference one cycle after each read. A clear is also checked to override a
// write in the same cycle.
module tb_tag_array;
  localparam int unsigned SETS = 16, ASSOC = 8, TB = 10;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                      rd_en = 0, wr_en = 0, clr_en = 0, wr_valid = 0, wr_dirty = 0, hit;
  logic [3:0]                rd_set = 0, wr_set = 0, clr_set = 0;
  logic [2:0]                wr_way = 0, hit_way;
  logic [TB-1:0]             rd_tag = 0, wr_tag = 0;
  logic [ASSOC-1:0]          valid, dirty;
  logic [ASSOC-1:0][TB-1:0]  tags;
  int checks = 0, failures = 0;

  tag_array #(.SETS(SETS), .ASSOC(ASSOC), .TAG_BITS(TB)) dut (.*);

  bit       m_v [SETS][ASSOC];
  bit       m_d [SETS][ASSOC];
  int       m_t [SETS][ASSOC];

  task automatic lookup(int s, int t);
    int ew;
    bit eh;
    @(negedge clk); rd_en = 1; rd_set = 4'(s); rd_tag = TB'(t);
    @(negedge clk); rd_en = 0;
    eh = 0; ew = 0;
    for (int w = ASSOC - 1; w >= 0; w--) if (m_v[s][w] && m_t[s][w] == t) begin eh = 1; ew = w; end
    checks++;
    if (hit != eh || (eh && int'(hit_way) != ew)) begin
      failures++;
      $display("FAIL lookup set %0d tag %0d: hit %0d way %0d, expected %0d %0d", s, t, hit, hit_way, eh, ew);
    end
    for (int w = 0; w < ASSOC; w++) begin
      checks++;
      if (valid[w] != m_v[s][w] || (m_v[s][w] && (dirty[w] != m_d[s][w] || int'(tags[w]) != m_t[s][w]))) begin
        failures++;
        $display("FAIL entry set %0d way %0d", s, w);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); clr_en = 1; clr_set = 4'(s);
      wr_en = 1; wr_set = 4'(s); wr_way = 3'd2; wr_valid = 1; wr_tag = 10'd5;
      for (int w = 0; w < ASSOC; w++) m_v[s][w] = 0;
    end
    @(negedge clk); clr_en = 0; wr_en = 0;
    for (int s = 0; s < SETS; s++) lookup(s, 5);
    for (int n = 0; n < 1500; n++) begin
      int s, w, t;
      s = $urandom_range(SETS - 1);
      if ($urandom_range(1)) begin
        w = $urandom_range(ASSOC - 1);
        t = $urandom_range(31);
        // keep tags unique per set, as the cache does
        for (int k = 0; k < ASSOC; k++) if (k != w && m_v[s][k] && m_t[s][k] == t) t = -1;
        if (t >= 0) begin
          @(negedge clk);
          wr_en = 1; wr_set = 4'(s); wr_way = 3'(w); wr_valid = 1; wr_dirty = 1'($urandom); wr_tag = TB'(t);
          m_v[s][w] = 1; m_d[s][w] = wr_dirty; m_t[s][w] = t;
          @(negedge clk); wr_en = 0;
        end
      end
      w = $urandom_range(ASSOC - 1);
      lookup(s, ($urandom_range(1) && m_v[s][w]) ? m_t[s][w] : $urandom_range(31));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
