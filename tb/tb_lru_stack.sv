// tb_lru_stack: self-checking test of the per-set LRU_Order store.
//
// Initialises every set, checks the start-up order (way w at position w,
// SRAM ways on top), then applies random promotions. Each promotion reads
// the set from the block and writes it back promoted, as the bank does; a
// reference model keeps the stack as a list of ways from MRU to LRU (a
// different representation from the block's) and every read is compared
// with it.
module tb_lru_stack;
  localparam int unsigned SETS = 16, ASSOC = 8, OW = 3;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                     rd_en = 0, touch_en = 0, init_en = 0;
  logic [3:0]               rd_set = 0, touch_set = 0, init_set = 0;
  logic [2:0]               touch_way = 0;
  logic [ASSOC-1:0][OW-1:0] rd_order, touch_order = '0;
  int checks = 0, failures = 0;

  lru_stack #(.SETS(SETS), .ASSOC(ASSOC)) dut (.*);

  int stack [SETS][$];   // ways, MRU first

  task automatic read_set(input int s, output logic [ASSOC-1:0][OW-1:0] o);
    @(negedge clk); rd_en = 1; rd_set = 4'(s);
    @(negedge clk); rd_en = 0; o = rd_order;
  endtask

  task automatic check_set(input int s, input logic [ASSOC-1:0][OW-1:0] o);
    for (int w = 0; w < ASSOC; w++) begin
      int pos;
      pos = -1;
      foreach (stack[s][i]) if (stack[s][i] == w) pos = i;
      checks++;
      if (int'(o[w]) != pos) begin
        failures++;
        $display("FAIL set %0d way %0d: order %0d expected %0d", s, w, o[w], pos);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ASSOC-1:0][OW-1:0] o;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); init_en = 1; init_set = 4'(s);
      // a touch in the same cycle must lose to the initialisation
      touch_en = 1; touch_set = 4'(s); touch_way = 3'd5; touch_order = '1;
      stack[s] = {};
      for (int w = 0; w < ASSOC; w++) stack[s].push_back(w);
    end
    @(negedge clk); init_en = 0; touch_en = 0;
    for (int s = 0; s < SETS; s++) begin
      read_set(s, o);
      check_set(s, o);
    end
    for (int n = 0; n < 600; n++) begin
      int s, w, idx;
      s = $urandom_range(SETS - 1);
      // favour ways near the top to exercise partial shifts
      w = (n % 3 == 0) ? $urandom_range(ASSOC - 1) : stack[s][$urandom_range(3)];
      read_set(s, o);
      @(negedge clk);
      touch_en = 1; touch_set = 4'(s); touch_way = 3'(w); touch_order = o;
      @(negedge clk); touch_en = 0;
      foreach (stack[s][i]) if (stack[s][i] == w) idx = i;
      stack[s].delete(idx);
      stack[s].push_front(w);
      read_set(s, o);
      check_set(s, o);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
