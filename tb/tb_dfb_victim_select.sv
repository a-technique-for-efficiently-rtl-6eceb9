// tb_dfb_victim_select: self-checking test of the DFB victim choice.
//
// Drives random LRU stacks (permutations of positions 0..7) and every Z from
// 1 to 7, and compares the victim and the early flag with a reference that
// follows the algorithm in the opposite direction: it first looks for the
// lowest fast way at position >= Z, and only if there is none returns the way
// at the bottom of the stack. Also checks the start-up case: SRAM ways on
// top and Z = 4 evict the bottom PCM way, then after two fills way 1 is
// taken early.
module tb_dfb_victim_select;
  localparam int unsigned ASSOC = 8, N_FAST = 2;
  logic [ASSOC-1:0][2:0] order;
  logic [2:0]            z;
  logic [2:0]            victim;
  logic                  early;
  int checks = 0, failures = 0;

  dfb_victim_select #(.ASSOC(ASSOC), .N_FAST(N_FAST)) dut (.*);

  task automatic expect_victim(input int v, input bit e);
    int fast, bottom, exp_v;
    bit exp_e;
    fast = -1;
    for (int w = N_FAST - 1; w >= 0; w--) if (int'(order[w]) + 1 >= int'(z)) fast = w;
    for (int w = 0; w < ASSOC; w++) if (order[w] == 3'(ASSOC - 1)) bottom = w;
    // a fast way can only be preempted by the bottom way if that way comes first
    if (fast >= 0 && !(bottom < fast)) begin exp_v = fast; exp_e = (int'(order[fast]) != ASSOC - 1); end
    else begin exp_v = bottom; exp_e = 0; end
    checks++;
    if (int'(victim) != exp_v || early != exp_e) begin
      failures++;
      $display("FAIL order=%h z=%0d victim=%0d early=%0d expected %0d/%0d", order, z, victim, early, exp_v, exp_e);
    end
    if (v >= 0) begin
      checks++;
      if (int'(victim) != v || early != e) begin
        failures++;
        $display("FAIL directed: victim=%0d early=%0d expected %0d/%0d", victim, early, v, e);
      end
    end
  endtask

  initial begin
    int p [ASSOC];
    // start of execution: way w at position w, Z = 4 -> bottom way 7
    for (int w = 0; w < ASSOC; w++) order[w] = 3'(w);
    z = 3'd4; #1 expect_victim(7, 0);
    // after two fills (ways 7 and 6 promoted) way 1 sits at position 3, i.e.
    // LRU_Order 4 = Z: it is dead
    order = '{3'd1, 3'd0, 3'd7, 3'd6, 3'd5, 3'd4, 3'd3, 3'd2};  // way 7 .. way 0
    #1 expect_victim(1, 1);
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < ASSOC; i++) p[i] = i;
      p.shuffle();
      for (int w = 0; w < ASSOC; w++) order[w] = 3'(p[w]);
      z = 3'($urandom_range(7, 1));
      #1 expect_victim(-1, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
