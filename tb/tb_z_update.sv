// tb_z_update: self-checking test of the periodic Z update.
//
// Uses a 100-cycle interval. Each interval receives a chosen number of
// accesses and misses, up to 8 per cycle, and nothing in its last cycle.
// After the interval boundary Z must equal the value of the paper's
// thresholds, computed here in real arithmetic (Mr < 0.80 -> 5, < 0.90 -> 4,
// < 0.99 -> 3, else 2), including the exact boundary rates 80 %, 90 % and
// 99 %. Also checks Z = 4 after reset, an interval without accesses (Z kept),
// and that `update` pulses exactly once per INTERVAL cycles.
module tb_z_update;
  localparam int unsigned INTERVAL = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] access = 0, miss = 0;
  logic [2:0] z;
  logic       update;
  int checks = 0, failures = 0;
  int updates = 0;

  z_update #(.INTERVAL(INTERVAL), .Z_INIT(4), .N_PORTS(8)) dut (.*);

  always @(posedge clk) if (rst_n && update) updates++;

  function automatic int ref_z(int a, int m, int zold);
    real mr;
    if (a == 0) return zold;
    mr = real'(m) / real'(a);
    if (mr < 0.80) return 5;
    if (mr < 0.90) return 4;
    if (mr < 0.99) return 3;
    return 2;
  endfunction

  task automatic run_interval(int a, int m);
    int sent;
    sent = 0;
    // called at a negedge; the values set here are sampled by the next edge
    for (int c = 0; c < INTERVAL; c++) begin
      access = 0; miss = 0;
      if (c < INTERVAL - 1)
        for (int p = 0; p < 8; p++)
          if (sent < a) begin
            access[p] = 1;
            miss[p]   = (sent < m);
            sent++;
          end
      @(negedge clk);
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
    int cases [][2] = '{'{20,10}, '{20,16}, '{20,17}, '{20,18}, '{20,19}, '{100,99},
                        '{100,98}, '{0,0}, '{20,20}, '{5,0}, '{100,90}, '{100,89},
                        '{700,699}, '{700,560}, '{300,1}};
    int zexp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (z != 3'd4) begin failures++; $display("FAIL initial Z %0d", z); end
    zexp = 4;
    // the first edge after rst_n rises is cycle 0 of the first interval
    for (int k = 0; k < cases.size(); k++) begin
      int a, m;
      a = cases[k][0]; m = cases[k][1];
      run_interval(a, m);
      zexp = ref_z(a, m, zexp);
      checks++;
      if (int'(z) != zexp) begin
        failures++;
        $display("FAIL interval %0d: a=%0d m=%0d z=%0d expected %0d", k, a, m, z, zexp);
      end
    end
    @(negedge clk);   // the last update pulse follows its boundary by one cycle
    checks++;
    if (updates != cases.size()) begin
      failures++;
      $display("FAIL %0d updates, expected %0d", updates, cases.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
