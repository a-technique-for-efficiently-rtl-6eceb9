// tb_sram_data_array: self-checking test of the SRAM data array.
//
// Writes random lines to random (set, way) slots and reads them back,
// comparing with a reference copy. Every access is timed: done must come
// exactly the SRAM read latency (2 cycles) or write latency (1 cycles) after the
// access is accepted, req_ready must stay low meanwhile, and a request made
// while the array is busy must be ignored.
module tb_sram_data_array;
  import llc_pkg::*;
  localparam int unsigned SETS = 16, WAYS = 2, RD = 2, WR = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req = 0, req_ready, req_we = 0, done;
  logic [3:0]  req_set = 0;
  logic [0:0]  req_way = 0;
  line_t       req_wdata = '0, rdata;
  int checks = 0, failures = 0;

  sram_data_array #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  line_t model [SETS*WAYS];
  bit    written [SETS*WAYS];

  task automatic access(bit we, int s, int w, line_t d);
    int n;
    @(negedge clk);
    req = 1; req_we = we; req_set = 4'(s); req_way = w[$left(req_way):0]; req_wdata = d;
    checks++;
    if (!req_ready) begin failures++; $display("FAIL not ready"); end
    @(negedge clk);
    // a second request while busy must be ignored
    req_we = 1; req_wdata = ~d;
    n = 1;
    while (!done) begin
      if (req_ready) begin failures++; $display("FAIL ready while busy"); end
      @(negedge clk); req = 0; n++;
      if (n > 1000) break;
    end
    checks++;
    if (n != (we ? WR : RD)) begin
      failures++;
      $display("FAIL %s latency %0d cycles, expected %0d", we ? "write" : "read", n, we ? WR : RD);
    end
    if (!we) begin
      checks++;
      if (rdata != model[s*WAYS+w]) begin failures++; $display("FAIL data set %0d way %0d", s, w); end
    end else begin
      model[s*WAYS+w] = d;
      written[s*WAYS+w] = 1;
    end
    req = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int s, w;
      s = $urandom_range(SETS - 1);
      w = $urandom_range(WAYS - 1);
      if (!written[s*WAYS+w] || $urandom_range(1)) access(1, s, w, rand_line());
      else access(0, s, w, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
