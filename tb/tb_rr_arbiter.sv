// tb_rr_arbiter: self-checking test of the round-robin arbiter.
//
// Applies random request vectors and random accept, and compares valid and
// grant with a reference that keeps its own pointer. Also checks that with
// all requesters busy and every grant accepted, each requester is served
// exactly once in every N grants.
module tb_rr_arbiter;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req = 0;
  logic         accept = 0, valid;
  logic [2:0]   grant;
  int checks = 0, failures = 0;
  int ptr = 0;
  int served [N];

  rr_arbiter #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int eg;
      bit ev;
      @(negedge clk);
      req = (n < 800) ? N'($urandom) : '1;
      accept = (n < 800) ? 1'($urandom) : 1'b1;
      #1;
      ev = 0; eg = 0;
      for (int k = 0; k < N; k++) if (!ev && req[(ptr + k) % N]) begin ev = 1; eg = (ptr + k) % N; end
      checks++;
      if (valid != ev || (ev && int'(grant) != eg)) begin
        failures++;
        $display("FAIL req=%b ptr=%0d: valid %0d grant %0d, expected %0d %0d", req, ptr, valid, grant, ev, eg);
      end
      if (ev && accept) begin
        ptr = (eg + 1) % N;
        if (n >= 800) served[eg]++;
      end
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (served[i] != 1200 / N) begin failures++; $display("FAIL requester %0d served %0d times", i, served[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
