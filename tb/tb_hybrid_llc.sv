// tb_hybrid_llc: end-to-end test of the whole cache at reduced size.
//
// hybrid_llc with 8 banks of 16 sets (instead of 2048) and a Z interval of
// 6000 cycles (instead of 5 M); ways, SRAM/PCM split and latencies are the
// defaults. main_memory_model plays the DRAM, llc_traffic drives the hot,
// streaming and verify phases and checks data, Z and that every mechanism
// occurs.
module tb_hybrid_llc;
  import llc_pkg::*;
  localparam int unsigned NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       init_done, req_valid, req_ready, resp_valid, resp_ready;
  llc_req_t   req;
  llc_resp_t  resp;
  logic       mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t   mem_req;
  mem_resp_t  mem_resp;
  logic [2:0] z;
  logic       z_updated, done;
  logic [NB-1:0] st_access, st_miss, st_early, st_writeback, st_fast_write, st_slow_write;
  int unsigned n_reads, n_writes;
  int checks, failures;

  hybrid_llc #(.SETS_PER_BANK(16), .Z_INTERVAL(6000)) dut (.*);
  main_memory_model u_mem (.*);
  llc_traffic #(.N_BANKS(NB), .PHASE_CYCLES(15000), .MAX_STREAM(400)) u_traffic (
    .*, .bank_busy(~dut.b_req_ready), .bank_resp_valid(dut.b_resp_valid),
    .bank_mem_valid(dut.b_mem_valid));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  initial begin
    wait (rst_n);   // done is cleared by llc_traffic at time 0
    wait (done);
    $display("memory reads %0d writes %0d", n_reads, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
