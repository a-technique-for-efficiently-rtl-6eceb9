// tb_hybrid_llc_full: end-to-end test of the cache at its full size.
//
// hybrid_llc with every parameter at its default: 8 MB, 8 banks of 2048
// sets, 8 ways of which 2 SRAM, Z re-evaluated every 5 M cycles from Z = 4.
// llc_traffic runs its hot phase and its streaming phase for 11 M cycles
// each, so each phase fills at least one whole Z interval: Z must reach 5
// after the hot phase and 2 after the streaming phase. The verify phase then
// reads back every hot line and a sample of the streamed lines that were
// written. Runs for a few minutes.
module tb_hybrid_llc_full;
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

  hybrid_llc dut (.*);
  main_memory_model u_mem (.*);
  llc_traffic #(.N_BANKS(NB), .PHASE_CYCLES(11_000_000), .MAX_STREAM(2000)) u_traffic (
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
    repeat (30_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
