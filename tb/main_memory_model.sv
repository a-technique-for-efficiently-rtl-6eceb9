// main_memory_model: behavioural model of the DRAM main memory behind the
// cache, for testbenches only.
//
// Requests are taken in order, at most one every GAP cycles (the memory
// queue bandwidth: 10 GB/s at 2 GHz is 5 bytes per cycle, about 13 cycles per
// 64-byte line). A write updates the storage when it is accepted. A read
// returns its line LATENCY cycles after it is accepted (360 cycles), tagged
// with the src of its request. Lines never written read as
// mem_init_line(address), a pattern made from the address, so a testbench
// can work out expected read data by calling this function hierarchically. n_reads / n_writes count accepted
// requests.
module main_memory_model #(
  parameter int unsigned LATENCY = 360,
  parameter int unsigned GAP     = 13
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mem_req_valid,
  output logic                mem_req_ready,
  input  llc_pkg::mem_req_t   mem_req,
  output logic                mem_resp_valid,
  output llc_pkg::mem_resp_t  mem_resp,
  output int unsigned         n_reads,
  output int unsigned         n_writes
);
  import llc_pkg::*;

  function automatic line_t mem_init_line(laddr_t la);
    line_t l;
    for (int unsigned i = 0; i < LINE_BITS / 64; i++)
      l[i*64 +: 64] = {16'hC0DE, 8'(i), 40'(la)};
    return l;
  endfunction

  line_t       store [laddr_t];
  longint unsigned cycle;
  longint unsigned next_ok;
  longint unsigned due_q [$];
  mem_resp_t       data_q [$];

  assign mem_req_ready = rst_n && (cycle >= next_ok);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle          <= 0;
      next_ok        <= 0;
      n_reads        <= 0;
      n_writes       <= 0;
      mem_resp_valid <= 1'b0;
      mem_resp       <= '0;
    end else begin
      cycle          <= cycle + 1;
      mem_resp_valid <= 1'b0;
      if (mem_req_valid && mem_req_ready) begin
        next_ok <= cycle + 64'(GAP);
        if (mem_req.we) begin
          store[mem_req.laddr] = mem_req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          due_q.push_back(cycle + 64'(LATENCY) - 1);
          data_q.push_back('{src: mem_req.src,
                             rdata: store.exists(mem_req.laddr) ? store[mem_req.laddr]
                                                               : mem_init_line(mem_req.laddr)});
          n_reads <= n_reads + 1;
        end
      end
      if (due_q.size() > 0 && due_q[0] <= cycle) begin
        void'(due_q.pop_front());
        mem_resp       <= data_q.pop_front();
        mem_resp_valid <= 1'b1;
      end
    end
  end
endmodule
