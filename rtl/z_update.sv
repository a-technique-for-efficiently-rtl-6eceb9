// z_update: periodic update of the DFB limit Z (the paper's Algorithm 3).
//
// All banks report one pulse per lookup on `access` and one per miss on
// `miss`. The counters sum them over a fixed interval of INTERVAL cycles
// (5 M cycles in the paper). At the end of the interval the miss rate
// Mr = misses / accesses selects Z:
//   Mr < 80 % -> 5,   Mr < 90 % -> 4,   Mr < 99 % -> 3,   otherwise 2.
// The comparison is done without division: misses*100 < T*accesses.
// Z starts at Z_INIT (4 in the paper). Both counters restart at every
// interval boundary, and the accesses of the boundary cycle count towards
// the new interval. Z is one 3-bit register shared by the whole cache, as
// the paper states. An interval without any access leaves Z unchanged; the
// paper does not say what happens then. `update` pulses for one cycle when Z
// is re-evaluated.
module z_update #(
  parameter int unsigned INTERVAL = 5_000_000,
  parameter int unsigned Z_INIT   = 4,
  parameter int unsigned N_PORTS  = 8,
  parameter int unsigned CNT_BITS = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORTS-1:0] access,
  input  logic [N_PORTS-1:0] miss,
  output logic [2:0]         z,
  output logic               update
);

  logic [$clog2(INTERVAL+1)-1:0] cycle_cnt;
  logic [CNT_BITS-1:0]           acc_cnt, miss_cnt;
  logic [CNT_BITS-1:0]           acc_inc, miss_inc;
  logic                          last;
  logic [2:0]                    z_new;

  always_comb begin
    acc_inc  = '0;
    miss_inc = '0;
    for (int unsigned p = 0; p < N_PORTS; p++) begin
      acc_inc  += CNT_BITS'(access[p]);
      miss_inc += CNT_BITS'(miss[p]);
    end
  end

  assign last = (cycle_cnt == ($bits(cycle_cnt))'(INTERVAL - 1));

  always_comb begin
    logic [CNT_BITS+7:0] m100, a80, a90, a99;
    m100 = (CNT_BITS+8)'(miss_cnt) * (CNT_BITS+8)'(100);
    a80  = (CNT_BITS+8)'(acc_cnt)  * (CNT_BITS+8)'(80);
    a90  = (CNT_BITS+8)'(acc_cnt)  * (CNT_BITS+8)'(90);
    a99  = (CNT_BITS+8)'(acc_cnt)  * (CNT_BITS+8)'(99);
    if (acc_cnt == '0) z_new = z;
    else if (m100 < a80) z_new = 3'd5;
    else if (m100 < a90) z_new = 3'd4;
    else if (m100 < a99) z_new = 3'd3;
    else                 z_new = 3'd2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle_cnt <= '0;
      acc_cnt   <= '0;
      miss_cnt  <= '0;
      z         <= 3'(Z_INIT);
      update    <= 1'b0;
    end else begin
      update <= last;
      if (last) begin
        cycle_cnt <= '0;
        acc_cnt   <= acc_inc;
        miss_cnt  <= miss_inc;
        z         <= z_new;
      end else begin
        cycle_cnt <= cycle_cnt + 1'b1;
        acc_cnt   <= acc_cnt + acc_inc;
        miss_cnt  <= miss_cnt + miss_inc;
      end
    end
  end

endmodule
