// llc_bank: one bank of the SRAM-PCM hybrid last-level cache.
//
// The cache has N_BANKS independent banks; each owns SETS sets of ASSOC ways
// and serves one access at a time, so the banks together allow N_BANKS
// accesses in flight, as in the paper. Ways 0..N_FAST-1 of every set are
// SRAM (sram_data_array), the rest PCM (pcm_data_array). Tags and
// valid/dirty bits are in tag_array, the LRU_Order of every set in
// lru_stack, and the victim of a miss is chosen by dfb_victim_select with the
// cache-wide limit Z.
//
// Tags are read before data (a sequential access, as the array timing
// assumes). Flow of one request (full 64-byte line read or write):
//   IDLE   accept the request, read tags and LRU orders of its set.
//   LOOKUP compare tags (this is the miss-detection cycle). Report access
//          and, on a miss, miss to z_update.
//          hit : promote the way to MRU; read it, or write it and mark it
//                dirty.
//          miss: pick the DFB victim. If it is valid and dirty, read it and
//                write it back to memory. A read miss then fetches the line
//                from memory; a write miss allocates without a fetch since
//                the whole line is written. The victim way is filled, its
//                tag written (dirty for a write) and promoted to MRU.
//   DATA   wait for the data array. Read hits answer with the data, writes
//          answer when the write has finished; a read miss answers as soon
//          as the memory data arrives, while the fill write goes on.
//   FINISH wait until the response has been taken, then accept the next.
// A write to a PCM way keeps the bank busy for the PCM write latency, a write
// to an SRAM way for the SRAM write latency: the reason DFB steers blocks
// into the SRAM ways.
//
// After reset the bank sweeps all sets (SETS cycles): every way invalid and
// the LRU order with the SRAM ways on top, then raises init_done.
//
// Paper: 8 ways, 2 SRAM ways, 8 banks, 64-byte lines, DFB victim choice,
// write energy/latency by region. This design's own choices: request and
// memory handshakes, write-allocate without fetch for full-line writes,
// writeback of dirty victims, early read-miss response, the INIT sweep, and
// the bit-slicing of the line address: bank = laddr[BANK_BITS-1:0],
// set = the next SET_BITS bits, tag = the rest.
module llc_bank #(
  parameter int unsigned BANK_ID   = 0,
  parameter int unsigned N_BANKS   = 8,
  parameter int unsigned SETS      = 2048,
  parameter int unsigned ASSOC     = 8,
  parameter int unsigned N_FAST    = 2,
  parameter int unsigned SRAM_RD   = 2,
  parameter int unsigned SRAM_WR   = 1,
  parameter int unsigned PCM_RD    = 2,
  parameter int unsigned PCM_WR    = 301,
  localparam int unsigned BANK_BITS = (N_BANKS > 1) ? $clog2(N_BANKS) : 0,
  localparam int unsigned SET_BITS  = $clog2(SETS),
  localparam int unsigned TAG_BITS  = llc_pkg::LADDR_BITS - BANK_BITS - SET_BITS,
  localparam int unsigned WAY_BITS  = $clog2(ASSOC),
  localparam int unsigned OW        = $clog2(ASSOC),
  localparam int unsigned N_SLOW    = ASSOC - N_FAST,
  localparam int unsigned FW_BITS   = (N_FAST > 1) ? $clog2(N_FAST) : 1,
  localparam int unsigned SW_BITS   = (N_SLOW > 1) ? $clog2(N_SLOW) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [2:0]          z,
  output logic                init_done,
  // request / response
  input  logic                req_valid,
  output logic                req_ready,
  input  llc_pkg::llc_req_t   req,
  output logic                resp_valid,
  input  logic                resp_ready,
  output llc_pkg::llc_resp_t  resp,
  // main memory
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output llc_pkg::mem_req_t   mem_req,
  input  logic                mem_resp_valid,
  input  llc_pkg::mem_resp_t  mem_resp,
  // event pulses
  output logic                st_access,
  output logic                st_miss,
  output logic                st_early,
  output logic                st_writeback,
  output logic                st_fast_write,
  output logic                st_slow_write
);
  import llc_pkg::*;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_DATA, S_VREAD, S_WB, S_FETCH, S_FETCH_WAIT,
    S_FILL, S_FINISH
  } state_t;

  state_t                   state;
  llc_req_t                 req_q;
  logic                     hit_q;
  logic [WAY_BITS-1:0]      way_q;
  logic [ASSOC-1:0][OW-1:0] order_q;
  logic [TAG_BITS-1:0]      vtag_q;
  line_t                    line_q;
  logic [SET_BITS-1:0]      init_cnt;
  llc_resp_t                resp_q;
  logic                     resp_pend;

  laddr_t              req_laddr, q_laddr;
  logic [SET_BITS-1:0] req_set, set_q;
  logic [TAG_BITS-1:0] req_tag, tag_q;

  assign req_laddr = req.addr[ADDR_BITS-1:OFFSET_BITS];
  assign q_laddr   = req_q.addr[ADDR_BITS-1:OFFSET_BITS];
  assign req_set   = req_laddr[BANK_BITS +: SET_BITS];
  assign req_tag   = req_laddr[BANK_BITS + SET_BITS +: TAG_BITS];
  assign set_q     = q_laddr[BANK_BITS +: SET_BITS];
  assign tag_q     = q_laddr[BANK_BITS + SET_BITS +: TAG_BITS];

  // ---------------------------------------------------------------- arrays
  logic                      t_hit;
  logic [WAY_BITS-1:0]       t_hit_way;
  logic [ASSOC-1:0]          t_valid, t_dirty;
  logic [ASSOC-1:0][TAG_BITS-1:0] t_tags;
  logic                      t_wr_en;
  logic                      t_wr_dirty;
  logic [WAY_BITS-1:0]       t_wr_way;
  logic [ASSOC-1:0][OW-1:0]  l_order;
  logic                      l_touch;
  logic [WAY_BITS-1:0]       l_touch_way;
  logic [ASSOC-1:0][OW-1:0]  l_touch_order;
  logic [WAY_BITS-1:0]       victim;
  logic                      victim_early;
  logic                      accept;

  assign accept = (state == S_IDLE) && req_valid;

  tag_array #(.SETS(SETS), .ASSOC(ASSOC), .TAG_BITS(TAG_BITS)) u_tags (
    .clk, .rd_en(accept), .rd_set(req_set), .rd_tag(req_tag),
    .valid(t_valid), .dirty(t_dirty), .tags(t_tags), .hit(t_hit), .hit_way(t_hit_way),
    .wr_en(t_wr_en), .wr_set(set_q), .wr_way(t_wr_way), .wr_valid(1'b1),
    .wr_dirty(t_wr_dirty), .wr_tag(tag_q),
    .clr_en(state == S_INIT), .clr_set(init_cnt)
  );

  lru_stack #(.SETS(SETS), .ASSOC(ASSOC)) u_lru (
    .clk, .rd_en(accept), .rd_set(req_set), .rd_order(l_order),
    .touch_en(l_touch), .touch_set(set_q), .touch_way(l_touch_way),
    .touch_order(l_touch_order),
    .init_en(state == S_INIT), .init_set(init_cnt)
  );

  dfb_victim_select #(.ASSOC(ASSOC), .N_FAST(N_FAST)) u_dfb (
    .order(l_order), .z, .victim, .early(victim_early)
  );

  // Data arrays: one access at a time, steered by the way number.
  logic                arr_req, arr_we;
  logic [WAY_BITS-1:0] arr_way;
  line_t               arr_wdata;
  logic                arr_fast;
  logic                s_ready, s_done, p_ready, p_done;
  line_t               s_rdata, p_rdata, arr_rdata;
  logic                arr_done;

  assign arr_fast  = 32'(arr_way) < N_FAST;
  assign arr_done  = s_done | p_done;
  assign arr_rdata = s_done ? s_rdata : p_rdata;

  sram_data_array #(.SETS(SETS), .WAYS(N_FAST), .RD_CYCLES(SRAM_RD), .WR_CYCLES(SRAM_WR)) u_sram (
    .clk, .rst_n, .req(arr_req && arr_fast), .req_ready(s_ready), .req_we(arr_we),
    .req_set(set_q), .req_way(FW_BITS'(arr_way)), .req_wdata(arr_wdata),
    .done(s_done), .rdata(s_rdata)
  );

  pcm_data_array #(.SETS(SETS), .WAYS(N_SLOW), .RD_CYCLES(PCM_RD), .WR_CYCLES(PCM_WR)) u_pcm (
    .clk, .rst_n, .req(arr_req && !arr_fast), .req_ready(p_ready), .req_we(arr_we),
    .req_set(set_q), .req_way(SW_BITS'(32'(arr_way) - N_FAST)), .req_wdata(arr_wdata),
    .done(p_done), .rdata(p_rdata)
  );

  // ------------------------------------------------------------ controller
  always_comb begin
    arr_req       = 1'b0;
    arr_we        = 1'b0;
    arr_way       = way_q;
    arr_wdata     = req_q.wdata;
    t_wr_en       = 1'b0;
    t_wr_dirty    = 1'b1;
    t_wr_way      = way_q;
    l_touch       = 1'b0;
    l_touch_way   = way_q;
    l_touch_order = order_q;
    mem_req_valid = 1'b0;
    mem_req       = '{we: 1'b0, laddr: q_laddr, src: 4'(BANK_ID), wdata: line_q};
    st_access     = 1'b0;
    st_miss       = 1'b0;
    st_early      = 1'b0;
    unique case (state)
      S_LOOKUP: begin
        st_access = 1'b1;
        if (t_hit) begin
          arr_req       = 1'b1;
          arr_way       = t_hit_way;
          arr_we        = req_q.we;
          l_touch       = 1'b1;
          l_touch_way   = t_hit_way;
          l_touch_order = l_order;
          t_wr_en       = req_q.we;   // mark the line dirty
          t_wr_way      = t_hit_way;
        end else begin
          st_miss  = 1'b1;
          st_early = victim_early;
          if (t_valid[victim] && t_dirty[victim]) begin
            arr_req = 1'b1;           // read the dirty victim
            arr_way = victim;
          end
        end
      end
      S_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.laddr = laddr_t'({vtag_q, set_q, BANK_BITS'(BANK_ID)});
      end
      S_FETCH: mem_req_valid = 1'b1;
      S_FILL: begin
        arr_req    = 1'b1;
        arr_we     = 1'b1;
        arr_wdata  = req_q.we ? req_q.wdata : line_q;
        t_wr_en    = 1'b1;
        t_wr_dirty = req_q.we;
        l_touch    = 1'b1;
      end
      default: ;
    endcase
  end

  assign st_fast_write = arr_req && arr_we && arr_fast;
  assign st_slow_write = arr_req && arr_we && !arr_fast;
  assign st_writeback  = (state == S_WB) && mem_req_ready;
  assign req_ready     = (state == S_IDLE);
  assign init_done     = (state != S_INIT);
  assign resp_valid    = resp_pend;
  assign resp          = resp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_cnt  <= '0;
      resp_pend <= 1'b0;
      req_q     <= '0;
      hit_q     <= 1'b0;
      way_q     <= '0;
      order_q   <= '0;
      vtag_q    <= '0;
      line_q    <= '0;
      resp_q    <= '0;
    end else begin
      if (resp_valid && resp_ready) resp_pend <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (32'(init_cnt) == SETS - 1) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          req_q <= req;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          hit_q   <= t_hit;
          order_q <= l_order;
          if (t_hit) begin
            way_q <= t_hit_way;
            state <= S_DATA;
          end else begin
            way_q  <= victim;
            vtag_q <= t_tags[victim];
            if (t_valid[victim] && t_dirty[victim]) state <= S_VREAD;
            else if (req_q.we)                      state <= S_FILL;
            else                                    state <= S_FETCH;
          end
        end
        S_VREAD: if (arr_done) begin
          line_q <= arr_rdata;
          state  <= S_WB;
        end
        S_WB: if (mem_req_ready) state <= req_q.we ? S_FILL : S_FETCH;
        S_FETCH: if (mem_req_ready) state <= S_FETCH_WAIT;
        S_FETCH_WAIT: if (mem_resp_valid) begin
          line_q    <= mem_resp.rdata;
          resp_q    <= '{id: req_q.id, we: 1'b0, hit: 1'b0, rdata: mem_resp.rdata};
          resp_pend <= 1'b1;
          state     <= S_FILL;
        end
        S_FILL: state <= S_DATA;
        S_DATA: if (arr_done) begin
          if (req_q.we || hit_q) begin
            resp_q    <= '{id: req_q.id, we: req_q.we, hit: hit_q,
                           rdata: req_q.we ? '0 : arr_rdata};
            resp_pend <= 1'b1;
          end
          state <= S_FINISH;
        end
        S_FINISH: if (!resp_pend || resp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  a_arr_free: assert property (@(posedge clk) disable iff (!rst_n)
      arr_req |-> (arr_fast ? s_ready : p_ready));
  a_resp_hold: assert property (@(posedge clk) disable iff (!rst_n)
      resp_valid && !resp_ready |=> resp_valid && $stable(resp));
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
      mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
      mem_resp_valid |-> state == S_FETCH_WAIT);

endmodule
