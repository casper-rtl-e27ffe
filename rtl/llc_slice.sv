// llc_slice: one slice of the shared last-level cache (2 MB, 16 ways, 2048 sets of 64-byte
// lines in the published configuration) with the changes that let an SPU load a vector that
// starts on any 8-byte boundary in a single access.
//
// Organisation. Each way is split into SUBARRAYS (8) subarrays, subarray k holding the k-th
// 8-byte element of every line, one row per set (the published 16 kB subarray = 2048 x 64 bit).
// A request names a line, a shift direction and a shift amount. llc_row_select makes each
// subarray read either the requested row or the adjacent one (the previous line for a right
// shift, the next for a left shift). The tag array has a second read port, so the tags of both
// lines are matched in the same cycle; the two lines are consecutive and therefore always in
// different sets. All ways present their subarray outputs and the way-hit selection is done per
// subarray, from the hit way of whichever line that subarray read. llc_rotate then moves the
// first requested element into lane 0. A request's mask names the subarrays this slice must
// supply (the injection point clears the bits of a line that lives in another slice); the other
// lanes return zero.
//
// Timing: a request is taken into the lookup register, tag match and data read happen in the
// next cycle, and the response register is loaded at its end: two cycles from acceptance to
// response on a hit, one request per cycle. If a needed line is missing the request waits in the
// lookup register (a regular, blocking miss): a dirty victim is written back, the line is
// fetched over the memory port and installed, and the lookup is retried. A full-line store that
// misses allocates without fetching. Stores are acknowledged with a response.
//
// The published design reserves one LLC way for the CPU's other applications: requests from an
// SPU never allocate into the top RESERVED_WAYS ways; host requests may use any way. Victims:
// an invalid way of the set if there is one, otherwise a round-robin pointer (the evaluated
// system uses LRU; round-robin is this design's simplification). Coherence with private caches
// is not modelled. After reset the slice clears its tags one set per cycle (init_done).
module llc_slice
  import casper_pkg::*;
#(
  parameter int unsigned SETS          = 2048,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned RESERVED_WAYS = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       init_done,
  // request / response (from / to the interconnect)
  input  logic       req_valid,
  output logic       req_ready,
  input  llc_req_t   req,
  output logic       resp_valid,
  input  logic       resp_ready,
  output llc_resp_t  resp,
  // memory side: write-backs and fills
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output logic       mem_req_write,
  output line_addr_t mem_req_line,
  output line_data_t mem_req_wdata,
  input  logic       mem_resp_valid,
  input  line_data_t mem_resp_data,
  // activity strobes
  output logic       ev_miss,
  output logic       ev_unaligned,
  output logic       ev_writeback
);
  localparam int unsigned SUB   = LANES;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_BITS = LINE_W - SET_W;

  typedef struct packed {
    logic                valid;
    logic                dirty;
    logic [TAG_BITS-1:0] tag;
  } tag_entry_t;

  typedef enum logic [2:0] { S_INIT, S_RUN, S_WB, S_FILL_REQ, S_FILL_WAIT } state_e;
  state_e state;

  // ---------------- lookup register ----------------
  logic     r_valid;
  llc_req_t r;

  line_addr_t line_a, line_b;
  logic [SET_W-1:0] set_a, set_b;
  logic [SET_W-1:0] sub_row [SUB];
  logic [SUB-1:0]   adj;
  logic need_a, need_b;

  assign line_a = r.line;
  assign line_b = (r.shdr == SH_RIGHT) ? r.line - 1'b1 : r.line + 1'b1;
  assign set_a  = line_a[SET_W-1:0];
  assign set_b  = line_b[SET_W-1:0];

  llc_row_select #(.SETS(SETS), .SUBARRAYS(SUB)) u_rowsel (
    .row(set_a), .shdr(r.shdr), .shamt(r.shamt), .sub_row, .adj);

  assign need_a = (r.op == OP_STORE) || ((r.mask & ~adj) != '0);
  assign need_b = (r.op == OP_LOAD) && ((r.mask & adj) != '0);

  // ---------------- arrays ----------------
  tag_entry_t te_a [WAYS];
  tag_entry_t te_b [WAYS];
  tag_entry_t te_v;
  tag_entry_t te_m  [WAYS];
  tag_entry_t te_vw [WAYS];
  logic [63:0] rd   [WAYS][SUB];
  logic [63:0] vrd  [WAYS][SUB];
  logic [WAYS-1:0] hit_a, hit_b;
  logic [WAY_W-1:0] way_a, way_b;

  // write controls (one line per cycle)
  logic             tw_en;
  logic [WAY_W-1:0] tw_way;
  logic [SET_W-1:0] tw_set;
  tag_entry_t       tw_data;
  logic             dw_en;
  logic [WAY_W-1:0] dw_way;
  logic [SET_W-1:0] dw_set;
  line_data_t       dw_data;

  // miss bookkeeping
  line_addr_t       m_line;
  logic [WAY_W-1:0] m_way;
  logic [SET_W-1:0] m_set;
  logic [WAY_W-1:0] rr_ptr;
  logic [SET_W-1:0] init_set;
  line_addr_t       miss_line;
  logic [SET_W-1:0] miss_set;

  assign m_set = m_line[SET_W-1:0];

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    tag_entry_t tmem [SETS];
    always_ff @(posedge clk)
      if (tw_en && (tw_way == WAY_W'(w) || state == S_INIT)) tmem[tw_set] <= tw_data;
    assign te_a[w]  = tmem[set_a];
    assign te_b[w]  = tmem[set_b];
    assign te_m[w]  = tmem[miss_set];
    assign te_vw[w] = tmem[m_set];
    assign hit_a[w] = te_a[w].valid && te_a[w].tag == line_a[LINE_W-1:SET_W];
    assign hit_b[w] = te_b[w].valid && te_b[w].tag == line_b[LINE_W-1:SET_W];
    for (genvar k = 0; k < SUB; k++) begin : g_sub
      logic [63:0] smem [SETS];
      always_ff @(posedge clk)
        if (dw_en && dw_way == WAY_W'(w)) smem[dw_set] <= dw_data[64*k +: 64];
      assign rd[w][k]  = smem[sub_row[k]];
      assign vrd[w][k] = smem[m_set];
    end
  end

  always_comb begin
    way_a = '0;
    way_b = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (hit_a[w]) way_a = WAY_W'(w);
      if (hit_b[w]) way_b = WAY_W'(w);
    end
  end

  // ---------------- hit path: per-subarray way select and rotate ----------------
  line_data_t pre_rot, rot;
  always_comb begin
    for (int k = 0; k < SUB; k++)
      pre_rot[64*k +: 64] = r.mask[k] ? rd[adj[k] ? way_b : way_a][k] : 64'd0;
  end

  llc_rotate u_rot (.in(pre_rot), .shdr(r.shdr), .shamt(r.shamt), .out(rot));

  logic all_hit, out_free, r_done;
  assign all_hit  = (!need_a || hit_a != '0) && (!need_b || hit_b != '0);
  assign out_free = !resp_valid || resp_ready;
  assign r_done   = (state == S_RUN) && r_valid && all_hit && out_free;
  assign req_ready = (state == S_RUN) && (!r_valid || r_done);

  // ---------------- victim choice for a miss ----------------
  logic [WAY_W-1:0] victim;
  logic found_inv;
  int unsigned alloc_ways;

  assign miss_line = (need_a && hit_a == '0) ? line_a : line_b;
  assign miss_set  = miss_line[SET_W-1:0];
  assign te_v = te_vw[m_way];

  always_comb begin
    alloc_ways = r.spu ? (WAYS - RESERVED_WAYS) : WAYS;
    found_inv  = 1'b0;
    victim     = (32'(rr_ptr) < alloc_ways) ? rr_ptr : '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!found_inv && 32'(w) < alloc_ways && !te_m[w].valid) begin
        found_inv = 1'b1;
        victim    = WAY_W'(w);
      end
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_set     <= '0;
      r_valid      <= 1'b0;
      r            <= '0;
      resp_valid   <= 1'b0;
      resp         <= '0;
      m_line       <= '0;
      m_way        <= '0;
      rr_ptr       <= '0;
      ev_miss      <= 1'b0;
      ev_unaligned <= 1'b0;
      ev_writeback <= 1'b0;
    end else begin
      ev_miss      <= 1'b0;
      ev_unaligned <= 1'b0;
      ev_writeback <= 1'b0;
      if (resp_valid && resp_ready) resp_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS - 1)) state <= S_RUN;
        end
        S_RUN: begin
          if (r_done) begin
            resp_valid    <= 1'b1;
            resp.dst      <= r.src;
            resp.tag      <= r.tag;
            resp.is_store <= (r.op == OP_STORE);
            resp.split    <= r.split;
            resp.data     <= (r.op == OP_STORE) ? '0 : rot;
            ev_unaligned  <= (r.op == OP_LOAD) && (r.shamt != 3'd0);
          end else if (r_valid && !all_hit) begin
            ev_miss <= 1'b1;
            m_line  <= miss_line;
            m_way   <= victim;
            rr_ptr  <= (32'(rr_ptr) + 1 >= alloc_ways) ? '0 : rr_ptr + 1'b1;
            if (te_m[victim].valid && te_m[victim].dirty) state <= S_WB;
            else if (r.op == OP_STORE)                    state <= S_RUN;
            else                                          state <= S_FILL_REQ;
          end
          if (req_valid && req_ready) begin
            r_valid <= 1'b1;
            r       <= req;
          end else if (r_done) begin
            r_valid <= 1'b0;
          end
        end
        S_WB: if (mem_req_ready) begin
          ev_writeback <= 1'b1;
          state        <= (r.op == OP_STORE) ? S_RUN : S_FILL_REQ;
        end
        S_FILL_REQ: if (mem_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_resp_valid) state <= S_RUN;
        default: state <= S_RUN;
      endcase
    end
  end

  // store that misses: install directly (same cycle as the miss decision when no write-back,
  // else at the end of the write-back)
  logic store_alloc_now, store_alloc_wb;
  assign store_alloc_now = (state == S_RUN) && r_valid && !all_hit && (r.op == OP_STORE) &&
                           !(te_m[victim].valid && te_m[victim].dirty);
  assign store_alloc_wb  = (state == S_WB) && mem_req_ready && (r.op == OP_STORE);

  always_comb begin
    tw_en = 1'b0; tw_way = '0; tw_set = '0; tw_data = '0;
    dw_en = 1'b0; dw_way = '0; dw_set = '0; dw_data = '0;
    if (state == S_INIT) begin
      tw_en = 1'b1; tw_set = init_set;   // written into every way at once
    end else if (r_done && r.op == OP_STORE) begin
      tw_en = 1'b1; tw_way = way_a; tw_set = set_a;
      tw_data = '{valid: 1'b1, dirty: 1'b1, tag: line_a[LINE_W-1:SET_W]};
      dw_en = 1'b1; dw_way = way_a; dw_set = set_a; dw_data = r.wdata;
    end else if (store_alloc_now || store_alloc_wb) begin
      tw_en = 1'b1; tw_way = store_alloc_now ? victim : m_way;
      tw_set = store_alloc_now ? miss_set : m_set;
      tw_data = '{valid: 1'b1, dirty: 1'b1, tag: line_a[LINE_W-1:SET_W]};
      dw_en = 1'b1; dw_way = tw_way; dw_set = tw_set; dw_data = r.wdata;
    end else if (state == S_FILL_WAIT && mem_resp_valid) begin
      tw_en = 1'b1; tw_way = m_way; tw_set = m_set;
      tw_data = '{valid: 1'b1, dirty: 1'b0, tag: m_line[LINE_W-1:SET_W]};
      dw_en = 1'b1; dw_way = m_way; dw_set = m_set; dw_data = mem_resp_data;
    end
  end

  // ---------------- memory port ----------------
  always_comb begin
    mem_req_valid = (state == S_WB) || (state == S_FILL_REQ);
    mem_req_write = (state == S_WB);
    mem_req_line  = (state == S_WB) ? {te_v.tag, m_set} : m_line;
    for (int k = 0; k < SUB; k++) mem_req_wdata[64*k +: 64] = vrd[m_way][k];
  end

  assign init_done = (state != S_INIT);
endmodule
