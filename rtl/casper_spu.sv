// casper_spu: one stencil processing unit (SPU), placed next to one LLC slice.
//
// Blocks, as in the published SPU diagram: instruction buffer -> decoder -> load queue (which
// issues requests towards the LLC and receives responses from the local slice or, through the
// interconnect, from remote slices) -> execution unit, with the stream buffer feeding the decoder
// and the constant buffer feeding the execution unit. Results leave the execution unit as stores
// to the LLC.
//
// Operation. After start the SPU replays its code_len-instruction program once per output
// vector of eight doubles, for ceil(n/8) vectors, where n was set by setNElements. Every
// instruction issues one (possibly shifted) vector load from its stream and allocates a load-
// queue entry; the execution unit takes the load queue's head in order, multiplies it by the
// instruction's constant and accumulates. An instruction with enable-output makes the updated
// accumulator a store to the current position of stream 0, which then advances by one vector.
// Up to one instruction is issued per cycle; stores share the single request port and take
// priority over loads, and a full load queue or a full store buffer stalls issue. done rises when
// every load has been consumed and every store acknowledged.
//
// The choices of this design, not the published one: stream 0 is the output stream; the store
// buffer depth (SBUF_DEPTH); loads not taken while stores wait; done as a level until the next
// start. Request port: valid/ready; responses are always accepted.
module casper_spu
  import casper_pkg::*;
#(
  parameter int unsigned IBUF_DEPTH = 64,
  parameter int unsigned NSTREAM    = 16,
  parameter int unsigned NCONST     = 16,
  parameter int unsigned LQ_DEPTH   = 10,
  parameter int unsigned SBUF_DEPTH = 4,
  parameter int unsigned ID         = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration (from the controller)
  input  logic        ibuf_we,
  input  logic [5:0]  ibuf_idx,
  input  instr_t      ibuf_data,
  input  logic [6:0]  code_len,
  input  logic        const_we,
  input  logic [3:0]  const_idx,
  input  dword_t      const_data,
  input  logic        stream_we,
  input  logic [3:0]  stream_idx,
  input  paddr_t      stream_base,
  input  logic        nelem_we,
  input  logic [31:0] nelem,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // LLC request port (towards the injection point) and response port
  output logic        req_valid,
  input  logic        req_ready,
  output llc_req_t    req,
  input  logic        resp_valid,
  input  llc_resp_t   resp,
  // activity strobes
  output logic        ev_lq_full,   // a ready instruction waited because the load queue was full
  output logic        ev_head_wait  // the execution unit waited for the head's data
);
  // ---------------- configuration state ----------------
  logic [31:0] n_elem_q, n_iter, issue_iter;
  logic [5:0]  pc;
  logic        running;

  assign n_iter = (n_elem_q + 32'd7) >> 3;

  // ---------------- fetch / decode ----------------
  instr_t      ins;
  logic [3:0]  d_sidx, d_cidx;
  paddr_t      s_base, o_base;
  logic [31:0] s_pos, o_pos;
  line_addr_t  d_line;
  shdr_e       d_shdr;
  logic [2:0]  d_shamt;
  logic        d_clr, d_out_en, d_adv, d_unaligned;

  spu_instr_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n, .we(ibuf_we), .waddr(ibuf_idx[$clog2(IBUF_DEPTH)-1:0]), .wdata(ibuf_data),
    .raddr(pc[$clog2(IBUF_DEPTH)-1:0]), .rdata(ins));

  spu_decoder u_dec (
    .instr(ins), .sidx(d_sidx), .s_base, .s_pos, .line(d_line), .shdr(d_shdr), .shamt(d_shamt),
    .cidx(d_cidx), .clr(d_clr), .out_en(d_out_en), .adv(d_adv), .unaligned_o(d_unaligned));

  logic load_fire, store_fire, store_pending, can_issue;

  spu_stream_buffer #(.DEPTH(NSTREAM)) u_sbuf (
    .clk, .rst_n, .cfg_we(stream_we), .cfg_idx(stream_idx[$clog2(NSTREAM)-1:0]),
    .cfg_base(stream_base), .rd_idx(d_sidx[$clog2(NSTREAM)-1:0]), .rd_base(s_base),
    .rd_pos(s_pos), .rd_adv(load_fire && d_adv), .out_base(o_base), .out_pos(o_pos),
    .out_adv(store_fire));

  // ---------------- load queue ----------------
  logic             lq_ready, lq_empty, head_valid, head_clr, head_out_en, head_pop;
  logic [TAG_W-1:0] lq_tag;
  line_data_t       head_data;
  logic [3:0]       head_cidx;

  spu_load_queue #(.DEPTH(LQ_DEPTH)) u_lq (
    .clk, .rst_n, .alloc_valid(load_fire), .alloc_ready(lq_ready), .alloc_tag(lq_tag),
    .alloc_cidx(d_cidx), .alloc_clr(d_clr), .alloc_out_en(d_out_en),
    .resp_valid(resp_valid && !resp.is_store), .resp_tag(resp.tag), .resp_split(resp.split),
    .resp_data(resp.data), .head_valid, .head_data, .head_cidx, .head_clr, .head_out_en,
    .head_pop, .empty(lq_empty));

  // ---------------- constants and execution unit ----------------
  dword_t     cval;
  logic       eu_out_valid, eu_busy;
  line_data_t eu_out;

  spu_const_buffer #(.DEPTH(NCONST)) u_cbuf (
    .clk, .rst_n, .we(const_we), .waddr(const_idx[$clog2(NCONST)-1:0]), .wdata(const_data),
    .raddr(head_cidx[$clog2(NCONST)-1:0]), .rdata(cval));

  spu_exec_unit u_eu (
    .clk, .rst_n, .in_valid(head_pop), .in_data(head_data), .in_const(cval), .in_clr(head_clr),
    .in_out_en(head_out_en), .out_valid(eu_out_valid), .out_data(eu_out), .busy(eu_busy));

  // ---------------- store buffer ----------------
  line_data_t sbuf [SBUF_DEPTH];
  logic [$clog2(SBUF_DEPTH)-1:0] sb_rd, sb_wr;
  logic [$clog2(SBUF_DEPTH+1)-1:0] sb_cnt;
  logic [2:0]  eu_pend;          // outputs in the execution pipeline
  logic [15:0] st_out;           // stores sent, not yet acknowledged

  assign store_pending = (sb_cnt != '0);
  assign head_pop  = running && head_valid &&
                     (32'(sb_cnt) + 32'(eu_pend) < 32'(SBUF_DEPTH));

  // ---------------- request port ----------------
  paddr_t o_addr;
  assign o_addr    = stream_addr(o_base, o_pos);
  assign can_issue = running && (issue_iter < n_iter) && lq_ready;
  assign req_valid = store_pending || can_issue;
  assign store_fire = req_ready && store_pending;
  assign load_fire  = req_ready && !store_pending && can_issue;

  always_comb begin
    req       = '0;
    req.spu   = 1'b1;
    req.src   = SRC_W'(ID);
    req.mask  = '1;
    if (store_pending) begin
      req.op    = OP_STORE;
      req.line  = o_addr[PA_W-1:6];
      req.wdata = sbuf[sb_rd];
    end else begin
      req.op    = OP_LOAD;
      req.line  = d_line;
      req.shdr  = d_shdr;
      req.shamt = d_shamt;
      req.tag   = lq_tag;
    end
  end

  assign ev_lq_full   = running && (issue_iter < n_iter) && !lq_ready;
  assign ev_head_wait = running && !lq_empty && !head_valid;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_elem_q   <= '0;
      issue_iter <= '0;
      pc         <= '0;
      running    <= 1'b0;
      done       <= 1'b0;
      sb_rd      <= '0;
      sb_wr      <= '0;
      sb_cnt     <= '0;
      eu_pend    <= '0;
      st_out     <= '0;
      for (int i = 0; i < SBUF_DEPTH; i++) sbuf[i] <= '0;
    end else begin
      if (nelem_we && !running) n_elem_q <= nelem;
      if (start && !running) begin
        running    <= 1'b1;
        done       <= 1'b0;
        issue_iter <= '0;
        pc         <= '0;
      end
      if (load_fire) begin
        if (7'(pc) + 7'd1 >= code_len) begin
          pc         <= '0;
          issue_iter <= issue_iter + 32'd1;
        end else begin
          pc <= pc + 6'd1;
        end
      end
      // store buffer
      if (eu_out_valid) begin
        sbuf[sb_wr] <= eu_out;
        sb_wr       <= (32'(sb_wr) == SBUF_DEPTH - 1) ? '0 : sb_wr + 1'b1;
      end
      if (store_fire) sb_rd <= (32'(sb_rd) == SBUF_DEPTH - 1) ? '0 : sb_rd + 1'b1;
      sb_cnt  <= sb_cnt + ($bits(sb_cnt))'(eu_out_valid) - ($bits(sb_cnt))'(store_fire);
      eu_pend <= eu_pend + ((head_pop && head_out_en) ? 3'd1 : 3'd0) - (eu_out_valid ? 3'd1 : 3'd0);
      st_out  <= st_out + (store_fire ? 16'd1 : 16'd0)
                        - ((resp_valid && resp.is_store) ? 16'd1 : 16'd0);
      if (running && !start && issue_iter >= n_iter && lq_empty && !eu_busy && eu_pend == '0 &&
          sb_cnt == '0 && st_out == '0 && !(resp_valid && resp.is_store)) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  assign busy = running;

  // Streams must start on a cache-line boundary in this design.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) load_fire |-> !d_unaligned);
endmodule
