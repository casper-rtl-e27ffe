// spu_load_queue: the SPU load queue (10 entries in the published configuration). Each issued
// load takes the entry at the tail; the entry index travels with the request as its tag. LLC
// responses may return in any order (local hits, misses and remote slices differ in latency)
// and are written into their entry; the execution unit only ever takes the head entry, and only
// once its data is complete, so operands reach the MAC in program order.
//
// A load the injection point split into two packets (its two cache lines live in different LLC
// slices) gets two responses, each carrying the lanes of its own slice with the rest zero; the
// entry ORs them and is complete after the second. The per-entry instruction information
// (constant index, clear, enable-output) is kept alongside. Interface: alloc_* (valid/ready,
// returns alloc_tag combinationally), resp_* (one response per cycle), head_* (valid when the
// head is complete, consumed by head_pop). Allocation, response and pop may all occur in one
// cycle. Split handling and the handshake are this design's choices.
module spu_load_queue
  import casper_pkg::*;
#(
  parameter int unsigned DEPTH = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             alloc_valid,
  output logic             alloc_ready,
  output logic [TAG_W-1:0] alloc_tag,
  input  logic [3:0]       alloc_cidx,
  input  logic             alloc_clr,
  input  logic             alloc_out_en,
  input  logic             resp_valid,
  input  logic [TAG_W-1:0] resp_tag,
  input  logic             resp_split,
  input  line_data_t       resp_data,
  output logic             head_valid,
  output line_data_t       head_data,
  output logic [3:0]       head_cidx,
  output logic             head_clr,
  output logic             head_out_en,
  input  logic             head_pop,
  output logic             empty
);
  typedef struct packed {
    logic       valid;
    logic [1:0] got;     // responses received
    logic       split;   // two responses expected
    logic [3:0] cidx;
    logic       clr;
    logic       out_en;
  } lq_entry_t;

  lq_entry_t  ent  [DEPTH];
  line_data_t data [DEPTH];
  logic [TAG_W-1:0] head, tail;
  logic [$clog2(DEPTH+1)-1:0] count;

  function automatic logic [TAG_W-1:0] incr(logic [TAG_W-1:0] p);
    return (p == TAG_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign alloc_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign alloc_tag   = tail;
  assign empty       = (count == '0);

  assign head_valid  = ent[head].valid && ent[head].got != 2'd0 &&
                       (!ent[head].split || ent[head].got == 2'd2);
  assign head_data   = data[head];
  assign head_cidx   = ent[head].cidx;
  assign head_clr    = ent[head].clr;
  assign head_out_en = ent[head].out_en;

  logic do_alloc, do_pop;
  assign do_alloc = alloc_valid && alloc_ready;
  assign do_pop   = head_pop && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      tail  <= '0;
      count <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent[i]  <= '0;
        data[i] <= '0;
      end
    end else begin
      if (resp_valid) begin
        data[resp_tag]      <= data[resp_tag] | resp_data;
        ent[resp_tag].got   <= ent[resp_tag].got + 2'd1;
        ent[resp_tag].split <= resp_split;
      end
      if (do_pop) begin
        ent[head].valid <= 1'b0;
        head            <= incr(head);
      end
      if (do_alloc) begin
        ent[tail]  <= '{valid: 1'b1, got: 2'd0, split: 1'b0, cidx: alloc_cidx,
                        clr: alloc_clr, out_en: alloc_out_en};
        data[tail] <= '0;
        tail       <= incr(tail);
      end
      count <= count + ($bits(count))'(do_alloc) - ($bits(count))'(do_pop);
    end
  end

  // A response must target an allocated entry that is still waiting for data.
  a_resp_live: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> ent[resp_tag].valid);
endmodule
