// casper_top: the near-cache stencil accelerator: NSPU stencil processing units, one beside each
// of the NSPU slices of the shared last-level cache, the interconnect with its slice-mapping
// injection points, and the command/completion controller.
//
// The host side is brought out as ports because the CPU cores, their private caches and the
// coherence protocol are not part of this design: a command port carrying the programming
// interface calls (casper_ctrl), and a host memory port (requester NSPU of the interconnect)
// through which the CPU reads and writes whole cache lines in the LLC. Each slice has its own
// memory port towards main memory (line write-backs and fills), also brought out.
//
// Configuration follows the evaluated system: 16 SPUs and 16 slices of 2 MB (16 ways x 2048
// sets x 64 B), 10-entry load queues, a 64-instruction buffer, 16 streams and 16 constants per
// SPU, and 128 kB blocks in the stencil segment. RESP_LAT (response pipeline of the
// interconnect) is this design's own stand-in for the mesh latency.
//
// Timing: commands are taken one per cycle when cmd_ready is high (never while running); host
// line accesses use valid/ready requests and get exactly one response each (host_resp_valid, a
// one-cycle pulse, never back-pressured); done stays high from completion to the next start.
// The per-SPU and per-slice activity strobes (ev_*) and spu_busy are left as internal nets,
// unused here, so that testbenches can count stalls, misses and splits; lint reports them as
// unused signals.
module casper_top
  import casper_pkg::*;
#(
  parameter int unsigned NSPU          = 16,
  parameter int unsigned SETS          = 2048,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned RESERVED_WAYS = 1,
  parameter int unsigned LQ_DEPTH      = 10,
  parameter int unsigned IBUF_DEPTH    = 64,
  parameter int unsigned BLOCK_BITS    = 17,
  parameter int unsigned RESP_LAT      = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  // commands from the CPU
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  host_cmd_t  cmd,
  output logic       busy,
  output logic       done,
  output logic       done_irq,
  output logic       init_done,
  // CPU access to the LLC (aligned whole lines)
  input  logic       host_req_valid,
  output logic       host_req_ready,
  input  req_op_e    host_req_op,
  input  line_addr_t host_req_line,
  input  line_data_t host_req_wdata,
  output logic       host_resp_valid,
  output logic       host_resp_is_store,
  output line_data_t host_resp_data,
  // main memory, one port per slice
  output logic       mem_req_valid  [NSPU],
  input  logic       mem_req_ready  [NSPU],
  output logic       mem_req_write  [NSPU],
  output line_addr_t mem_req_line   [NSPU],
  output line_data_t mem_req_wdata  [NSPU],
  input  logic       mem_resp_valid [NSPU],
  input  line_data_t mem_resp_data  [NSPU]
);
  localparam int unsigned NREQ = NSPU + 1;

  // ---------------- controller ----------------
  logic            seg_we, ibuf_we, const_we, start;
  paddr_t          seg_base, seg_size, stream_base;
  logic [5:0]      ibuf_idx;
  instr_t          ibuf_data;
  logic [6:0]      code_len;
  logic [3:0]      const_idx, stream_idx;
  dword_t          const_data;
  logic [NSPU-1:0] stream_we, nelem_we, spu_done;
  logic [31:0]     nelem;

  casper_ctrl #(.NSPU(NSPU)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .seg_we, .seg_base, .seg_size,
    .ibuf_we, .ibuf_idx, .ibuf_data, .code_len, .const_we, .const_idx, .const_data,
    .stream_we, .stream_idx, .stream_base, .nelem_we, .nelem, .start, .spu_done,
    .busy, .done, .done_irq);

  // ---------------- requesters ----------------
  logic      rq_valid [NREQ];
  logic      rq_ready [NREQ];
  llc_req_t  rq       [NREQ];
  logic      rs_valid [NREQ];
  llc_resp_t rs       [NREQ];

  for (genvar i = 0; i < NSPU; i++) begin : g_spu
    logic spu_busy, ev_lq_full, ev_head_wait;
    casper_spu #(.IBUF_DEPTH(IBUF_DEPTH), .LQ_DEPTH(LQ_DEPTH), .ID(i)) u_spu (
      .clk, .rst_n, .ibuf_we, .ibuf_idx, .ibuf_data, .code_len, .const_we, .const_idx,
      .const_data, .stream_we(stream_we[i]), .stream_idx, .stream_base,
      .nelem_we(nelem_we[i]), .nelem, .start, .busy(spu_busy), .done(spu_done[i]),
      .req_valid(rq_valid[i]), .req_ready(rq_ready[i]), .req(rq[i]),
      .resp_valid(rs_valid[i]), .resp(rs[i]), .ev_lq_full, .ev_head_wait);
  end

  always_comb begin
    rq_valid[NSPU]      = host_req_valid;
    rq[NSPU]            = '0;
    rq[NSPU].op         = host_req_op;
    rq[NSPU].spu        = 1'b0;
    rq[NSPU].line       = host_req_line;
    rq[NSPU].mask       = '1;
    rq[NSPU].src        = SRC_W'(NSPU);
    rq[NSPU].wdata      = host_req_wdata;
  end
  assign host_req_ready     = rq_ready[NSPU];
  assign host_resp_valid    = rs_valid[NSPU];
  assign host_resp_is_store = rs[NSPU].is_store;
  assign host_resp_data     = rs[NSPU].data;

  // ---------------- interconnect ----------------
  logic      sl_req_valid  [NSPU];
  logic      sl_req_ready  [NSPU];
  llc_req_t  sl_req        [NSPU];
  logic      sl_resp_valid [NSPU];
  logic      sl_resp_ready [NSPU];
  llc_resp_t sl_resp       [NSPU];
  logic [NREQ-1:0] ev_split;

  casper_noc #(.NREQ(NREQ), .NSLICE(NSPU), .BLOCK_BITS(BLOCK_BITS), .RESP_LAT(RESP_LAT)) u_noc (
    .clk, .rst_n, .seg_we, .seg_base, .seg_size, .rq_valid, .rq_ready, .rq, .rs_valid, .rs,
    .sl_req_valid, .sl_req_ready, .sl_req, .sl_resp_valid, .sl_resp_ready, .sl_resp, .ev_split);

  // ---------------- LLC slices ----------------
  logic [NSPU-1:0] slice_init;
  for (genvar j = 0; j < NSPU; j++) begin : g_slice
    logic ev_miss, ev_unaligned, ev_writeback;
    llc_slice #(.SETS(SETS), .WAYS(WAYS), .RESERVED_WAYS(RESERVED_WAYS)) u_slice (
      .clk, .rst_n, .init_done(slice_init[j]),
      .req_valid(sl_req_valid[j]), .req_ready(sl_req_ready[j]), .req(sl_req[j]),
      .resp_valid(sl_resp_valid[j]), .resp_ready(sl_resp_ready[j]), .resp(sl_resp[j]),
      .mem_req_valid(mem_req_valid[j]), .mem_req_ready(mem_req_ready[j]),
      .mem_req_write(mem_req_write[j]), .mem_req_line(mem_req_line[j]),
      .mem_req_wdata(mem_req_wdata[j]), .mem_resp_valid(mem_resp_valid[j]),
      .mem_resp_data(mem_resp_data[j]), .ev_miss, .ev_unaligned, .ev_writeback);
  end
  assign init_done = &slice_init;
endmodule
