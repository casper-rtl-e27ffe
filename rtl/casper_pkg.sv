// casper_pkg: types and constants shared by the stencil processing units (SPUs), the
// last-level-cache (LLC) slices and the interconnect of the near-cache stencil accelerator.
//
// The 15-bit instruction layout (constant index, stream index, shift direction, shift amount,
// clear-accumulator, enable-output, advance-stream, most significant first) and the field widths
// follow the published instruction format. The request/response packet layout, the physical
// address width and the identifier widths are this design's own choices.
package casper_pkg;

  // Vector datapath: 8 lanes of 64-bit doubles = one 64-byte cache line.
  localparam int unsigned LANES      = 8;
  localparam int unsigned ELEM_W     = 64;
  localparam int unsigned LINE_W_BITS = LANES * ELEM_W;   // 512

  // Physical address width (bytes) and the line address width derived from it.
  localparam int unsigned PA_W   = 48;
  localparam int unsigned LINE_W = PA_W - 6;

  // Identifier widths carried in packets: requester (SPU or host) and load-queue tag.
  localparam int unsigned SRC_W = 5;
  localparam int unsigned TAG_W = 4;

  typedef logic [ELEM_W-1:0]      dword_t;
  typedef logic [LINE_W_BITS-1:0] line_data_t;
  typedef logic [LINE_W-1:0]      line_addr_t;
  typedef logic [PA_W-1:0]        paddr_t;

  // Shift direction encoding, as in the published Jacobi-2D listing: 1 = right (towards lower
  // addresses, row -1), 0 = left (towards higher addresses, row +1).
  typedef enum logic { SH_LEFT = 1'b0, SH_RIGHT = 1'b1 } shdr_e;

  // One stencil instruction, 15 bits.
  typedef struct packed {
    logic [3:0] cidx;    // constant buffer index
    logic [3:0] sidx;    // stream buffer index
    shdr_e      shdr;    // shift direction
    logic [2:0] shamt;   // shift amount in 8-byte elements
    logic       clr;     // clear accumulator (first instruction of a grid point)
    logic       out_en;  // enable output: store the accumulator after this MAC
    logic       adv;     // advance the stream after this access
  } instr_t;

  typedef enum logic { OP_LOAD = 1'b0, OP_STORE = 1'b1 } req_op_e;

  // Request from a requester (SPU or host) towards the LLC.
  typedef struct packed {
    req_op_e        op;
    logic           spu;     // issued by an SPU (may not allocate into the reserved way)
    line_addr_t     line;    // requested cache line
    shdr_e          shdr;
    logic [2:0]     shamt;
    logic [LANES-1:0] mask;  // subarrays this slice must supply (set by the injection point)
    logic           split;   // the load was split into two packets
    logic [SRC_W-1:0] src;
    logic [TAG_W-1:0] tag;
    line_data_t     wdata;
  } llc_req_t;

  // Response from an LLC slice back to a requester.
  typedef struct packed {
    logic [SRC_W-1:0] dst;
    logic [TAG_W-1:0] tag;
    logic           is_store; // store acknowledgement
    logic           split;    // one half of a split load
    line_data_t     data;
  } llc_resp_t;

  // Host commands: one per API function of the programming interface.
  typedef enum logic [2:0] {
    CMD_SEGMENT  = 3'd0,  // initStencilSegment: addr = base, data = size in bytes
    CMD_CODE     = 3'd1,  // initStencilcode: one instruction, idx = position
    CMD_CODE_LEN = 3'd2,  // initStencilcode: data = code length
    CMD_CONST    = 3'd3,  // initConstant: data = value, idx = index
    CMD_STREAM   = 3'd4,  // initStream: addr = start, idx = stream id, acc = SPU id
    CMD_NELEM    = 3'd5,  // setNElements: data = n, acc = SPU id
    CMD_START    = 3'd6   // startAccelerator
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [5:0]  idx;
    logic [4:0]  acc;
    paddr_t      addr;
    logic [63:0] data;
  } host_cmd_t;

  // Byte address of the current element of a stream.
  function automatic paddr_t stream_addr(paddr_t base, logic [31:0] pos);
    return base + paddr_t'({pos, 3'b000});
  endfunction

endpackage
