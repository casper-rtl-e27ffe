// spu_instr_buffer: the SPU instruction buffer, holding up to DEPTH (64 in the published design)
// 15-bit stencil instructions. The same short program is replayed for every output vector, so
// the buffer is written once by the host (initStencilcode broadcast) and then only read.
// One write port (we/waddr/wdata, effective at the clock edge) and one asynchronous read port
// (raddr -> rdata in the same cycle), which lets the SPU fetch and issue one instruction per
// cycle. The array is reset to zero so that unwritten entries read as a defined value.
module spu_instr_buffer
  import casper_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  instr_t                   wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];
endmodule
