// spu_const_buffer: the SPU constant buffer, DEPTH (16, addressed by the 4-bit constant field of
// an instruction) double-precision constants written by initConstant before the run. One write
// port, one asynchronous read port feeding the execution unit's shared constant input in the
// cycle the operand leaves the load queue. Entries reset to +0.0.
module spu_const_buffer
  import casper_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  dword_t                   wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output dword_t                   rdata
);
  dword_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];
endmodule
