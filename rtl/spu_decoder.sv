// spu_decoder: instruction decoder of the SPU. It splits a 15-bit instruction into its fields,
// selects the stream named by the stream field (sidx goes to the stream buffer's read port) and
// from the returned stream state forms the load request: the cache line holding the stream's
// current vector (start + 8*position, divided by the 64-byte line size) plus the instruction's
// shift direction and amount, which the LLC slice uses to return the vector moved by that many
// 8-byte elements. The constant index and the three control bits are passed on to the load queue.
// Purely combinational.
//
// Streams are expected to start on a 64-byte boundary (as in the published Jacobi-2D example,
// whose rows are whole cache lines); unaligned_o flags a stream address that is not, and an
// assertion reports it in simulation. That restriction is this design's own.
module spu_decoder
  import casper_pkg::*;
(
  input  instr_t      instr,
  output logic [3:0]  sidx,
  input  paddr_t      s_base,
  input  logic [31:0] s_pos,
  output line_addr_t  line,
  output shdr_e       shdr,
  output logic [2:0]  shamt,
  output logic [3:0]  cidx,
  output logic        clr,
  output logic        out_en,
  output logic        adv,
  output logic        unaligned_o
);
  paddr_t ea;

  always_comb begin
    sidx        = instr.sidx;
    ea          = stream_addr(s_base, s_pos);
    line        = ea[PA_W-1:6];
    unaligned_o = (ea[5:0] != 6'd0);
    shdr        = instr.shdr;
    shamt       = instr.shamt;
    cidx        = instr.cidx;
    clr         = instr.clr;
    out_en      = instr.out_en;
    adv         = instr.adv;
  end
endmodule
