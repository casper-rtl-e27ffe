// spu_stream_buffer: the SPU stream buffer. Each of DEPTH (16) streams is a run of consecutive
// doubles described by a start address and a position pointer counted in elements; its current
// byte address is start + 8*position. initStream writes a start address and clears the pointer.
// Because the SPU works on eight doubles at a time, advancing a stream moves its pointer by
// LANES (8) elements, i.e. one 64-byte vector.
//
// Ports: one configuration write, one read port for the instruction being issued (rd_idx ->
// rd_base/rd_pos) with its advance strobe, and a fixed read/advance port for stream 0, which is
// this design's output stream (the published example configures the result array as stream 0;
// the instruction format has no output-stream field). Advances take effect at the clock edge;
// when both advance strobes hit stream 0 in one cycle it moves by two vectors.
module spu_stream_buffer
  import casper_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [$clog2(DEPTH)-1:0] cfg_idx,
  input  paddr_t                   cfg_base,
  input  logic [$clog2(DEPTH)-1:0] rd_idx,
  output paddr_t                   rd_base,
  output logic [31:0]              rd_pos,
  input  logic                     rd_adv,
  output paddr_t                   out_base,
  output logic [31:0]              out_pos,
  input  logic                     out_adv
);
  paddr_t      base [DEPTH];
  logic [31:0] pos  [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        base[i] <= '0;
        pos[i]  <= '0;
      end
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (cfg_we && 32'(cfg_idx) == i) begin
          base[i] <= cfg_base;
          pos[i]  <= '0;
        end else begin
          pos[i] <= pos[i] + ((rd_adv && 32'(rd_idx) == i) ? 32'(LANES) : 32'd0)
                           + ((out_adv && i == 0)     ? 32'(LANES) : 32'd0);
        end
      end
    end
  end

  assign rd_base  = base[rd_idx];
  assign rd_pos   = pos[rd_idx];
  assign out_base = base[0];
  assign out_pos  = pos[0];
endmodule
