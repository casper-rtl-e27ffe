// noc_inject: the injection point through which one requester (an SPU or the host) enters the
// interconnect. It decides the home LLC slice of each request with slice_hash, as the published
// design does at every injection point (stencil-segment mapping inside the segment,
// conventional mapping outside).
//
// A shifted load touches two consecutive lines. When both live in the same slice it goes there
// as one packet and the slice's unaligned-load hardware serves it in one access. When the two
// lines live in different slices (a block boundary of the segment mapping) the published text
// only states that the unaligned mechanism cannot serve them; this design then sends two
// packets, first to the home of the requested line with the mask of the lanes it supplies, then
// to the home of the adjacent line with the remaining lanes, both marked split so the load
// queue merges two responses. The request is accepted (in_ready) together with its first
// packet, so the requester registers the load before any response can come back; the second
// packet is kept in a holding register and sent next, and no new request is accepted meanwhile.
// Combinational towards the interconnect from the input; one holding register.
module noc_inject
  import casper_pkg::*;
#(
  parameter int unsigned NSLICE     = 16,
  parameter int unsigned BLOCK_BITS = 17
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      seg_we,
  input  paddr_t                    seg_base,
  input  paddr_t                    seg_size,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  llc_req_t                  in,
  output logic                      out_valid,
  input  logic                      out_ready,
  output llc_req_t                  out,
  output logic [$clog2(NSLICE)-1:0] out_dst,
  output logic                      ev_split
);
  localparam int unsigned SL_W = $clog2(NSLICE);

  line_addr_t     adj_line;
  logic [SL_W-1:0] home_a, home_b;
  logic           shifted, split;
  logic [LANES-1:0] adj_mask;
  logic           pend;
  llc_req_t       pend_pkt;
  logic [SL_W-1:0] pend_dst;

  assign adj_line = (in.shdr == SH_RIGHT) ? in.line - 1'b1 : in.line + 1'b1;

  slice_hash #(.NSLICE(NSLICE), .BLOCK_BITS(BLOCK_BITS)) u_hash_a (
    .clk, .rst_n, .seg_we, .seg_base, .seg_size, .line(in.line), .slice(home_a), .in_seg());
  slice_hash #(.NSLICE(NSLICE), .BLOCK_BITS(BLOCK_BITS)) u_hash_b (
    .clk, .rst_n, .seg_we, .seg_base, .seg_size, .line(adj_line), .slice(home_b), .in_seg());

  always_comb begin
    for (int k = 0; k < LANES; k++)
      adj_mask[k] = (in.shdr == SH_RIGHT) ? (k >= LANES - 32'(in.shamt)) : (k < 32'(in.shamt));
    if (in.shamt == 3'd0) adj_mask = '0;
    shifted = (in.op == OP_LOAD) && (in.shamt != 3'd0);
    split   = shifted && (home_a != home_b);

    if (pend) begin
      out       = pend_pkt;
      out_dst   = pend_dst;
      out_valid = 1'b1;
      in_ready  = 1'b0;
    end else begin
      out       = in;
      out.split = split;
      out.mask  = split ? ~adj_mask : '1;
      out_dst   = home_a;
      out_valid = in_valid;
      in_ready  = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= 1'b0;
      pend_pkt <= '0;
      pend_dst <= '0;
    end else if (pend) begin
      if (out_ready) pend <= 1'b0;
    end else if (in_valid && out_ready && split) begin
      pend          <= 1'b1;
      pend_pkt      <= in;
      pend_pkt.split <= 1'b1;
      pend_pkt.mask <= adj_mask;
      pend_dst      <= home_b;
    end
  end

  assign ev_split = !pend && in_valid && out_ready && split;
endmodule
