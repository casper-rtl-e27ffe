// slice_hash: address-to-LLC-slice mapping applied at every injection point of the interconnect.
//
// Published mechanism: two registers hold the stencil segment's start and length (written by
// initStencilSegment); one adder forms its end and a comparison decides whether a physical
// address lies inside. Inside the segment the slice is a bit-select of the address, so that
// contiguous 128 kB blocks (BLOCK_BITS = 17) go to the slices in round-robin order; outside it
// the conventional mapping applies. Vendors do not disclose their conventional hash; here,
// following the baseline the evaluation describes, consecutive cache lines go to consecutive
// slices (slice = line address modulo NSLICE). The segment registers live here, one copy per
// injection point, written through seg_we; reset leaves the segment empty. Combinational
// mapping, registered configuration.
module slice_hash
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
  input  line_addr_t                line,
  output logic [$clog2(NSLICE)-1:0] slice,
  output logic                      in_seg
);
  paddr_t base_q, size_q, seg_end, addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
      size_q <= '0;
    end else if (seg_we) begin
      base_q <= seg_base;
      size_q <= seg_size;
    end
  end

  always_comb begin
    addr    = {line, 6'b000000};
    seg_end = base_q + size_q;
    in_seg  = (addr >= base_q) && (addr < seg_end);
    slice   = in_seg ? addr[BLOCK_BITS +: $clog2(NSLICE)] : line[$clog2(NSLICE)-1:0];
  end
endmodule
