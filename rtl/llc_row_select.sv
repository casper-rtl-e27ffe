// llc_row_select: the row-selection logic added between an LLC data way's row decoder and its
// SRAM subarrays for unaligned loads.
//
// A 64-byte line is spread over SUBARRAYS (8) subarrays, subarray k holding the k-th 8-byte
// element of every line (one row per set). A load shifted right by shamt elements needs, in the
// subarrays k >= 8-shamt, the element of the previous line (row -1); shifted left, the
// subarrays k < shamt need the next line (row +1); all other subarrays read the requested row.
// Published structure: logic at the edge of each subarray computes one select signal from shift
// direction, shift amount and subarray ID, and a 3:1 multiplexer per SRAM row forwards the row
// decoder output of the row above, the row itself or the row below. Here that multiplexer is
// applied to the encoded row address (row-1 / row / row+1, wrapping at the last set), which
// activates the same word line as rerouting the decoded one-hot lines; this encoding is this
// design's choice. Combinational. Outputs per subarray: the row to read and whether it belongs
// to the adjacent line (adj), which also selects that subarray's way-hit.
module llc_row_select
  import casper_pkg::*;
#(
  parameter int unsigned SETS      = 2048,
  parameter int unsigned SUBARRAYS = 8
) (
  input  logic [$clog2(SETS)-1:0] row,
  input  shdr_e                   shdr,
  input  logic [2:0]              shamt,
  output logic [$clog2(SETS)-1:0] sub_row [SUBARRAYS],
  output logic [SUBARRAYS-1:0]    adj
);
  typedef enum logic [1:0] { ROW_PREV, ROW_SAME, ROW_NEXT } rsel_e;
  rsel_e sel [SUBARRAYS];

  always_comb begin
    for (int k = 0; k < SUBARRAYS; k++) begin
      // select signal computed at the edge of subarray k
      if (shdr == SH_RIGHT && shamt != 3'd0 && k >= SUBARRAYS - 32'(shamt)) sel[k] = ROW_PREV;
      else if (shdr == SH_LEFT && k < 32'(shamt))                            sel[k] = ROW_NEXT;
      else                                                                   sel[k] = ROW_SAME;
      // 3:1 row multiplexer
      unique case (sel[k])
        ROW_PREV: sub_row[k] = row - 1'b1;
        ROW_NEXT: sub_row[k] = row + 1'b1;
        default:  sub_row[k] = row;
      endcase
      adj[k] = (sel[k] != ROW_SAME);
    end
  end
endmodule
