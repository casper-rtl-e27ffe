// llc_rotate: the rotate network at the output of an LLC slice. After an unaligned read the
// subarrays hold the right elements in the wrong lanes (for a right shift by s, the s elements
// of the previous line sit in the top s lanes); rotating by s lanes puts the first requested
// element into lane 0. Right shift: out[j] = in[(j - s) mod 8]; left shift: out[j] = in[(j + s)
// mod 8]. Built as a three-stage (1, 2, 4 lanes) barrel rotator; combinational. The published
// design names a rotate network / barrel shifter without giving its structure.
module llc_rotate
  import casper_pkg::*;
(
  input  line_data_t in,
  input  shdr_e      shdr,
  input  logic [2:0] shamt,
  output line_data_t out
);
  line_data_t st [4];
  logic [2:0] amt;

  always_comb begin
    // rotating right by s lanes equals rotating left by 8-s lanes
    amt   = (shdr == SH_RIGHT) ? (3'd0 - shamt) : shamt;
    st[0] = in;
    for (int b = 0; b < 3; b++) begin
      // lane j takes lane j + 2^b (a rotation towards lane 0 by 2^b lanes)
      st[b+1] = amt[b] ? ((st[b] >> (ELEM_W << b)) | (st[b] << (LINE_W_BITS - (ELEM_W << b))))
                       : st[b];
    end
    out = st[3];
  end
endmodule
