// spu_exec_unit: the 512-bit vector execution unit of one SPU. Eight double-precision lanes
// multiply their operand by one shared constant and add the product into a per-lane accumulator.
//
// This is the published structure (eight multipliers fed by op1..op8 and one 64-bit constant,
// each followed by an accumulator whose value is out1..out8). Pipeline, this design's own choice:
// stage 1 registers the eight products, stage 2 adds them into the accumulators, so a new
// operand vector is accepted every cycle and the accumulator dependency is resolved within one
// cycle. Control per operand: clr starts a new grid point (the accumulator is replaced by the
// product), out_en presents the updated accumulators on out_data with out_valid for one cycle,
// two cycles after the operand was accepted. Lane i uses bits [64*i +: 64] (op(i+1), out(i+1)).
module spu_exec_unit
  import casper_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  line_data_t in_data,
  input  dword_t     in_const,
  input  logic       in_clr,
  input  logic       in_out_en,
  output logic       out_valid,
  output line_data_t out_data,
  output logic       busy        // an operand is still in the pipeline
);
  line_data_t prod_c, prod_q, sum_c, acc_q;
  logic       p_valid, p_clr, p_out_en;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp64_mul u_mul (.a(in_data[ELEM_W*i +: ELEM_W]), .b(in_const), .p(prod_c[ELEM_W*i +: ELEM_W]));
    fp64_add u_add (.a(acc_q[ELEM_W*i +: ELEM_W]), .b(prod_q[ELEM_W*i +: ELEM_W]),
                    .s(sum_c[ELEM_W*i +: ELEM_W]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid   <= 1'b0;
      p_clr     <= 1'b0;
      p_out_en  <= 1'b0;
      prod_q    <= '0;
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      p_valid  <= in_valid;
      p_clr    <= in_clr;
      p_out_en <= in_out_en;
      if (in_valid) prod_q <= prod_c;
      out_valid <= 1'b0;
      if (p_valid) begin
        acc_q     <= p_clr ? prod_q : sum_c;
        out_valid <= p_out_en;
        out_data  <= p_clr ? prod_q : sum_c;
      end
    end
  end

  assign busy = p_valid;
endmodule
