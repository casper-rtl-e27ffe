// rr_arbiter: round-robin arbiter used at every output of the interconnect. Among the requesting
// inputs it grants the first one at or after the pointer; the pointer moves past the granted
// input when the grant is accepted (accept), so every requester is served within N grants.
// Combinational grant, registered pointer.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 accept,
  output logic                 gnt_valid,
  output logic [$clog2(N)-1:0] gnt_idx
);
  logic [$clog2(N)-1:0] ptr;
  logic                 found;

  always_comb begin
    found   = 1'b0;
    gnt_idx = '0;
    for (int unsigned i = 0; i < N; i++) begin
      automatic int unsigned j = (32'(ptr) + i) % N;
      if (!found && req[j]) begin
        found   = 1'b1;
        gnt_idx = j[$clog2(N)-1:0];
      end
    end
    gnt_valid = found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (accept && gnt_valid)
      ptr <= (32'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end
endmodule
