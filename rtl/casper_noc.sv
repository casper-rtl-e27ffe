// casper_noc: interconnect between the requesters (NSPU stencil processing units plus the host
// port) and the NSLICE LLC slices, with one injection point (noc_inject, which applies the
// stencil-segment slice mapping) per requester.
//
// The evaluated system uses a 2D mesh with XY routing and 64 B per cycle per direction; its
// routers are part of the host CPU and are not described. This design replaces it with a
// single-stage crossbar that moves one 64-byte packet per slice per cycle on the request side
// and one per requester per cycle on the response side, with a round-robin arbiter at every
// output. It keeps what the accelerator depends on (any SPU reaches any slice; responses return
// to their source, possibly out of order) but not the mesh's distance-dependent latency.
// Combinational request crossbar; requesters see ready in the cycle their packet is taken.
// Responses pass through RESP_LAT pipeline registers before reaching the requester, a fixed
// stand-in for the mesh traversal (own choice: 6, so that a hit in the local slice reaches the
// execution unit about 8 cycles after the request, the load-to-use latency the paper gives for
// an SPU and its local slice; remote slices are not slower here).
module casper_noc
  import casper_pkg::*;
#(
  parameter int unsigned NREQ       = 17,
  parameter int unsigned NSLICE     = 16,
  parameter int unsigned BLOCK_BITS = 17,
  parameter int unsigned RESP_LAT   = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       seg_we,
  input  paddr_t     seg_base,
  input  paddr_t     seg_size,
  // requester side
  input  logic       rq_valid   [NREQ],
  output logic       rq_ready   [NREQ],
  input  llc_req_t   rq         [NREQ],
  output logic       rs_valid   [NREQ],
  output llc_resp_t  rs         [NREQ],
  // slice side
  output logic       sl_req_valid  [NSLICE],
  input  logic       sl_req_ready  [NSLICE],
  output llc_req_t   sl_req        [NSLICE],
  input  logic       sl_resp_valid [NSLICE],
  output logic       sl_resp_ready [NSLICE],
  input  llc_resp_t  sl_resp       [NSLICE],
  output logic [NREQ-1:0] ev_split
);
  localparam int unsigned SL_W = $clog2(NSLICE);
  localparam int unsigned RQ_W = $clog2(NREQ);

  logic            iv  [NREQ];
  logic            ir  [NREQ];
  llc_req_t        io  [NREQ];
  logic [SL_W-1:0] idst[NREQ];

  for (genvar i = 0; i < NREQ; i++) begin : g_inj
    noc_inject #(.NSLICE(NSLICE), .BLOCK_BITS(BLOCK_BITS)) u_inj (
      .clk, .rst_n, .seg_we, .seg_base, .seg_size,
      .in_valid(rq_valid[i]), .in_ready(rq_ready[i]), .in(rq[i]),
      .out_valid(iv[i]), .out_ready(ir[i]), .out(io[i]), .out_dst(idst[i]), .ev_split(ev_split[i]));
  end

  // request crossbar: one arbiter per slice
  logic [NREQ-1:0] rq_want [NSLICE];
  logic            sg_v    [NSLICE];
  logic [RQ_W-1:0] sg_i    [NSLICE];

  for (genvar j = 0; j < NSLICE; j++) begin : g_sl
    always_comb for (int i = 0; i < NREQ; i++) rq_want[j][i] = iv[i] && idst[i] == SL_W'(j);
    rr_arbiter #(.N(NREQ)) u_arb (
      .clk, .rst_n, .req(rq_want[j]), .accept(sl_req_ready[j]), .gnt_valid(sg_v[j]),
      .gnt_idx(sg_i[j]));
    assign sl_req_valid[j] = sg_v[j];
    assign sl_req[j]       = io[sg_i[j]];
  end

  always_comb begin
    for (int i = 0; i < NREQ; i++) begin
      ir[i] = 1'b0;
      for (int j = 0; j < NSLICE; j++)
        if (sg_v[j] && sg_i[j] == RQ_W'(i) && sl_req_ready[j]) ir[i] = 1'b1;
    end
  end

  // response crossbar: one arbiter per requester
  logic [NSLICE-1:0] rs_want [NREQ];
  logic              rg_v    [NREQ];
  logic [SL_W-1:0]   rg_j    [NREQ];

  for (genvar i = 0; i < NREQ; i++) begin : g_rq
    always_comb
      for (int j = 0; j < NSLICE; j++)
        rs_want[i][j] = sl_resp_valid[j] && sl_resp[j].dst == SRC_W'(i);
    rr_arbiter #(.N(NSLICE)) u_arb (
      .clk, .rst_n, .req(rs_want[i]), .accept(1'b1), .gnt_valid(rg_v[i]), .gnt_idx(rg_j[i]));
    if (RESP_LAT == 0) begin : g_direct
      assign rs_valid[i] = rg_v[i];
      assign rs[i]       = sl_resp[rg_j[i]];
    end else begin : g_pipe
      logic      pv [RESP_LAT];
      llc_resp_t pd [RESP_LAT];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < RESP_LAT; s++) begin
            pv[s] <= 1'b0;
            pd[s] <= '0;
          end
        end else begin
          pv[0] <= rg_v[i];
          pd[0] <= sl_resp[rg_j[i]];
          for (int s = 1; s < RESP_LAT; s++) begin
            pv[s] <= pv[s-1];
            pd[s] <= pd[s-1];
          end
        end
      end
      assign rs_valid[i] = pv[RESP_LAT-1];
      assign rs[i]       = pd[RESP_LAT-1];
    end
  end

  always_comb begin
    for (int j = 0; j < NSLICE; j++) begin
      sl_resp_ready[j] = 1'b0;
      for (int i = 0; i < NREQ; i++)
        if (rg_v[i] && rg_j[i] == SL_W'(j)) sl_resp_ready[j] = 1'b1;
    end
  end
endmodule
