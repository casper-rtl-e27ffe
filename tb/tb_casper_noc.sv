// tb_casper_noc: five requesters and four slices (conventional mapping, line mod 4) exchange
// random traffic; behavioural slices accept requests at random and answer each one after a
// random delay with a response addressed to the requester. Checked: every request reaches the
// slice its line maps to exactly once and unchanged, every response reaches its requester, and
// simultaneous requests to one slice are all served (round-robin arbitration, no starvation).
module tb_casper_noc;
  import casper_pkg::*;
  localparam int NR = 5, NS = 4;
  logic clk = 0, rst_n = 0, seg_we = 0;
  paddr_t seg_base = 0, seg_size = 0;
  logic rq_valid [NR], rq_ready [NR], rs_valid [NR];
  llc_req_t rq [NR];
  llc_resp_t rs [NR];
  logic sl_req_valid [NS], sl_req_ready [NS], sl_resp_valid [NS], sl_resp_ready [NS];
  llc_req_t sl_req [NS];
  llc_resp_t sl_resp [NS];
  logic [NR-1:0] ev_split;
  int checks = 0, failures = 0;

  casper_noc #(.NREQ(NR), .NSLICE(NS), .BLOCK_BITS(17)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [NR], got_req [NR], got_resp [NR];
  llc_resp_t sq [NS][$];

  // slices
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < NS; j++) begin
      if (sl_req_valid[j] && sl_req_ready[j]) begin
        llc_resp_t r;
        checks++;
        if (int'(sl_req[j].line % NS) != j || sl_req[j].wdata[31:0] != 32'(sl_req[j].line ^ 32'h5a5a)) begin
          failures++; $display("FAIL request at wrong slice %0d", j);
        end
        got_req[sl_req[j].src]++;
        r = '0; r.dst = sl_req[j].src; r.tag = sl_req[j].tag; r.data[41:0] = sl_req[j].line;
        sq[j].push_back(r);
      end
      if (sl_resp_valid[j] && sl_resp_ready[j]) void'(sq[j].pop_front());
    end
    for (int i = 0; i < NR; i++) if (rs_valid[i]) begin
      checks++;
      if (int'(rs[i].dst) != i) begin failures++; $display("FAIL response to %0d for %0d", i, rs[i].dst); end
      got_resp[i]++;
    end
  end
  always @(negedge clk) for (int j = 0; j < NS; j++) begin
    sl_req_ready[j]  = ($urandom_range(2) != 0);
    sl_resp_valid[j] = (sq[j].size() > 0) && ($urandom_range(1) == 1);
    sl_resp[j]       = (sq[j].size() > 0) ? sq[j][0] : '0;
  end

  // requesters
  for (genvar i = 0; i < NR; i++) begin : g_rq
    initial begin
      rq_valid[i] = 0; rq[i] = '0; sent[i] = 0; got_req[i] = 0; got_resp[i] = 0;
      wait (rst_n);
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        rq[i] = '0; rq[i].op = OP_LOAD; rq[i].src = SRC_W'(i); rq[i].tag = TAG_W'(n);
        rq[i].line = line_addr_t'((n < 50) ? 8 : $urandom_range(4095));  // hot slice first
        rq[i].wdata[31:0] = 32'(rq[i].line ^ 32'h5a5a);
        rq_valid[i] = 1;
        @(posedge clk);
        while (!rq_ready[i]) @(posedge clk);
        sent[i]++;
        #1 rq_valid[i] = 0;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (6000) @(posedge clk);
    for (int i = 0; i < NR; i++) begin
      checks++;
      if (sent[i] != 400 || got_req[i] != 400 || got_resp[i] != 400) begin
        failures++; $display("FAIL requester %0d sent %0d delivered %0d answered %0d", i, sent[i], got_req[i], got_resp[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
