// tb_llc_slice: a small slice (64 sets, 4 ways, one reserved way) in front of the behavioural
// memory model, driven with random aligned and shifted loads, partial-mask loads and full-line
// stores over 1024 lines, so that misses, dirty write-backs and set wrap-around all happen.
// A flat reference memory (updated by every store) gives the expected data: lane j of a load at
// line L shifted by s is element 8L -/+ s + j, masked lanes are zero. Also checked: two-cycle
// hit latency with back-to-back acceptance, responses in request order, store acknowledgements,
// that SPU requests never fill the reserved way, and that every mechanism occurred.
module tb_llc_slice;
  import casper_pkg::*;
  localparam int SETS = 64, WAYS = 4;
  logic clk = 0, rst_n = 0;
  logic init_done, req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  llc_req_t req = '0;
  llc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  line_addr_t mem_req_line;
  line_data_t mem_req_wdata, mem_resp_data;
  logic ev_miss, ev_unaligned, ev_writeback;
  int checks = 0, failures = 0;
  int n_miss = 0, n_unal = 0, n_wb = 0;

  llc_slice #(.SETS(SETS), .WAYS(WAYS), .RESERVED_WAYS(1)) dut (.*);
  tb_mem_model #(.LAT(7)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_line(mem_req_line), .req_wdata(mem_req_wdata), .resp_valid(mem_resp_valid),
    .resp_data(mem_resp_data));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    n_miss += int'(ev_miss); n_unal += int'(ev_unaligned); n_wb += int'(ev_writeback);
  end

  // reference memory, element granular
  function automatic dword_t ref_elem(longint e);
    line_data_t l;
    l = tb_ref[line_addr_t'(e / 8)];
    return l[64 * (e % 8) +: 64];
  endfunction
  line_data_t tb_ref [line_addr_t];
  function automatic line_data_t ref_line(line_addr_t l);
    if (!tb_ref.exists(l)) tb_ref[l] = tb_mem_pkg::read_line(l);
    return tb_ref[l];
  endfunction

  line_data_t exp_q [$];
  logic       exp_st [$];
  int         exp_tg [$];
  int         cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && resp_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected response"); end
    else begin
      line_data_t e; logic st; int tg;
      e = exp_q.pop_front(); st = exp_st.pop_front(); tg = exp_tg.pop_front();
      if (resp.is_store !== st || int'(resp.tag) != tg || (!st && resp.data !== e)) begin
        failures++; $display("FAIL response tag %0d store %0d", resp.tag, resp.is_store);
      end
    end
  end

  task automatic send(llc_req_t r);
    @(negedge clk);
    req_valid = 1; req = r;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  function automatic llc_req_t make_load(line_addr_t l, int d, int s, logic [7:0] m, int tg);
    llc_req_t r; line_data_t e; longint first;
    r = '0; r.op = OP_LOAD; r.spu = 1; r.line = l; r.shdr = shdr_e'(d); r.shamt = 3'(s);
    r.mask = m; r.tag = TAG_W'(tg);
    first = longint'(l) * 8 + ((d == 1) ? -s : s);
    void'(ref_line(line_addr_t'(first / 8))); void'(ref_line(line_addr_t'(first / 8 + 1)));
    for (int j = 0; j < 8; j++) begin
      longint ea; ea = first + j;
      // the lane comes from subarray ea % 8; the mask is per subarray
      e[64*j +: 64] = m[ea % 8] ? ref_elem(ea) : 64'd0;
    end
    exp_q.push_back(e); exp_st.push_back(0); exp_tg.push_back(tg);
    return r;
  endfunction

  initial begin
    int t0;
    line_addr_t l;
    llc_req_t r;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // hit latency: fetch a line, then two back-to-back loads of it
    send(make_load(line_addr_t'(5000), 0, 0, 8'hFF, 1));
    wait (exp_q.size() == 0);
    @(negedge clk);
    req_valid = 1; req = make_load(line_addr_t'(5000), 0, 0, 8'hFF, 2); t0 = cyc;
    @(negedge clk);
    checks++;
    if (!req_ready) begin failures++; $display("FAIL not back-to-back"); end
    req = make_load(line_addr_t'(5000), 0, 0, 8'hFF, 3);
    @(negedge clk); req_valid = 0;
    wait (resp_valid);
    checks++;
    if (cyc - t0 != 2) begin failures++; $display("FAIL hit latency %0d", cyc - t0); end
    wait (exp_q.size() == 0);
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      l = line_addr_t'(1000 + $urandom_range(1023));
      if ($urandom_range(3) == 0) begin
        r = '0; r.op = OP_STORE; r.spu = ($urandom_range(1) == 1); r.line = l; r.mask = '1;
        r.tag = TAG_W'(n);
        for (int i = 0; i < 16; i++) r.wdata[32*i +: 32] = $urandom;
        tb_ref[l] = r.wdata;
        exp_q.push_back('0); exp_st.push_back(1); exp_tg.push_back(n % 16);
      end else begin
        r = make_load(l, int'($urandom_range(1)), int'($urandom_range(7)),
                      ($urandom_range(3) == 0) ? 8'($urandom) : 8'hFF, n % 16);
      end
      r.spu = 1;
      send(r);
    end
    wait (exp_q.size() == 0);
    repeat (3) @(posedge clk);
    // reserved way never filled by SPU requests
    for (int s = 0; s < SETS; s++) begin
      checks++;
      if (dut.g_way[WAYS-1].tmem[s].valid) begin failures++; $display("FAIL reserved way set %0d", s); end
    end
    checks += 3;
    if (n_miss == 0) begin failures++; $display("FAIL no miss"); end
    if (n_unal == 0) begin failures++; $display("FAIL no unaligned load"); end
    if (n_wb == 0)   begin failures++; $display("FAIL no write-back"); end
    $display("misses=%0d unaligned=%0d writebacks=%0d", n_miss, n_unal, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
