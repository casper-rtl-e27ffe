// tb_casper_spu: one SPU against a behavioural LLC that answers loads after a random delay, so
// responses overtake each other, and acknowledges stores. The program is a vectorised
// four-point 1D stencil over two input streams,
//   B[e] = c0*A[e-3] + c1*A[e] + c2*A[e+3] + c3*C[e-1],
// using right and left shifts of the same stream (as in the published Jacobi examples), the
// clear / enable-output / advance bits, and stream 0 as the output. Expected results are
// computed with the simulator's double arithmetic in the same order of operations.
// Run 1: one-cycle LLC, always ready; checks the sustained rate (code_len + 1 cycles per output
// vector: four loads and one store share the request port). Run 2: random delays 1..24 and a
// randomly ready port; checks data again and that the load queue filled and the execution
// unit waited for out-of-order data at least once.
module tb_casper_spu;
  import casper_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ibuf_we = 0, const_we = 0, stream_we = 0, nelem_we = 0, start = 0, busy, done;
  logic [5:0] ibuf_idx = 0;
  instr_t ibuf_data = '0;
  logic [6:0] code_len = 1;
  logic [3:0] const_idx = 0, stream_idx = 0;
  dword_t const_data = 0;
  paddr_t stream_base = 0;
  logic [31:0] nelem = 0;
  logic req_valid, req_ready, resp_valid;
  llc_req_t req;
  llc_resp_t resp;
  logic ev_lq_full, ev_head_wait;
  int checks = 0, failures = 0;

  casper_spu #(.ID(3)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural LLC ----------------
  dword_t mem [longint];   // element-addressed (byte address / 8)
  function automatic dword_t rd(longint e);
    return mem.exists(e) ? mem[e] : $realtobits(real'(e % 977) * 0.125 - 20.0);
  endfunction

  typedef struct { int due; llc_resp_t r; } pend_t;
  pend_t pend [$];
  int cyc = 0, max_lat = 1, rdy_pct = 100;
  int n_lq_full = 0, n_head_wait = 0;

  assign req_ready = rst_n && (int'($urandom_range(99)) < rdy_pct);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_lq_full   += int'(ev_lq_full);
    n_head_wait += int'(ev_head_wait);
    if (rst_n && req_valid && req_ready) begin
      pend_t p; longint first;
      p.due = cyc + 1 + int'($urandom_range(max_lat - 1));
      p.r = '0; p.r.dst = req.src; p.r.tag = req.tag;
      checks++;
      if (req.src != 3) begin failures++; $display("FAIL source id"); end
      if (req.op == OP_STORE) begin
        for (int k = 0; k < 8; k++) mem[longint'(req.line) * 8 + k] = req.wdata[64*k +: 64];
        p.r.is_store = 1;
      end else begin
        first = longint'(req.line) * 8 + ((req.shdr == SH_RIGHT) ? -longint'(req.shamt) : longint'(req.shamt));
        for (int k = 0; k < 8; k++) p.r.data[64*k +: 64] = rd(first + k);
      end
      pend.push_back(p);
    end
  end

  // deliver at most one due response per cycle, any one of them
  always @(negedge clk) begin
    resp_valid <= 0;
    for (int i = 0; i < pend.size(); i++) begin
      if (pend[i].due <= cyc && $urandom_range(1) == 1) begin
        resp_valid <= 1; resp <= pend[i].r; pend.delete(i); break;
      end
    end
  end

  // ---------------- configuration helpers ----------------
  task automatic w_instr(int i, int c, int s, int d, int a, int cl, int oe, int ad);
    @(negedge clk); ibuf_we = 1; ibuf_idx = 6'(i);
    ibuf_data = instr_t'({4'(c), 4'(s), 1'(d), 3'(a), 1'(cl), 1'(oe), 1'(ad)});
    @(negedge clk); ibuf_we = 0;
  endtask
  task automatic w_const(int i, real v);
    @(negedge clk); const_we = 1; const_idx = 4'(i); const_data = $realtobits(v);
    @(negedge clk); const_we = 0;
  endtask
  task automatic w_stream(int i, longint a);
    @(negedge clk); stream_we = 1; stream_idx = 4'(i); stream_base = paddr_t'(a);
    @(negedge clk); stream_we = 0;
  endtask

  localparam longint A0 = 64'h10000, C0 = 64'h30000, B0 = 64'h80000;
  real c [4] = '{0.2, 0.5, -0.25, 1.5};

  task automatic run(int n);
    int t0;
    w_stream(0, B0); w_stream(1, A0); w_stream(2, C0);
    @(negedge clk); nelem_we = 1; nelem = 32'(n); @(negedge clk); nelem_we = 0;
    @(negedge clk); start = 1; t0 = cyc; @(negedge clk); start = 0;
    wait (done);
    checks++;
    if (max_lat == 1 && (cyc - t0) > (n / 8) * 5 + 20) begin
      failures++; $display("FAIL rate: %0d cycles for %0d vectors", cyc - t0, n / 8);
    end
    $display("run: %0d vectors in %0d cycles", n / 8, cyc - t0);
    for (int e = 0; e < n; e++) begin
      real acc;
      acc = $bitstoreal(rd(A0 / 8 + e - 3)) * c[0];
      acc = acc + $bitstoreal(rd(A0 / 8 + e)) * c[1];
      acc = acc + $bitstoreal(rd(A0 / 8 + e + 3)) * c[2];
      acc = acc + $bitstoreal(rd(C0 / 8 + e - 1)) * c[3];
      checks++;
      if (rd(B0 / 8 + e) !== $realtobits(acc)) begin
        failures++;
        if (failures < 8) $display("FAIL B[%0d] = %f expected %f", e, $bitstoreal(rd(B0 / 8 + e)), acc);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) w_const(i, c[i]);
    w_instr(0, 0, 1, 1, 3, 1, 0, 0);   // c0 * A[e-3], clear
    w_instr(1, 1, 1, 0, 0, 0, 0, 0);   // c1 * A[e]
    w_instr(2, 2, 1, 0, 3, 0, 0, 1);   // c2 * A[e+3], advance A
    w_instr(3, 3, 2, 1, 1, 0, 1, 1);   // c3 * C[e-1], output, advance C
    @(negedge clk); code_len = 7'd4;
    max_lat = 1; rdy_pct = 100;
    run(512);
    for (int e = 0; e < 512; e++) mem.delete(B0 / 8 + e);
    max_lat = 24; rdy_pct = 70;
    run(1024);
    checks += 2;
    if (n_lq_full == 0)   begin failures++; $display("FAIL load queue never full"); end
    if (n_head_wait == 0) begin failures++; $display("FAIL never waited for data"); end
    $display("lq_full=%0d head_wait=%0d", n_lq_full, n_head_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
