// tb_casper_top: end-to-end test of the accelerator at reduced size (4 SPUs, 4 slices of 256 sets x 4 ways).
//
// It runs the published Jacobi-2D example: a stencil segment is allocated, A starts at the
// segment and B after A, so that block i of A and block i of B map to the same slices;
// rows are 128 doubles; SPU i computes NELEM points of B from block i of A (BLK doubles, at
// least 128 kB) using streams s1 = A[i*BLK - 128], s2 = A[i*BLK], s3 = A[i*BLK + 128] and output
// s0 = B[i*BLK]
// and the five-instruction program of the example (constant 0.2, shifts right/left by one on
// s2). Part of A is first written by the host through the LLC, the rest comes from the memory
// model. After done, B is read back through the host port and compared with
//   B[e] = 0.2*A[e-128] + 0.2*A[e-1] + 0.2*A[e] + 0.2*A[e+1] + 0.2*A[e+128]
// accumulated in that order in double arithmetic. Counted, and required to happen at least
// once: unaligned loads served by a slice in one access, loads split across two slices, LLC
// misses, dirty write-backs, load-queue-full stalls, execution-unit waits for out-of-order data,
// a command refused while running, and the completion interrupt.
module tb_casper_top;
  import casper_pkg::*;
  localparam int NSPU  = 4;
  localparam int NELEM = 2048;
  localparam int NCHECK_LINES = 0;   // B lines read back per SPU (0 = all)
  localparam bit REQUIRE_LQ_FULL = 1;
  localparam longint SB = 64'h4000_0000;
  localparam int BLK = (NELEM > 16384) ? NELEM : 16384, ROW = 128;   // doubles per SPU block
  // B follows A after a gap of NSPU 128 kB blocks, so the last SPU's lower neighbour row is not
  // part of B and B block i has the same home slices as A block i
  localparam longint BOFF = longint'(NSPU) * BLK * 8 + longint'(NSPU) * 131072;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy, done, done_irq, init_done;
  host_cmd_t cmd = '0;
  logic host_req_valid = 0, host_req_ready, host_resp_valid, host_resp_is_store;
  req_op_e host_req_op = OP_LOAD;
  line_addr_t host_req_line = '0;
  line_data_t host_req_wdata = '0, host_resp_data;
  logic       mem_req_valid  [NSPU];
  logic       mem_req_ready  [NSPU];
  logic       mem_req_write  [NSPU];
  line_addr_t mem_req_line   [NSPU];
  line_data_t mem_req_wdata  [NSPU];
  logic       mem_resp_valid [NSPU];
  line_data_t mem_resp_data  [NSPU];
  int checks = 0, failures = 0;

  casper_top #(.NSPU(NSPU), .SETS(256), .WAYS(4)) dut (.*);

  for (genvar j = 0; j < NSPU; j++) begin : g_mem
    tb_mem_model #(.LAT(20)) u_mem (
      .clk, .rst_n, .req_valid(mem_req_valid[j]), .req_ready(mem_req_ready[j]),
      .req_write(mem_req_write[j]), .req_line(mem_req_line[j]), .req_wdata(mem_req_wdata[j]),
      .resp_valid(mem_resp_valid[j]), .resp_data(mem_resp_data[j]));
  end

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_unal = 0, n_split = 0, n_miss = 0, n_wb = 0, n_lqfull = 0, n_wait = 0, n_refused = 0, n_irq = 0;
  for (genvar j = 0; j < NSPU; j++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      n_unal   += int'(dut.g_slice[j].ev_unaligned);
      n_miss   += int'(dut.g_slice[j].ev_miss);
      n_wb     += int'(dut.g_slice[j].ev_writeback);
      n_lqfull += int'(dut.g_spu[j].ev_lq_full);
      n_wait   += int'(dut.g_spu[j].ev_head_wait);
    end
  end
  always @(posedge clk) if (rst_n) begin
    n_split += $countones(dut.ev_split);
    n_irq   += int'(done_irq);
    n_refused += int'(cmd_valid && !cmd_ready);
  end
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference data ----------------
  line_data_t hw [line_addr_t];
  function automatic line_data_t pattern(line_addr_t l);
    line_data_t d;
    for (int k = 0; k < 8; k++) d[64*k +: 64] = tb_mem_pkg::init_elem(longint'(l) * 8 + k);
    return d;
  endfunction
  function automatic real a_elem(longint e);   // e: absolute element index
    line_data_t d;
    line_addr_t l;
    l = line_addr_t'(e / 8);
    d = hw.exists(l) ? hw[l] : pattern(l);
    return $bitstoreal(d[64 * (e % 8) +: 64]);
  endfunction

  // ---------------- host helpers ----------------
  task automatic issue(cmd_op_e op, int idx, int acc, longint addr, longint data);
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.idx = 6'(idx); cmd.acc = 5'(acc);
    cmd.addr = paddr_t'(addr); cmd.data = 64'(data);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic host_access(req_op_e op, line_addr_t l, line_data_t wd, output line_data_t rd);
    @(negedge clk);
    host_req_valid = 1; host_req_op = op; host_req_line = l; host_req_wdata = wd;
    @(posedge clk); while (!host_req_ready) @(posedge clk);
    #1 host_req_valid = 0;
    while (!host_resp_valid) @(posedge clk);
    rd = host_resp_data;
    @(negedge clk);
  endtask

  task automatic w_instr(int i, int c, int s, int d, int a, int cl, int oe, int ad);
    issue(CMD_CODE, i, 0, 0, longint'({4'(c), 4'(s), 1'(d), 3'(a), 1'(cl), 1'(oe), 1'(ad)}));
  endtask

  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    line_data_t d, r;
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // initStencilSegment(size of A and B)
    issue(CMD_SEGMENT, 0, 0, SB, 2 * BOFF);
    // the host writes the first 16 lines and the last line of every A block
    for (int i = 0; i < NSPU; i++) begin
      for (int k = 0; k < 17; k++) begin
        line_addr_t l;
        l = line_addr_t'((SB + longint'(i) * BLK * 8) / 64 + ((k == 16) ? (BLK / 8 - 1) : k));
        for (int q = 0; q < 8; q++) d[64*q +: 64] = $realtobits(real'($urandom_range(2000)) / 16.0 - 50.0);
        hw[l] = d;
        host_access(OP_STORE, l, d, r);
      end
    end
    // initConstant(0.2, 0); initStencilcode(code, 5)
    issue(CMD_CONST, 0, 0, 0, longint'($realtobits(0.2)));
    w_instr(0, 0, 1, 0, 0, 1, 0, 1);   // c0, s1, 0, 0, 1, 0, 1
    w_instr(1, 0, 2, 1, 1, 0, 0, 0);   // c0, s2, 1, 1, 0, 0, 0  shift right by 1
    w_instr(2, 0, 2, 0, 0, 0, 0, 0);   // c0, s2, 0, 0, 0, 0, 0
    w_instr(3, 0, 2, 0, 1, 0, 0, 1);   // c0, s2, 0, 1, 0, 0, 1  shift left by 1
    w_instr(4, 0, 3, 0, 0, 0, 1, 1);   // c0, s3, 0, 0, 0, 1, 1  enable output
    issue(CMD_CODE_LEN, 0, 0, 0, 5);
    for (int i = 0; i < NSPU; i++) begin
      issue(CMD_STREAM, 1, i, SB + (longint'(i) * BLK - ROW) * 8, 0);
      issue(CMD_STREAM, 2, i, SB + longint'(i) * BLK * 8, 0);
      issue(CMD_STREAM, 3, i, SB + (longint'(i) * BLK + ROW) * 8, 0);
      issue(CMD_STREAM, 0, i, SB + BOFF + longint'(i) * BLK * 8, 0);
      issue(CMD_NELEM, 0, i, 0, NELEM);
    end
    issue(CMD_START, 0, 0, 0, 0);
    t0 = cyc;
    // a command sent while running must wait
    @(negedge clk); cmd_valid = 1; cmd = '0; cmd.op = CMD_CONST; cmd.idx = 6'd9;
    repeat (4) @(negedge clk);
    cmd_valid = 0;
    fork
      wait (done);
      forever begin
        repeat (200000) @(posedge clk);
        $display("cycle %0d: busy, %0d misses, %0d write-backs so far", cyc - t0, n_miss, n_wb);
      end
    join_any
    disable fork;
    $display("run: %0d SPUs x %0d points in %0d cycles", NSPU, NELEM, cyc - t0);
    // read back B
    for (int i = 0; i < NSPU; i++) begin
      int nl;
      nl = (NCHECK_LINES == 0 || NCHECK_LINES > NELEM / 8) ? NELEM / 8 : NCHECK_LINES;
      for (int n = 0; n < nl; n++) begin
        int v;
        v = (nl == NELEM / 8) ? n : (n < 4 || n >= nl - 4) ? ((n < 4) ? n : NELEM / 8 - (nl - n))
                                                              : int'($urandom_range(NELEM / 8 - 1));
        host_access(OP_LOAD, line_addr_t'((SB + BOFF + (longint'(i) * BLK + v * 8) * 8) / 64), '0, r);
        for (int k = 0; k < 8; k++) begin
          longint e; real acc;
          e = (SB / 8) + longint'(i) * BLK + v * 8 + k;
          acc = 0.2 * a_elem(e - ROW);
          acc = acc + 0.2 * a_elem(e - 1);
          acc = acc + 0.2 * a_elem(e);
          acc = acc + 0.2 * a_elem(e + 1);
          acc = acc + 0.2 * a_elem(e + ROW);
          checks++;
          if (r[64*k +: 64] !== $realtobits(acc)) begin
            failures++;
            if (failures < 10) $display("FAIL SPU %0d point %0d: %f expected %f", i, v * 8 + k,
                                        $bitstoreal(r[64*k +: 64]), acc);
          end
        end
      end
    end
    $display("unaligned=%0d split=%0d misses=%0d writebacks=%0d lq_full=%0d data_wait=%0d refused=%0d irq=%0d",
             n_unal, n_split, n_miss, n_wb, n_lqfull, n_wait, n_refused, n_irq);
    need(n_unal, "unaligned load");
    need(n_split, "split load across slices");
    need(n_miss, "LLC miss");
    need(n_wb, "dirty write-back");
    if (REQUIRE_LQ_FULL) need(n_lqfull, "load queue full");
    need(n_wait, "wait for out-of-order data");
    need(n_refused, "command refused while running");
    checks++;
    if (n_irq != 1) begin failures++; $display("FAIL %0d completion interrupts", n_irq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
