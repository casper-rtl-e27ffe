// tb_casper_ctrl: issues every command type and checks the resulting configuration strobes
// (broadcast for code and constants, one-hot per SPU for streams and element counts, the
// segment registers), then starts a run and lets four model SPUs finish one by one: the
// controller must refuse commands while busy, raise done and a single done_irq only after the
// last SPU, and accept commands again afterwards.
module tb_casper_ctrl;
  import casper_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready;
  host_cmd_t cmd = '0;
  logic seg_we, ibuf_we, const_we, start, busy, done, done_irq;
  paddr_t seg_base, seg_size, stream_base;
  logic [5:0] ibuf_idx;
  instr_t ibuf_data;
  logic [6:0] code_len;
  logic [3:0] const_idx, stream_idx;
  dword_t const_data;
  logic [N-1:0] stream_we, nelem_we, spu_done = '0;
  logic [31:0] nelem;
  int checks = 0, failures = 0, irqs = 0;

  casper_ctrl #(.NSPU(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n) irqs += int'(done_irq);

  task automatic issue(cmd_op_e op, int idx, int acc, longint addr, longint data);
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.idx = 6'(idx); cmd.acc = 5'(acc);
    cmd.addr = paddr_t'(addr); cmd.data = 64'(data);
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    issue(CMD_SEGMENT, 0, 0, 64'h4000_0000, 4194304);
    expect_true(seg_we && seg_base == 48'h4000_0000 && seg_size == 48'd4194304, "segment");
    issue(CMD_CODE, 7, 0, 0, 15'h1235);
    expect_true(ibuf_we && ibuf_idx == 7 && ibuf_data == instr_t'(15'h1235), "code");
    issue(CMD_CODE_LEN, 0, 0, 0, 5);
    @(posedge clk); #1 expect_true(code_len == 5, "code length");
    issue(CMD_CONST, 3, 0, 0, 64'h3FC9_9999_9999_999A);
    expect_true(const_we && const_idx == 3 && const_data == 64'h3FC9_9999_9999_999A, "constant");
    issue(CMD_STREAM, 2, 3, 64'h1000, 0);
    expect_true(stream_we == 4'b1000 && stream_idx == 2 && stream_base == 48'h1000, "stream");
    issue(CMD_NELEM, 0, 1, 0, 65536);
    expect_true(nelem_we == 4'b0010 && nelem == 65536, "n elements");
    issue(CMD_START, 0, 0, 0, 0);
    expect_true(start && busy, "start");
    @(negedge clk); cmd_valid = 1; cmd.op = CMD_CONST;
    for (int i = 0; i < N; i++) begin
      repeat (5) @(negedge clk);
      expect_true(!cmd_ready && !done, "busy while running");
      spu_done[i] = 1;
    end
    cmd_valid = 0;
    repeat (3) @(negedge clk);
    $display("done=%0d busy=%0d ready=%0d irqs=%0d", done, busy, cmd_ready, irqs);
    expect_true(done && !busy && cmd_ready && irqs == 1, "completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
