// tb_spu_instr_buffer: writes random 15-bit instructions into all 64 entries of the instruction
// buffer in random order, then reads every entry back through the asynchronous read port and
// compares with a model array; also checks that a write becomes visible after one clock edge and
// that the array resets to zero.
module tb_spu_instr_buffer;
  import casper_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  instr_t wdata = '0, rdata;
  instr_t model [DEPTH];
  int checks = 0, failures = 0;

  spu_instr_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      raddr = 6'(i); #1; checks++;
      if (rdata !== '0) begin failures++; $display("FAIL reset entry %0d", i); end
      model[i] = '0;
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 1; waddr = 6'($urandom); wdata = instr_t'($urandom);
      model[waddr] = wdata;
      @(posedge clk); #1;
      we = 0; raddr = waddr; #1; checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL write-read %0d", raddr); end
    end
    for (int i = 0; i < DEPTH; i++) begin
      raddr = 6'(i); #1; checks++;
      if (rdata !== model[i]) begin failures++; $display("FAIL entry %0d %h exp %h", i, rdata, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
