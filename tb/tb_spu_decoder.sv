// tb_spu_decoder: checks the field split of the 15-bit instruction and the load address. First
// the five instructions of the Jacobi-2D listing (constant, stream, shift direction, shift amount,
// clear, enable output, advance) are packed by hand into bit positions 14..0 and decoded; then
// random instructions with random line-aligned stream states. Expected line = (start + 8*pos)/64.
module tb_spu_decoder;
  import casper_pkg::*;
  instr_t instr;
  logic [3:0] sidx, cidx;
  paddr_t s_base;
  logic [31:0] s_pos;
  line_addr_t line;
  shdr_e shdr;
  logic [2:0] shamt;
  logic clr, out_en, adv, unaligned_o;
  int checks = 0, failures = 0;
  bit clk = 0;

  spu_decoder dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [14:0] raw, int c, int s, int d, int a, int cl, int oe, int ad);
    instr = instr_t'(raw); #1;
    checks++;
    if (cidx != c || sidx != s || shdr != shdr_e'(d) || shamt != a || clr != cl ||
        out_en != oe || adv != ad) begin
      failures++; $display("FAIL decode %b", raw);
    end
  endtask

  initial begin
    s_base = 48'h1000; s_pos = 0;
    // c0, s1, 0, 0, 1, 0, 1
    chk({4'd0, 4'd1, 1'b0, 3'd0, 1'b1, 1'b0, 1'b1}, 0, 1, 0, 0, 1, 0, 1);
    // c0, s2, 1, 1, 0, 0, 0  (shift right by 1)
    chk({4'd0, 4'd2, 1'b1, 3'd1, 1'b0, 1'b0, 1'b0}, 0, 2, 1, 1, 0, 0, 0);
    // c0, s2, 0, 0, 0, 0, 0
    chk({4'd0, 4'd2, 1'b0, 3'd0, 1'b0, 1'b0, 1'b0}, 0, 2, 0, 0, 0, 0, 0);
    // c0, s2, 0, 1, 0, 0, 1  (shift left by 1)
    chk({4'd0, 4'd2, 1'b0, 3'd1, 1'b0, 1'b0, 1'b1}, 0, 2, 0, 1, 0, 0, 1);
    // c0, s3, 0, 0, 0, 1, 1
    chk({4'd0, 4'd3, 1'b0, 3'd0, 1'b0, 1'b1, 1'b1}, 0, 3, 0, 0, 0, 1, 1);
    for (int n = 0; n < 5000; n++) begin
      logic [14:0] raw;
      paddr_t ea;
      raw = 15'($urandom);
      s_base = {16'($urandom), $urandom} & ~paddr_t'(($urandom_range(7) == 0) ? 7 : 63);
      s_pos  = 32'($urandom_range(100000)) * 8;
      chk(raw, raw[14:11], raw[10:7], raw[6], raw[5:3], raw[2], raw[1], raw[0]);
      ea = s_base + paddr_t'(s_pos) * 8;
      checks++;
      if (line !== ea[47:6] || unaligned_o !== (ea[5:0] != 0)) begin
        failures++; $display("FAIL address base %h pos %0d line %h", s_base, s_pos, line);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
