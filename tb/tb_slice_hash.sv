// tb_slice_hash: configures a stencil segment (a 4 MB segment at a 2 MB-aligned base, then an
// unaligned odd-sized one) and checks random line addresses in_exp, just outside and far from
// it. Expected: in_exp, slice = (byte address / 128 kB) mod 16; outside, slice = line address
// mod 16 (consecutive lines to consecutive slices). Before any segment is set every address
// uses the conventional mapping.
module tb_slice_hash;
  import casper_pkg::*;
  logic clk = 0, rst_n = 0, seg_we = 0, in_seg;
  paddr_t seg_base = 0, seg_size = 0;
  line_addr_t line;
  logic [3:0] slice;
  int checks = 0, failures = 0;

  slice_hash #(.NSLICE(16), .BLOCK_BITS(17)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic probe(longint addr, longint b, longint sz);
    logic in_exp;
    int es;
    line = line_addr_t'(addr / 64); #1;
    in_exp = (addr >= b) && (addr < b + sz);
    es = in_exp ? int'((addr / 131072) % 16) : int'((addr / 64) % 16);
    checks++;
    if (in_seg !== in_exp || slice !== 4'(es)) begin
      failures++; $display("FAIL addr %h in %0d slice %0d exp %0d/%0d", addr, in_seg, slice, in_exp, es);
    end
  endtask

  initial begin
    longint b, sz;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) probe(longint'($urandom) * 64, 0, 0);
    for (int cfg = 0; cfg < 2; cfg++) begin
      b  = (cfg == 0) ? 64'h4000_0000 : 64'h1234_5640;
      sz = (cfg == 0) ? 4 * 1024 * 1024 : 3 * 1024 * 1024 + 4096;
      @(negedge clk); seg_we = 1; seg_base = paddr_t'(b); seg_size = paddr_t'(sz);
      @(negedge clk); seg_we = 0;
      for (int n = 0; n < 2000; n++) probe(b + longint'($urandom_range(sz / 64 - 1)) * 64, b, sz);
      probe(b - 64, b, sz); probe(b + sz, b, sz); probe(b, b, sz); probe(b + sz - 64, b, sz);
      for (int n = 0; n < 200; n++) probe(longint'($urandom) * 64 + 64'h8000_0000, b, sz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
