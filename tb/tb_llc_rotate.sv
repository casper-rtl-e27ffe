// tb_llc_rotate: reproduces the unaligned load of the published example (line of elements 8..15,
// shift right by 3: the subarrays hold 08 09 10 11 12 05 06 07 and the output must be 05..12),
// then random cases built the same way: the subarrays are filled with the elements a shifted load
// reads (element e sits in subarray e mod 8) and the rotated output must list the requested
// elements in order.
module tb_llc_rotate;
  import casper_pkg::*;
  line_data_t in, out;
  shdr_e shdr;
  logic [2:0] shamt;
  int checks = 0, failures = 0;
  bit clk = 0;

  llc_rotate dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint base_elem, int d, int s);
    longint first;
    first = base_elem + ((d == 1) ? -s : s);
    for (int j = 0; j < 8; j++) in[64*((first + j) % 8) +: 64] = 64'(first + j);
    shdr = shdr_e'(d); shamt = 3'(s); #1;
    for (int j = 0; j < 8; j++) begin
      checks++;
      if (out[64*j +: 64] !== 64'(first + j)) begin
        failures++; $display("FAIL base %0d dir %0d amt %0d lane %0d", base_elem, d, s, j);
      end
    end
  endtask

  initial begin
    // published example: subarray contents 08 09 10 11 12 05 06 07
    for (int k = 0; k < 5; k++) in[64*k +: 64] = 64'(8 + k);
    for (int k = 5; k < 8; k++) in[64*k +: 64] = 64'(k);
    shdr = SH_RIGHT; shamt = 3'd3; #1;
    for (int j = 0; j < 8; j++) begin
      checks++;
      if (out[64*j +: 64] !== 64'(5 + j)) begin failures++; $display("FAIL example lane %0d", j); end
    end
    for (int n = 0; n < 500; n++) run(8 * longint'($urandom_range(100000) + 1), n % 2, int'($urandom_range(7)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
