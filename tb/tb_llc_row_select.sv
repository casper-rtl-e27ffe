// tb_llc_row_select: for every shift direction and amount and for random rows (including the
// first and last set, where the adjacent row wraps), the expected row of each subarray is derived
// from element addresses alone: output lane j of a load at line L shifted by s needs element
// 8L -/+ s + j, which lives in subarray (address mod 8) at row (address div 8). Every subarray's
// row and its adjacent-line flag are compared with that.
module tb_llc_row_select;
  import casper_pkg::*;
  localparam int SETS = 2048;
  logic [10:0] row, sub_row [8];
  shdr_e shdr;
  logic [2:0] shamt;
  logic [7:0] adj;
  int checks = 0, failures = 0;
  bit clk = 0;

  llc_row_select #(.SETS(SETS), .SUBARRAYS(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 600; n++) begin
      longint base_line;
      base_line = (n == 0) ? SETS * 5 : (n == 1) ? SETS * 6 - 1 : SETS * 5 + int'($urandom_range(SETS - 1));
      row = 11'(base_line);
      for (int d = 0; d < 2; d++) begin
        for (int s = 0; s < 8; s++) begin
          shdr = shdr_e'(d); shamt = 3'(s); #1;
          for (int j = 0; j < 8; j++) begin
            longint ea, el;
            ea = base_line * 8 + ((d == 1) ? -s : s) + j;
            el = ea / 8;
            checks++;
            if (sub_row[ea % 8] !== 11'(el) || adj[ea % 8] !== (el != base_line)) begin
              failures++;
              $display("FAIL row %0d dir %0d amt %0d sub %0d got %0d", row, d, s, ea % 8, sub_row[ea % 8]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
