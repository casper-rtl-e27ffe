// tb_spu_exec_unit: self-checking testbench for the SPU vector execution unit. Groups of 1..6
// operand vectors (clear on the first, enable-output on the last) are streamed in back to back,
// one per cycle, each with a random constant. The expected outputs are computed lane by lane with
// the simulator's double arithmetic (product rounded, then sum rounded, as a separate multiply
// and add do). Checked: every lane of every output, and that each output appears exactly two
// cycles after its last operand (single-cycle throughput, two-cycle latency).
module tb_spu_exec_unit;
  import casper_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_clr, in_out_en, out_valid, busy;
  line_data_t in_data, out_data;
  dword_t in_const;
  int checks = 0, failures = 0;

  spu_exec_unit dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dword_t rnd_double();
    return {1'($urandom), 11'(1023 + int'($urandom_range(40)) - 20), 20'($urandom), 32'($urandom)};
  endfunction

  line_data_t exp_q [$];
  int         exp_t [$];
  int         cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        line_data_t e; int t;
        e = exp_q.pop_front(); t = exp_t.pop_front();
        if (out_data !== e) begin failures++; $display("FAIL data %h exp %h", out_data, e); end
        checks++;
        if (cyc != t + 2) begin failures++; $display("FAIL latency %0d", cyc - t); end
      end
    end
  end

  initial begin
    real acc [LANES];
    in_valid = 0; in_clr = 0; in_out_en = 0; in_data = '0; in_const = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int g = 0; g < 300; g++) begin
      int len;
      len = 1 + int'($urandom_range(5));
      for (int k = 0; k < len; k++) begin
        line_data_t e;
        @(negedge clk);
        in_valid = 1; in_clr = (k == 0); in_out_en = (k == len - 1);
        in_const = rnd_double();
        for (int l = 0; l < LANES; l++) begin
          real p;
          in_data[64*l +: 64] = rnd_double();
          p = $bitstoreal(in_data[64*l +: 64]) * $bitstoreal(in_const);
          acc[l] = (k == 0) ? p : acc[l] + p;
          e[64*l +: 64] = $realtobits(acc[l]);
        end
        if (k == len - 1) begin exp_q.push_back(e); exp_t.push_back(cyc); end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
