// tb_spu_stream_buffer: random mix of stream configuration writes, advances through the
// instruction read port and advances of the output stream (stream 0), sometimes on the same
// stream in the same cycle. A model keeps start and position per stream; both read ports are
// compared with it every cycle. A position advances by eight elements per strobe.
module tb_spu_stream_buffer;
  import casper_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, rd_adv = 0, out_adv = 0;
  logic [3:0] cfg_idx = 0, rd_idx = 0;
  paddr_t cfg_base = 0, rd_base, out_base;
  logic [31:0] rd_pos, out_pos;
  paddr_t      mb [16];
  logic [31:0] mp [16];
  int checks = 0, failures = 0;

  spu_stream_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin mb[i] = '0; mp[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks += 2;
      if (rd_base !== mb[rd_idx] || rd_pos !== mp[rd_idx]) begin
        failures++; $display("FAIL rd port stream %0d", rd_idx);
      end
      if (out_base !== mb[0] || out_pos !== mp[0]) begin
        failures++; $display("FAIL out port");
      end
      cfg_we  = ($urandom_range(9) == 0);
      cfg_idx = 4'($urandom);
      cfg_base = {$urandom, 16'($urandom)} & ~paddr_t'(63);
      rd_idx  = ($urandom_range(3) == 0) ? 4'd0 : 4'($urandom);
      rd_adv  = $urandom_range(1) == 1;
      out_adv = $urandom_range(2) == 0;
      // model update at the coming edge
      for (int i = 0; i < 16; i++) begin
        if (cfg_we && cfg_idx == i) begin mb[i] = cfg_base; mp[i] = 0; end
        else mp[i] = mp[i] + ((rd_adv && rd_idx == i) ? 8 : 0) + ((out_adv && i == 0) ? 8 : 0);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
