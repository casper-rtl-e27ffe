// tb_noc_inject: with a 4 MB stencil segment configured, random loads (aligned and shifted),
// stores and requests outside the segment go through the injection point with a randomly ready
// output. Expected homes come from addresses alone (128 kB blocks round robin inside the
// segment, line mod 16 outside). A shifted load whose two lines have different homes must leave
// as two packets, the requested line's lanes first (the request is accepted with the first); every other request as one full-mask packet
// to its home. Packet counts, destinations, masks and split flags are checked, and loads that
// cross a block boundary are forced so that splitting happens.
module tb_noc_inject;
  import casper_pkg::*;
  logic clk = 0, rst_n = 0, seg_we = 0;
  paddr_t seg_base = 0, seg_size = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready, ev_split;
  llc_req_t in = '0, out;
  logic [3:0] out_dst;
  int checks = 0, failures = 0, n_split = 0;

  noc_inject #(.NSLICE(16), .BLOCK_BITS(17)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint SB = 64'h4000_0000, SS = 4 * 1024 * 1024;
  function automatic int home(longint line);
    longint a; a = line * 64;
    return (a >= SB && a < SB + SS) ? int'((a / 131072) % 16) : int'(line % 16);
  endfunction

  typedef struct { int dst; logic [7:0] mask; logic split; line_addr_t line; } pkt_t;
  pkt_t exp_q [$];

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pkt_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL extra packet"); end
    else begin
      e = exp_q.pop_front();
      if (int'(out_dst) != e.dst || out.mask !== e.mask || out.split !== e.split || out.line !== e.line) begin
        failures++; $display("FAIL packet dst %0d/%0d mask %h/%h", out_dst, e.dst, out.mask, e.mask);
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); seg_we = 1; seg_base = paddr_t'(SB); seg_size = paddr_t'(SS);
    @(negedge clk); seg_we = 0;
    for (int n = 0; n < 3000; n++) begin
      longint l, adjl; int d, s, ha, hb; logic [7:0] am;
      case ($urandom_range(3))
        0: l = SB / 64 + longint'($urandom_range(SS / 64 - 1));
        1: l = SB / 64 + longint'($urandom_range(31)) * 2048 + (($urandom_range(1) == 1) ? 0 : 2047);
        2: l = longint'($urandom_range(100000));
        default: l = (SB + SS) / 64 - 1 + longint'($urandom_range(1));
      endcase
      d = int'($urandom_range(1)); s = int'($urandom_range(7));
      in = '0; in.line = line_addr_t'(l); in.shdr = shdr_e'(d); in.shamt = 3'(s);
      in.op = ($urandom_range(4) == 0) ? OP_STORE : OP_LOAD;
      adjl = (d == 1) ? l - 1 : l + 1;
      ha = home(l); hb = home(adjl);
      for (int k = 0; k < 8; k++) am[k] = (d == 1) ? (k >= 8 - s) : (k < s);
      if (in.op == OP_LOAD && s != 0 && ha != hb) begin
        exp_q.push_back('{dst: ha, mask: ~am, split: 1'b1, line: in.line});
        exp_q.push_back('{dst: hb, mask: am, split: 1'b1, line: in.line});
        n_split++;
      end else exp_q.push_back('{dst: ha, mask: 8'hFF, split: 1'b0, line: in.line});
      @(negedge clk) in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing packets"); end
    if (n_split == 0) begin failures++; $display("FAIL no split"); end
    $display("splits=%0d", n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
