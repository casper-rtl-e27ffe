// tb_spu_load_queue: loads are allocated at random times; their responses come back in random
// order after random delays, and about a third of them as two halves (split loads) whose lane
// sets are complementary. The head is popped at random. Checked: operands leave strictly in
// allocation order with the full data and the constant index/control bits given at allocation;
// the queue accepts exactly DEPTH (10) loads before it reports full; it ends empty.
module tb_spu_load_queue;
  import casper_pkg::*;
  localparam int DEPTH = 10;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready, alloc_clr = 0, alloc_out_en = 0;
  logic [TAG_W-1:0] alloc_tag, resp_tag = 0;
  logic [3:0] alloc_cidx = 0, head_cidx;
  logic resp_valid = 0, resp_split = 0;
  line_data_t resp_data = '0, head_data;
  logic head_valid, head_clr, head_out_en, head_pop = 0, empty;
  int checks = 0, failures = 0;

  spu_load_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [TAG_W-1:0] tag; line_data_t data; logic split; } pend_t;
  pend_t      pend [$];
  line_data_t exp_d [$];
  logic [3:0] exp_c [$];

  function automatic line_data_t rnd_line();
    line_data_t v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic do_alloc();
    line_data_t d;
    logic [7:0] m;
    line_data_t lo, hi;
    d = rnd_line();
    alloc_valid = 1; alloc_cidx = 4'($urandom); alloc_clr = 1'($urandom); alloc_out_en = 1'($urandom);
    exp_d.push_back(d); exp_c.push_back(alloc_cidx);
    if ($urandom_range(2) == 0) begin
      m = 8'($urandom);
      for (int k = 0; k < 8; k++) begin
        lo[64*k +: 64] = m[k] ? d[64*k +: 64] : 64'd0;
        hi[64*k +: 64] = m[k] ? 64'd0 : d[64*k +: 64];
      end
      pend.push_back('{tag: alloc_tag, data: lo, split: 1'b1});
      pend.push_back('{tag: alloc_tag, data: hi, split: 1'b1});
    end else begin
      pend.push_back('{tag: alloc_tag, data: d, split: 1'b0});
    end
  endtask

  initial begin
    int accepted;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill without responses: exactly DEPTH accepted
    accepted = 0;
    for (int n = 0; n < DEPTH + 4; n++) begin
      @(negedge clk);
      alloc_valid = 0;
      if (alloc_ready) begin do_alloc(); accepted++; end
    end
    @(negedge clk); alloc_valid = 0;
    checks++;
    if (accepted != DEPTH || alloc_ready) begin failures++; $display("FAIL capacity %0d", accepted); end
    // random traffic
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      // head check for the pop decided now
      head_pop = head_valid && ($urandom_range(3) != 0);
      if (head_pop) begin
        checks++;
        if (exp_d.size() == 0 || head_data !== exp_d[0] || head_cidx !== exp_c[0]) begin
          failures++; $display("FAIL head order/data at cycle %0d", n);
        end
        void'(exp_d.pop_front()); void'(exp_c.pop_front());
      end
      resp_valid = 0;
      if (pend.size() > 0 && $urandom_range(1) == 1) begin
        int i;
        i = int'($urandom_range(pend.size() - 1));
        resp_valid = 1; resp_tag = pend[i].tag; resp_data = pend[i].data; resp_split = pend[i].split;
        pend.delete(i);
      end
      alloc_valid = 0;
      if (n < 5000 && alloc_ready && $urandom_range(2) != 0) do_alloc();
    end
    @(negedge clk); head_pop = 0; alloc_valid = 0; resp_valid = 0;
    @(negedge clk);
    checks++;
    if (!empty || exp_d.size() != 0) begin failures++; $display("FAIL not drained %0d", exp_d.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
