// tb_diba_collector: four slots offer random one- and two-segment tuples
// at random times while the output stalls at random. Checks that every
// tuple arrives once, per-slot order is kept, the two segments of a tuple
// are never separated, and that the collector serves several slots.
module tb_diba_collector;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_valid, in_ready;
  seg_t [3:0] in_data;
  logic out_valid, out_ready;
  seg_t out_data;
  diba_collector #(.N(4)) dut (.*);

  seg_t exp_q [4][$];
  int got = 0, sent = 0, pend_cont = -1, switches = 0, last_slot = -1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int p;
    p = int'(out_data[59:58]);          // slot tag in the payload
    got++; checks++;
    if (pend_cont >= 0 && (out_data[63:60] != SID_NULL || p != pend_cont)) fail("tuple interleaved");
    if (exp_q[p].size() == 0 || exp_q[p][0] != out_data) fail($sformatf("slot %0d: unexpected %h", p, out_data));
    else void'(exp_q[p].pop_front());
    pend_cont = (out_data[63:60] == SID_LINEITEM) ? p : -1;
    if (p != last_slot) switches++;
    last_slot = p;
  end
  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  task automatic slot(int p, int n);
    for (int i = 0; i < n; i++) begin
      sid_t sid = ($urandom % 2) ? SID_LINEITEM : SID_CUSTOMER;
      seg_t h, c;
      h = {sid, 2'(p), 58'({$urandom, $urandom})};
      c = {SID_NULL, 2'(p), 58'({$urandom, $urandom})};
      repeat ($urandom % 3) @(negedge clk);
      exp_q[p].push_back(h);
      @(negedge clk); in_valid[p] = 1; in_data[p] = h;
      #1; while (!in_ready[p]) begin @(negedge clk); #1; end
      @(posedge clk); #1 in_valid[p] = 0; sent++;
      if (sid == SID_LINEITEM) begin
        repeat ($urandom % 3) @(negedge clk);
        exp_q[p].push_back(c);
        @(negedge clk); in_valid[p] = 1; in_data[p] = c;
        #1; while (!in_ready[p]) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid[p] = 0; sent++;
      end
    end
  endtask

  initial begin
    in_valid = '0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork slot(0, 150); slot(1, 150); slot(2, 150); slot(3, 150); join
    repeat (50) @(posedge clk);
    check(got == sent, $sformatf("%0d of %0d segments out", got, sent));
    check(switches > 100, "slots interleave at tuple boundaries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
