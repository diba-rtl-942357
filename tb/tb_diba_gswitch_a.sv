// tb_diba_gswitch_a: programs the routing table with network instructions
// (stream 2: east, 2 segments; stream 3: south and east, 1 segment;
// stream 4: no port) and sends random tuples on both inputs at once with
// random output stalls. Checks: each output gets exactly the expected
// tuples, in per-input order, with the two segments of a tuple adjacent;
// instructions for another B-ID leave south; the switch's own instructions
// are consumed.
module tb_diba_gswitch_a;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic n_in_valid, n_in_ready, w_in_valid, w_in_ready, s_out_valid, s_out_ready, e_out_valid, e_out_ready;
  seg_t n_in_data, w_in_data, s_out_data, e_out_data;
  diba_gswitch_a #(.BID(8'd7)) dut (.*);

  seg_t exp_s [2][$], exp_e [2][$];   // expected per output, per input
  int got_s = 0, got_e = 0, stalls = 0;
  seg_t last_s, last_e;

  // payload: [59] input, rest random; continuation carries the same tag
  task automatic chk_out(seg_t d, ref seg_t q [2][$], input string nm);
    int src = (d[63:60] == SID_NET) ? 0 : int'(d[59]);
    checks++;
    if (q[src].size() == 0 || q[src][0] != d) fail($sformatf("%s: unexpected %h", nm, d));
    else void'(q[src].pop_front());
  endtask
  always @(posedge clk) if (rst_n) begin
    if (s_out_valid && s_out_ready) begin chk_out(s_out_data, exp_s, "south"); got_s++; end
    if (e_out_valid && e_out_ready) begin chk_out(e_out_data, exp_e, "east");  got_e++; end
    if ((n_in_valid && !n_in_ready) || (w_in_valid && !w_in_ready)) stalls++;
  end
  always @(negedge clk) begin s_out_ready = ($urandom % 3) != 0; e_out_ready = ($urandom % 2) != 0; end

  task automatic send(bit west, seg_t s);
    if (!west) begin
      @(negedge clk); n_in_valid = 1; n_in_data = s;
      #1; while (!n_in_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 n_in_valid = 0;
    end else begin
      @(negedge clk); w_in_valid = 1; w_in_data = s;
      #1; while (!w_in_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 w_in_valid = 0;
    end
  endtask

  task automatic traffic(bit west, int n);
    for (int i = 0; i < n; i++) begin
      sid_t sid = sid_t'(2 + $urandom % 3);
      seg_t h, c;
      h = {sid, west, 59'({$urandom, $urandom})};
      c = {SID_NULL, west, 59'({$urandom, $urandom})};
      if (sid == 2) begin exp_e[west].push_back(h); exp_e[west].push_back(c); end
      if (sid == 3) begin exp_s[west].push_back(h); exp_e[west].push_back(h); end
      send(west, h);
      if (sid != 3) send(west, c);   // streams 2 and 4 have two segments
    end
  endtask

  initial begin
    n_in_valid = 0; w_in_valid = 0; n_in_data = '0; w_in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    send(0, mk_gsw_ins(8'd7, SID_LINEITEM, PORT_EAST, 4'd2));
    send(0, mk_gsw_ins(8'd7, SID_CUSTOMER, PORT_SOUTH | PORT_EAST, 4'd1));
    send(0, mk_gsw_ins(8'd7, SID_ORDERS, 2'b00, 4'd2));
    begin   // an instruction for another switch passes south
      seg_t o = mk_gsw_ins(8'd9, SID_LINEITEM, PORT_EAST, 4'd2);
      exp_s[0].push_back(o); send(0, o);
    end
    fork traffic(0, 300); traffic(1, 300); join
    repeat (100) @(posedge clk);
    check(exp_s[0].size() + exp_s[1].size() + exp_e[0].size() + exp_e[1].size() == 0, "all expected segments delivered");
    check(got_e > 0 && got_s > 0, "both outputs used");
    check(stalls > 0, "input stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
