// tb_diba_lswitch: programs the port filters with the Q3 brick-1 values
// (LINEITEM 0100 -> port 2, CUSTOMER 0010 -> port 3, ORDERS 0001 -> port 4,
// END 1000 -> port 1; written as hex 2, 4, 8, 1) plus stream 6 to ports 1
// and 3, then sends random tuples with random per-port stalls. Checks each
// port's sequence, that continuation segments follow their head, that a
// network instruction for another block is broadcast to all ports and that
// unprogrammed streams go nowhere.
module tb_diba_lswitch;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready;
  seg_t in_data;
  logic [3:0] out_valid, out_ready;
  seg_t [3:0] out_data;
  diba_lswitch #(.N(4), .BID(8'd20)) dut (.*);

  seg_t exp_q [4][$];
  int got [4];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 4; p++) if (out_valid[p] && out_ready[p]) begin
      got[p]++;
      checks++;
      if (exp_q[p].size() == 0 || exp_q[p][0] != out_data[p]) fail($sformatf("port %0d: unexpected %h", p, out_data[p]));
      else void'(exp_q[p].pop_front());
    end
  always @(negedge clk) for (int p = 0; p < 4; p++) out_ready[p] = ($urandom % 3) != 0;

  task automatic send(seg_t s);
    @(negedge clk); in_valid = 1; in_data = s;
    #1; while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
  endtask
  task automatic expect_on(logic [3:0] m, seg_t s);
    for (int p = 0; p < 4; p++) if (m[p]) exp_q[p].push_back(s);
  endtask

  initial begin
    logic [3:0] filt [16];
    got = '{0, 0, 0, 0};
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (filt[i]) filt[i] = 4'h0;
    filt[SID_LINEITEM] = 4'h2; filt[SID_CUSTOMER] = 4'h4; filt[SID_ORDERS] = 4'h8;
    filt[SID_END] = 4'h1; filt[SID_JOINED] = 4'h5;
    for (int s = 2; s <= 6; s++) send(mk_lsw_ins(8'd20, sid_t'(s), 8'(filt[s])));
    begin
      seg_t o = mk_lsw_ins(8'd21, SID_LINEITEM, 8'hF);
      expect_on(4'hF, o); send(o);
    end
    for (int i = 0; i < 400; i++) begin
      sid_t sid;
      seg_t h, c;
      sid = sid_t'(2 + $urandom % 7);              // 2..8; 7 and 8 unprogrammed
      h = {sid, 60'({$urandom, $urandom})};
      c = {SID_NULL, 60'({$urandom, $urandom})};
      expect_on(filt[sid], h);
      send(h);
      if (stream_segs(sid) == 2) begin expect_on(filt[sid], c); send(c); end
    end
    repeat (100) @(posedge clk);
    for (int p = 0; p < 4; p++) check(exp_q[p].size() == 0 && got[p] > 0, $sformatf("port %0d complete", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
