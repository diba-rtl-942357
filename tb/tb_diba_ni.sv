// tb_diba_ni: network-interface pair (serializer + deserializer, 16 lines).
// Random segments with random receiver stalls; checks order and data, and
// that a segment takes LINES/64 = 4 beats on the serial link (rate check:
// 100 back-to-back segments need at least 400 cycles and at most 420).
module tb_diba_ni;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, ser_valid, ser_ready, out_valid, out_ready;
  seg_t in_data, out_data;
  logic [15:0] ser_data;
  diba_ni_ser #(.LINES(16)) u_tx (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                  .ser_valid, .ser_ready, .ser_data);
  diba_ni_des #(.LINES(16)) u_rx (.clk, .rst_n, .ser_valid, .ser_ready, .ser_data,
                                  .out_valid, .out_ready, .out_data);
  seg_t exp_q [$];
  int got = 0, beats = 0;
  bit stall_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) exp_q.push_back(in_data);
    if (ser_valid && ser_ready) beats++;
    if (out_valid && out_ready) begin
      got++;
      check(exp_q.size() > 0 && out_data == exp_q[0], "segment data/order");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end
  always @(negedge clk) out_ready = stall_out ? ($urandom % 3 == 0) : 1'b1;

  task automatic run(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_data = {$urandom, $urandom};
      #1; while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    #1 in_valid = 0;
  endtask

  initial begin
    int t0;
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    t0 = int'($time / 10);
    run(100);
    while (got < 100) @(posedge clk);
    begin
      int dt;
      dt = int'($time / 10) - t0;
      check(dt >= 400 && dt <= 420, $sformatf("rate: 100 segments in %0d cycles", dt));
    end
    check(beats == 400, "four beats per segment");
    stall_out = 1;
    run(200);
    stall_out = 0;
    repeat (50) @(posedge clk);
    check(got == 300 && exp_q.size() == 0, "all segments delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
