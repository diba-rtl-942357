// tb_diba_selection: the o_orderdate < constant selection (two-segment
// ORDERS tuples). Sets the constant with a block instruction, changes it
// half-way, mixes in other streams and instructions for other blocks,
// stalls the output at random, and checks the passed tuples and counters
// against a software filter.
module tb_diba_selection;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  seg_t in_data, out_data;
  logic [31:0] passed, dropped;
  diba_selection #(.STREAM(SID_ORDERS), .FLSB(48), .FW(21), .OP(CMP_LT), .BID(8'd35)) dut (.*);

  seg_t exp_q [$];
  int npass = 0, ndrop = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || exp_q[0] != out_data) fail($sformatf("unexpected %h", out_data));
    else void'(exp_q.pop_front());
  end
  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  task automatic send(seg_t s);
    @(negedge clk); in_valid = 1; in_data = s;
    #1; while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    logic [20:0] cst;
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      cst = (phase == 0) ? 21'd700 : 21'd250;
      send(mk_pb_ins(8'd35, 52'(cst)));
      send(mk_pb_ins(8'd36, 52'd5));                // another block's constant
      for (int i = 0; i < 300; i++) begin
        int kind;
        kind = $urandom % 4;
        if (kind == 0) send({SID_CUSTOMER, 60'({$urandom, $urandom})});
        else begin
          orders_t o; logic [119:0] t;
          o.orderkey = 24'($urandom); o.custkey = 24'($urandom);
          o.orderdate = 21'($urandom % 1000); o.shippriority = 6'($urandom);
          t = 120'(o);
          if (o.orderdate < cst) begin
            npass++; exp_q.push_back({SID_ORDERS, t[59:0]}); exp_q.push_back({SID_NULL, t[119:60]});
          end else ndrop++;
          send({SID_ORDERS, t[59:0]}); send({SID_NULL, t[119:60]});
        end
      end
    end
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all passing tuples delivered");
    check(passed == 32'(npass) && dropped == 32'(ndrop), $sformatf("counters %0d/%0d vs %0d/%0d", passed, dropped, npass, ndrop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
