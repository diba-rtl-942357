// tb_diba_agg_groupby: GROUPS = 16. Batch 1 sends JOINED tuples over 12
// group keys and END: the unit must emit every group once (in order of first
// appearance) with the exact revenue sum, then END. Batch 2 uses 20 keys, so
// the table overflows: the overflow flag must rise and the first 16 groups
// still be exact. Output stalls at random.
module tb_diba_agg_groupby;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, overflow;
  seg_t in_data, out_data;
  logic [4:0] n_groups;
  diba_agg_groupby #(.GROUPS(16)) dut (.*);

  group_t exp_g [$]; group_t got_g [$]; int n_end = 0, seen_ovf = 0;
  logic [119:0] ot; int oseg = 0; sid_t osid;
  always @(posedge clk) if (rst_n) begin
    if (overflow) seen_ovf++;
    if (out_valid && out_ready) begin
      if (oseg == 0) begin osid = out_data[63:60]; ot = '0; ot[59:0] = out_data[59:0]; end
      else ot[119:60] = out_data[59:0];
      oseg++;
      if (oseg == stream_segs(osid)) begin
        oseg = 0;
        if (osid == SID_GROUPS) got_g.push_back(group_t'(ot[114:0]));
        else if (osid == SID_END) n_end++;
        else fail("unexpected stream");
      end
    end
  end
  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  task automatic send(seg_t s);
    @(negedge clk); in_valid = 1; in_data = s;
    #1; while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 0;
  endtask

  task automatic batch(int nkeys, int ntup);
    joined_t j; logic [119:0] t; int idx; logic [50:0] k;
    exp_g.delete(); got_g.delete();
    for (int i = 0; i < ntup; i++) begin
      idx = (i < nkeys) ? i : int'($urandom % nkeys);   // every key appears
      j.orderkey = 24'(1000 + idx); j.orderdate = 21'(idx * 3); j.shippriority = 6'(idx % 4);
      j.extendedprice = 32'(1 + $urandom % 100000); j.discount = 32'($urandom % 11);
      if (idx < 16) begin
        if (idx >= exp_g.size()) begin
          group_t g; g.orderkey = j.orderkey; g.orderdate = j.orderdate; g.shippriority = j.shippriority; g.revenue = '0;
          exp_g.push_back(g);
        end
        exp_g[idx].revenue += 64'(j.extendedprice) * (64'd100 - 64'(j.discount));
      end
      t = 120'(j);
      send({SID_JOINED, t[59:0]}); send({SID_NULL, t[119:60]});
      if ($urandom % 8 == 0) send({SID_CUSTOMER, 60'd5});            // ignored stream
    end
    send({SID_END, 60'd0});
    begin int e0; e0 = n_end; while (n_end == e0) @(posedge clk); end
    check(got_g.size() == exp_g.size(), $sformatf("%0d groups, expected %0d", got_g.size(), exp_g.size()));
    foreach (got_g[i]) check(i < exp_g.size() && got_g[i] == exp_g[i], $sformatf("group %0d", i));
  endtask

  initial begin
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    batch(12, 200);
    check(seen_ovf == 0, "no overflow with 12 groups");
    batch(20, 200);
    check(seen_ovf > 0, "overflow with 20 groups");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
