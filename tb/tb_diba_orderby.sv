// tb_diba_orderby: DEPTH = 16, LIMIT = 10. Batches of GROUPS tuples (with
// duplicate revenues, so the date tie-break matters) followed by END; the
// unit must emit the first 10 rows by revenue desc, date asc, then END.
// A batch larger than DEPTH exercises the full list (overflow flag).
module tb_diba_orderby;
  import diba_pkg::*;
`include "tb_seg_src.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, overflow;
  seg_t in_data, out_data;
  logic [4:0] n_entries;
  diba_orderby #(.DEPTH(16), .LIMIT(10)) dut (.*);

  group_t got_g [$]; int n_end = 0, seen_ovf = 0;
  logic [119:0] ot; int oseg = 0; sid_t osid;
  always @(posedge clk) if (rst_n) begin
    if (overflow) seen_ovf++;
    if (out_valid && out_ready) begin
      if (oseg == 0) begin osid = out_data[63:60]; ot = '0; ot[59:0] = out_data[59:0]; end
      else ot[119:60] = out_data[59:0];
      oseg++;
      if (oseg == stream_segs(osid)) begin
        oseg = 0;
        if (osid == SID_RESULT) got_g.push_back(group_t'(ot[114:0]));
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

  function automatic bit first(group_t a, group_t b);   // stable: a arrived earlier
    return !((b.revenue > a.revenue) || (b.revenue == a.revenue && b.orderdate < a.orderdate));
  endfunction

  task automatic batch(int n);
    group_t all [$]; group_t g, tmp; logic [119:0] t;
    got_g.delete();
    for (int i = 0; i < n; i++) begin
      g.revenue = 64'($urandom % 8) * 64'd1000; g.orderdate = 21'($urandom % 50);
      g.orderkey = 24'(i); g.shippriority = 6'(i % 3);
      all.push_back(g);
      t = 120'(g);
      send({SID_GROUPS, t[59:0]}); send({SID_NULL, t[119:60]});
    end
    // stable insertion sort = the unit's order of equal rows
    for (int i = 1; i < all.size(); i++)
      for (int k = i; k > 0 && !first(all[k-1], all[k]); k--) begin tmp = all[k]; all[k] = all[k-1]; all[k-1] = tmp; end
    send({SID_END, 60'd0});
    begin int e0; e0 = n_end; while (n_end == e0) @(posedge clk); end
    check(got_g.size() == ((n < 10) ? n : 10), $sformatf("%0d rows", got_g.size()));
    foreach (got_g[i]) check(got_g[i] == all[i], $sformatf("row %0d: %h vs %h", i, got_g[i], all[i]));
  endtask

  initial begin
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    batch(14);
    check(seen_ovf == 0, "no overflow below DEPTH");
    batch(40);
    check(seen_ovf > 0, "overflow above DEPTH");
    batch(6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
