// Shared body of the end-to-end testbenches of diba_top (included by
// tb_diba_top, reduced sizes, and tb_diba_top_full, the sizes of the paper).
//
// The testbench programs the Q3 instance in-band (network instructions for
// the five GSwitches and four LSwitches, block instructions for the three
// selection constants), then runs two query batches, each ended by
// END_MESSAGE. Batch 2 uses new selection constants (reprogramming while
// the join windows keep their contents). A software model recomputes the
// query from the tuples the join unit actually receives (so the order in
// which the brick-1 collector merges the streams does not matter):
// windowed three-way join, group-by sums, order by revenue desc / date asc,
// first LIMIT rows. Mechanisms that must occur, each counted:
// input stall, output back-pressure, traffic on the west entrance, the
// join's overflow buffer in use, window expiry, two-segment tuples,
// reprogramming, END flush of group-by and order-by.
  import diba_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, in2_valid, in2_ready;
  logic        out_valid, out_ready, out2_valid, out2_ready;
  logic [63:0] in_data, in2_data, out_data, out2_data;
  logic [15:0] pu_overflow;

  diba_top `TOP_PARAMS dut (.*);

  localparam int W_WIN = `TB_W;
  localparam int LIM   = 10;

  function automatic void fail(string m);
    failures++; $display("FAIL %s", m);
  endfunction

  // ---------------- drivers ----------------
  task automatic send(seg_t s);
    @(negedge clk); in_valid = 1'b1; in_data = s;
    #1; while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in_valid = 1'b0;
  endtask
  task automatic send2(seg_t s);
    @(negedge clk); in2_valid = 1'b1; in2_data = s;
    #1; while (!in2_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 in2_valid = 1'b0;
  endtask
  task automatic send_tuple(sid_t sid, logic [119:0] t, bit west);
    seg_t s0, s1;
    s0 = {sid, t[59:0]}; s1 = {SID_NULL, t[119:60]};
    if (west) begin send2(s0); if (stream_segs(sid) == 2) send2(s1); end
    else      begin send(s0);  if (stream_segs(sid) == 2) send(s1);  end
  endtask

  // ---------------- mechanism counters ----------------
  int n_in_stall = 0, n_out_bp = 0, n_west = 0, n_ovf = 0, n_expire = 0,
      n_twoseg = 0, n_reprog = 0, n_end = 0, n_out2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready)   n_in_stall++;
    if (out_valid && !out_ready) n_out_bp++;
    if (in2_valid && in2_ready)  n_west++;
    if (pu_overflow[5])          n_ovf++;
    if (dut.g_row[1].u_brick.g_slot[1].g_cmj.u_pu.g_stage[0].u_stage.g_unit[0].u_hbsj.state == 3'd2 ||
        dut.g_row[1].u_brick.g_slot[1].g_cmj.u_pu.g_stage[1].u_stage.g_unit[0].u_hbsj.state == 3'd2)
      n_expire++;
    if (out2_valid && out2_ready) n_out2++;
  end
  always @(negedge clk) begin
    out_ready  = ($urandom % 4) != 0;
    out2_ready = ($urandom % 2) != 0;
  end

  // ---------------- selection constants and expected pass counts ----------------
  logic [20:0] c_ship, c_odate;
  logic [31:0] c_seg;
  int exp_pass [3];       // L, C, O passing in the current batch
  int got_pass [3];

  // ---------------- model of the join, fed by the join unit's input ----------------
  lineitem_t wl [$];
  customer_t wc [$];
  orders_t   wo [$];
  joined_t   jres [$];     // expected join results of the current batch
  int        batch_done = 0;
  group_t    exp_rows [2][$];

  function automatic void model_tuple(sid_t sid, logic [119:0] t);
    lineitem_t l; customer_t c; orders_t o; joined_t j;
    if (sid == SID_LINEITEM) begin
      l = lineitem_t'(t[108:0]);
      got_pass[0]++;
      if (!(l.shipdate > c_ship)) fail("lineitem passed a selection it fails");
      n_twoseg++;
      foreach (wo[i]) if (wo[i].orderkey == l.orderkey)
        foreach (wc[k]) if (wc[k].custkey == wo[i].custkey) begin
          j.orderkey = l.orderkey; j.extendedprice = l.extendedprice; j.discount = l.discount;
          j.orderdate = wo[i].orderdate; j.shippriority = wo[i].shippriority; jres.push_back(j);
        end
      wl.push_back(l); if (wl.size() > W_WIN) void'(wl.pop_front());
    end else if (sid == SID_CUSTOMER) begin
      c = customer_t'(t[55:0]);
      got_pass[1]++;
      if (c.mktsegment != c_seg) fail("customer passed a selection it fails");
      foreach (wo[i]) if (wo[i].custkey == c.custkey)
        foreach (wl[k]) if (wl[k].orderkey == wo[i].orderkey) begin
          j.orderkey = wl[k].orderkey; j.extendedprice = wl[k].extendedprice; j.discount = wl[k].discount;
          j.orderdate = wo[i].orderdate; j.shippriority = wo[i].shippriority; jres.push_back(j);
        end
      wc.push_back(c); if (wc.size() > W_WIN) void'(wc.pop_front());
    end else if (sid == SID_ORDERS) begin
      o = orders_t'(t[74:0]);
      got_pass[2]++;
      if (!(o.orderdate < c_odate)) fail("order passed a selection it fails");
      foreach (wc[i]) if (wc[i].custkey == o.custkey)
        foreach (wl[k]) if (wl[k].orderkey == o.orderkey) begin
          j.orderkey = wl[k].orderkey; j.extendedprice = wl[k].extendedprice; j.discount = wl[k].discount;
          j.orderdate = o.orderdate; j.shippriority = o.shippriority; jres.push_back(j);
        end
      wo.push_back(o); if (wo.size() > W_WIN) void'(wo.pop_front());
    end
  endfunction

  function automatic logic ranks_first(group_t a, group_t b);
    if (a.revenue != b.revenue)     return a.revenue > b.revenue;
    if (a.orderdate != b.orderdate) return a.orderdate < b.orderdate;
    return {a.orderkey, a.shippriority} < {b.orderkey, b.shippriority};
  endfunction

  function automatic void sort_rows(ref group_t r [$]);
    group_t tmp;
    for (int i = 1; i < r.size(); i++)
      for (int k = i; k > 0 && ranks_first(r[k], r[k-1]); k--) begin
        tmp = r[k]; r[k] = r[k-1]; r[k-1] = tmp;
      end
  endfunction

  function automatic void close_batch();
    group_t g [logic [50:0]];
    group_t rows [$];
    foreach (jres[i]) begin
      logic [50:0] k;
      k = {jres[i].orderkey, jres[i].orderdate, jres[i].shippriority};
      if (!g.exists(k)) begin
        g[k] = '0; g[k].orderkey = jres[i].orderkey; g[k].orderdate = jres[i].orderdate;
        g[k].shippriority = jres[i].shippriority;
      end
      g[k].revenue += 64'(jres[i].extendedprice) * (64'd100 - 64'(jres[i].discount));
    end
    foreach (g[k]) rows.push_back(g[k]);
    sort_rows(rows);
    while (rows.size() > LIM) void'(rows.pop_back());
    exp_rows[batch_done] = rows;
    $display("INFO batch %0d: %0d join results, %0d groups, pass L/C/O %0d/%0d/%0d",
             batch_done, jres.size(), g.num(), got_pass[0], got_pass[1], got_pass[2]);
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (got_pass[s] != exp_pass[s]) fail($sformatf("stream %0d: %0d tuples passed, expected %0d", s, got_pass[s], exp_pass[s]));
      got_pass[s] = 0; exp_pass[s] = 0;
    end
    jres.delete();
    batch_done++;
  endfunction

  // monitor of the join unit's input
  logic [119:0] mt; sid_t msid; int mseg = 0; int quiet = 0;
  always @(posedge clk) begin
    quiet++;
    if (rst_n && dut.g_row[1].u_brick.g_slot[1].g_cmj.u_pu.in_valid &&
        dut.g_row[1].u_brick.g_slot[1].g_cmj.u_pu.in_ready) begin
      seg_t s;
      s = dut.g_row[1].u_brick.g_slot[1].g_cmj.u_pu.in_data;
      quiet = 0;
      if (mseg == 0) begin msid = s[63:60]; mt = '0; mt[59:0] = s[59:0]; end
      else mt[119:60] = s[59:0];
      mseg++;
      if (mseg == stream_segs(msid)) begin
        mseg = 0;
        if (msid == SID_END) close_batch(); else model_tuple(msid, mt);
      end
    end
  end

  // ---------------- output checker ----------------
  group_t got_rows [$]; int out_batch = 0; logic [119:0] ot; int oseg = 0; sid_t osid;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (oseg == 0) begin osid = out_data[63:60]; ot = '0; ot[59:0] = out_data[59:0]; end
    else ot[119:60] = out_data[59:0];
    oseg++;
    if (oseg == stream_segs(osid)) begin
      oseg = 0;
      if (osid == SID_RESULT) got_rows.push_back(group_t'(ot[114:0]));
      else if (osid == SID_END) begin
        n_end++;
        // rows must leave in rank order (revenue desc, date asc)
        for (int i = 1; i < got_rows.size(); i++) begin
          checks++;
          if (got_rows[i].revenue > got_rows[i-1].revenue ||
              (got_rows[i].revenue == got_rows[i-1].revenue && got_rows[i].orderdate < got_rows[i-1].orderdate))
            fail("result rows out of order");
        end
        sort_rows(got_rows);
        checks++;
        if (got_rows.size() != exp_rows[out_batch].size())
          fail($sformatf("batch %0d: %0d rows, expected %0d", out_batch, got_rows.size(), exp_rows[out_batch].size()));
        else foreach (got_rows[i]) begin
          checks++;
          if (got_rows[i] != exp_rows[out_batch][i])
            fail($sformatf("batch %0d row %0d: got %h expected %h", out_batch, i, got_rows[i], exp_rows[out_batch][i]));
        end
        $display("INFO batch %0d: %0d result rows checked", out_batch, got_rows.size());
        got_rows.delete();
        out_batch++;
      end else fail($sformatf("unexpected stream %0d at the output", osid));
    end
  end

  // ---------------- stimulus ----------------
  task automatic program_routes();
    // GSwitch 1..4: Q3 streams south; GSwitch 5: results east
    for (int g = 1; g <= 4; g++) begin
      send(mk_gsw_ins(bid_t'(g), SID_LINEITEM, PORT_SOUTH, 4'd2));
      send(mk_gsw_ins(bid_t'(g), SID_CUSTOMER, PORT_SOUTH, 4'd1));
      send(mk_gsw_ins(bid_t'(g), SID_ORDERS,   PORT_SOUTH, 4'd2));
      send(mk_gsw_ins(bid_t'(g), SID_END,      PORT_SOUTH, 4'd1));
    end
    send(mk_gsw_ins(8'd3, SID_JOINED, PORT_SOUTH, 4'd2));
    send(mk_gsw_ins(8'd4, SID_GROUPS, PORT_SOUTH, 4'd2));
    send(mk_gsw_ins(8'd5, SID_RESULT, PORT_EAST,  4'd2));
    send(mk_gsw_ins(8'd5, SID_END,    PORT_EAST,  4'd1));
    // LSwitch 1 (B-ID 17): as in the paper's Q3 listing
    send(mk_lsw_ins(8'd17, SID_LINEITEM, 8'h2));
    send(mk_lsw_ins(8'd17, SID_CUSTOMER, 8'h4));
    send(mk_lsw_ins(8'd17, SID_ORDERS,   8'h8));
    send(mk_lsw_ins(8'd17, SID_END,      8'h1));
    // LSwitch 2..4: into slot 2 (join, group-by, order-by)
    for (int r = 2; r <= 4; r++) begin
      send(mk_lsw_ins(bid_t'(16 + r), SID_LINEITEM, 8'h2));
      send(mk_lsw_ins(bid_t'(16 + r), SID_CUSTOMER, 8'h2));
      send(mk_lsw_ins(bid_t'(16 + r), SID_ORDERS,   8'h2));
      send(mk_lsw_ins(bid_t'(16 + r), SID_END,      8'h2));
      send(mk_lsw_ins(bid_t'(16 + r), (r == 3) ? SID_JOINED : SID_GROUPS, 8'h2));
    end
  endtask

  task automatic set_constants(logic [20:0] ship, logic [31:0] seg, logic [20:0] odate);
    c_ship = ship; c_seg = seg; c_odate = odate;
    send(mk_pb_ins(8'd33, 52'(ship)));
    send(mk_pb_ins(8'd34, 52'(seg)));
    send(mk_pb_ins(8'd35, 52'(odate)));
    n_reprog++;
  endtask

  // a batch: customers alternate between the north and the west entrance
  task automatic run_batch(int nc, int no, int nl, int kc, int ko, int kco);
    int ic = 0, io = 0, il = 0;
    while (ic < nc || io < no || il < nl) begin
      int pick = $urandom % 3;
      if (pick == 0 && ic < nc) begin
        customer_t c;
        c.custkey = 24'(1 + $urandom % kc);
        c.mktsegment = ($urandom % 4 != 0) ? c_seg : c_seg ^ 32'h1;
        if (c.mktsegment == c_seg) exp_pass[1]++;
        send_tuple(SID_CUSTOMER, 120'(c), ic % 2 == 1);
        ic++;
      end else if (pick == 1 && io < no) begin
        orders_t o;
        o.orderkey = 24'(1 + $urandom % ko); o.custkey = 24'(1 + $urandom % kco);
        o.orderdate = 21'($urandom % 1000); o.shippriority = 6'($urandom % 4);
        if (o.orderdate < c_odate) exp_pass[2]++;
        send_tuple(SID_ORDERS, 120'(o), 1'b0);
        io++;
      end else if (pick == 2 && il < nl) begin
        lineitem_t l;
        l.orderkey = 24'(1 + $urandom % ko); l.extendedprice = 32'(1 + $urandom % 100000);
        l.discount = 32'($urandom % 11); l.shipdate = 21'($urandom % 1000);
        if (l.shipdate > c_ship) exp_pass[0]++;
        send_tuple(SID_LINEITEM, 120'(l), 1'b0);
        il++;
      end
    end
    // let the selections drain, then END (it takes the bypass of brick 1)
    quiet = 0;
    while (quiet < 400) @(posedge clk);
    begin
      int b = batch_done;
      send_tuple(SID_END, '0, 1'b0);
      while (batch_done == b) @(posedge clk);   // the model closes the batch
    end
  endtask

  initial begin
    in_valid = 0; in2_valid = 0; in_data = '0; in2_data = '0;
    exp_pass = '{0, 0, 0}; got_pass = '{0, 0, 0};
    repeat (5) @(posedge clk);
    rst_n = 1;
    program_routes();
    set_constants(21'd200, 32'h4255_494c, 21'd800);          // "BUIL"
    run_batch(`TB_NC, `TB_NO, `TB_NL, `TB_KC, `TB_KO, `TB_KCO);
    set_constants(21'd500, 32'h4d41_4348, 21'd600);          // "MACH"
    run_batch(`TB_NC / 2, `TB_NO / 2, `TB_NL / 2, `TB_KC, `TB_KO, `TB_KCO);
    while (out_batch < 2) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("INFO mechanisms: in_stall=%0d out_backpressure=%0d west=%0d overflow=%0d expiry=%0d two_segment=%0d reprogram=%0d end_flush=%0d pass_through=%0d",
             n_in_stall, n_out_bp, n_west, n_ovf, n_expire, n_twoseg, n_reprog, n_end, n_out2);
    checks++; if (n_in_stall == 0) fail("no input stall");
    checks++; if (n_out_bp   == 0) fail("no output back-pressure");
    checks++; if (n_west     == 0) fail("no west-entrance traffic");
    checks++; if (n_ovf      == 0) fail("overflow buffer never used");
    checks++; if (n_expire   == 0) fail("no window expiry");
    checks++; if (n_twoseg   == 0) fail("no two-segment tuple");
    checks++; if (n_reprog   <  2) fail("no reprogramming");
    checks++; if (n_end      != 2) fail("END flush count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (`TB_MAXCYC) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
