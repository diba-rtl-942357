// tb_diba_hbsj: hash stream join unit with a small window (W = 8), tiny
// hash tables (HT = 4 rows) and keys from a small range, so that rows fill
// up, tuples spill into the overflow buffer and old tuples expire. A
// software window of the last W stored (key, tuple) pairs gives the
// expected matches of every probe (compared as count and XOR/sum of the
// returned tuples). Also checks the store latency (2 cycles, 3 with expiry).
module tb_diba_hbsj;
`include "tb_seg_src.svh"
  localparam int W = 8, OVF = 8, HT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, cmd_store, m_valid, m_ready, done;
  logic [23:0] cmd_key;
  logic [63:0] cmd_tuple, m_tuple;
  logic [$clog2(OVF+1)-1:0] ovf_count;
  logic [$clog2(W+1)-1:0]   win_count;
  diba_hbsj #(.KEY_W(24), .TW(64), .W(W), .OVF(OVF), .HT(HT)) dut (.*);

  logic [23:0] wk [$];
  logic [63:0] wt [$];
  int n_m; logic [63:0] x_m, s_m;
  int seen_ovf = 0, seen_exp = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin n_m++; x_m ^= m_tuple; s_m += m_tuple; end
    if (ovf_count != 0) seen_ovf++;
    if (dut.state == 3'd2) seen_exp++;
  end
  always @(negedge clk) m_ready = ($urandom % 3) != 0;

  task automatic op(bit store, logic [23:0] key, logic [63:0] tup, output int cyc);
    int t0;
    @(negedge clk); cmd_valid = 1; cmd_store = store; cmd_key = key; cmd_tuple = tup;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    n_m = 0; x_m = '0; s_m = '0;
    @(posedge clk); t0 = int'($time / 10);
    #1 cmd_valid = 0;
    while (!done) begin @(negedge clk); end
    cyc = int'($time / 10) - t0;
    @(posedge clk); #1;
  endtask

  initial begin
    int cyc, en; logic [63:0] ex, es; logic [23:0] k; logic [63:0] t;
    cmd_valid = 0; cmd_store = 0; cmd_key = '0; cmd_tuple = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      k = 24'($urandom % 6);
      if ($urandom % 2) begin
        t = {$urandom, $urandom};
        op(1'b1, k, t, cyc);
        check(cyc == ((wk.size() == W) ? 3 : 2), $sformatf("store latency %0d", cyc));
        wk.push_back(k); wt.push_back(t);
        if (wk.size() > W) begin void'(wk.pop_front()); void'(wt.pop_front()); end
        check(win_count == 4'(wk.size()), "window count");
      end else begin
        op(1'b0, k, '0, cyc);
        en = 0; ex = '0; es = '0;
        foreach (wk[i]) if (wk[i] == k) begin en++; ex ^= wt[i]; es += wt[i]; end
        check(n_m == en && x_m == ex && s_m == es,
              $sformatf("probe key %0d: %0d matches, expected %0d", k, n_m, en));
      end
    end
    check(seen_ovf > 0, "overflow buffer used");
    check(seen_exp > 0, "expiry happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
