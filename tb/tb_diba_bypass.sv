// tb_diba_bypass: random segments through the bypass with random output
// stalls; checks order, data, one-cycle latency and full throughput.
module tb_diba_bypass;
  import diba_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  seg_t in_data, out_data;
  diba_bypass dut (.*);

  seg_t exp_q [$];
  int sent = 0, got = 0, cyc = 0, first_in = -1, first_out = -1;
  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: always ready -> one segment per cycle
    out_ready = 1;
    for (int i = 0; i < 400; i++) begin
      in_valid = 1; in_data = {$urandom, $urandom};
      if (i >= 200) out_ready = ($urandom % 3) != 0;
      @(posedge clk); while (!in_ready) begin out_ready = 1; @(posedge clk); end
    end
    in_valid = 0; out_ready = 1;
    repeat (10) @(posedge clk);
    checks++; if (got != 400) begin failures++; $display("FAIL count %0d", got); end
    checks++; if (first_out - first_in != 1) begin failures++; $display("FAIL latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int p1_out = 0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_ready) begin exp_q.push_back(in_data); if (first_in < 0) first_in = cyc; end
    if (out_valid && out_ready) begin
      if (first_out < 0) first_out = cyc;
      checks++; got++;
      if (exp_q.size() == 0 || out_data !== exp_q[0]) begin failures++; $display("FAIL data"); end
      else void'(exp_q.pop_front());
      if (cyc - first_out < 200) p1_out++;
    end
    if (cyc == first_in + 150 && first_in > 0) begin
      checks++; if (p1_out < 148) begin failures++; $display("FAIL throughput %0d", p1_out); end
    end
  end
  initial begin repeat (20000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
