// Shared segment driver/monitor helpers for the block testbenches: a
// negative-edge driver for one valid/ready input and the counters.
  int checks = 0, failures = 0;
  function automatic void fail(string m);
    failures++; $display("FAIL %s", m);
  endfunction
  function automatic void check(bit ok, string m);
    checks++; if (!ok) fail(m);
  endfunction
