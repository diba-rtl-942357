// tb_diba_murmur3: checks the hash against MurmurHash3_x86_32 values of
// 4-byte keys (little-endian) computed with an independent software model.
module tb_diba_murmur3;
  int checks = 0, failures = 0;
  logic [31:0] key, h0, hs;
  diba_murmur3 #(.SEED(32'h0))         u0 (.key, .hash(h0));
  diba_murmur3 #(.SEED(32'h9747b28c))  u1 (.key, .hash(hs));

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    key = 32'h0;        #1; chk(h0, 32'h2362f9de, "0/0");
    key = 32'h1;        #1; chk(h0, 32'hfbf1402a, "1/0");
    key = 32'h12345678; #1; chk(h0, 32'hec3dcb62, "12345678/0");
    key = 32'h61626364; #1; chk(h0, 32'hddb94720, "61626364/0");
    key = 32'hdeadbeef; #1; chk(hs, 32'hed256a3c, "deadbeef/seed");
    key = 32'h00ffffff; #1; chk(hs, 32'h87637b91, "00ffffff/seed");
    // spread: 256 consecutive keys land in many distinct low-byte buckets
    begin
      bit [255:0] seen = '0; int n = 0;
      for (int i = 0; i < 256; i++) begin key = i; #1; seen[h0[7:0]] = 1'b1; end
      for (int i = 0; i < 256; i++) n += seen[i];
      checks++; if (n < 140) begin failures++; $display("FAIL spread %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
