// diba_murmur3: MurmurHash3 (x86, 32-bit) of one 32-bit key.
//
// The hash-based join indexes its two hash tables with two Murmur3 hashes;
// the paper names the function but not its variant or seeds. This is the
// standard MurmurHash3_x86_32 of a 4-byte little-endian key with the given
// seed: one block mix, length 4, final avalanche. Purely combinational
// (four 32-bit multiplications).
module diba_murmur3 #(
  parameter logic [31:0] SEED = 32'h0
) (
  input  logic [31:0] key,
  output logic [31:0] hash
);
  function automatic logic [31:0] rotl(logic [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  logic [31:0] k, h;
  always_comb begin
    k = key * 32'hcc9e2d51;
    k = rotl(k, 15);
    k = k * 32'h1b873593;
    h = SEED ^ k;
    h = rotl(h, 13);
    h = h * 32'd5 + 32'he6546b64;
    h = h ^ 32'd4;
    h = h ^ (h >> 16);
    h = h * 32'h85ebca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    hash = h;
  end
endmodule
