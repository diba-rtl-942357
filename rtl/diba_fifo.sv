// diba_fifo: synchronous first-in first-out buffer with push/ready handshake
// on both sides. DEPTH entries of W bits; in_ready is low when full,
// out_valid is high when not empty; write and read can happen in the same
// cycle. Zero-latency read from the head entry (no output register).
module diba_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rd, wr;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];

  wire do_w = in_valid && in_ready;
  wire do_r = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (do_w) begin mem[wr] <= in_data; wr <= inc(wr); end
      if (do_r) rd <= inc(rd);
      count <= count + $bits(count)'(do_w) - $bits(count)'(do_r);
    end
  end
endmodule
