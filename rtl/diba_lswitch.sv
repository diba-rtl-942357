// diba_lswitch: local switch at the top of a topology brick.
//
// One input (with a buffer) and N outputs, one per processing slot, each
// with a small buffer. A stream routing table gives, per stream ID, the
// destination port filter: bit k set sends the stream to port k+1 (port 1 is
// the bypass slot). A segment is copied to every selected port once all of
// them have room. Continuation segments (NULL stream ID) follow the ports of
// the tuple's first segment, since the table has no segment count.
//
// Programming: a network instruction (stream ID 1) with B-ID equal to BID
// rewrites one row and is consumed; a network instruction for another block
// is broadcast to all ports, as the paper describes. Stream 0 (block
// instructions) goes to every port after reset; data streams go nowhere
// until programmed (this design's reset choice).
//
// Timing: one cycle in the input buffer, one transfer, one cycle in the
// output buffer; one segment per cycle.
module diba_lswitch
  import diba_pkg::*;
#(
  parameter int   N          = 4,
  parameter bid_t BID        = 8'd17,
  parameter int   FIFO_DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  seg_t           in_data,
  output logic [N-1:0]   out_valid,
  input  logic [N-1:0]   out_ready,
  output seg_t [N-1:0]   out_data
);
  logic [N-1:0] table_q [NSTREAMS];
  logic [N-1:0] last_q;          // ports of the current tuple

  logic hv, hr;
  seg_t head;
  diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_in (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(hv), .out_ready(hr), .out_data(head), .count());

  logic [N-1:0] pv, pr;
  for (genvar p = 0; p < N; p++) begin : g_port
    diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_out (
      .clk, .rst_n, .in_valid(pv[p]), .in_ready(pr[p]), .in_data(head),
      .out_valid(out_valid[p]), .out_ready(out_ready[p]), .out_data(out_data[p]), .count());
  end

  sid_t         sid;
  logic         is_net, is_mine;
  logic [N-1:0] dst;

  always_comb begin
    sid     = seg_sid(head);
    is_net  = (sid == SID_NET);
    is_mine = is_net && (ins_bid(head) == BID);
    if (is_net)               dst = '1;
    else if (sid == SID_NULL) dst = last_q;
    else                      dst = table_q[sid];
    hr = hv && (is_mine || ((dst & ~pr) == '0));
    pv = (hr && !is_mine) ? dst : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_q <= '0;
      for (int i = 0; i < NSTREAMS; i++) table_q[i] <= (i == int'(SID_PBI)) ? '1 : '0;
    end else if (hr) begin
      if (is_mine) table_q[ins_stream(head)] <= head[40 +: N];
      else         last_q <= dst;
    end
  end
endmodule
