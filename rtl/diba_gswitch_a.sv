// diba_gswitch_a: global switch, variant A (two inputs, two outputs).
//
// Segments arrive on the north and west inputs and leave on the south and
// east outputs; each of the four ports has its own buffer so the controller
// can route data ahead of a busy consumer. A stream routing table, indexed
// by stream ID, holds for every stream its number of segments per tuple and
// its destination mask {east, south} (one, both or none). The controller
// picks an input by round robin, looks up the head segment's stream, and
// copies the whole tuple (the table's segment count) to every selected
// output before it serves the other input, so tuples never interleave.
//
// Programming: a network instruction (stream ID 1) whose B-ID equals the
// BID parameter rewrites one table row and is consumed. Network
// instructions for other blocks are routed with row 1 of the table (reset:
// south), so they travel on into the brick below and through its bypass.
// Block instructions (stream 0) use row 0 (reset: south). All data streams
// are dropped until programmed. The table columns and the instruction fields
// follow the paper; bit positions, buffer depth, reset contents and the
// round-robin choice are this design's.
//
// Timing: a segment needs one cycle in the input buffer, one transfer
// cycle and one cycle in the output buffer, so the minimum latency is two
// cycles and the throughput one segment per cycle in total.
module diba_gswitch_a
  import diba_pkg::*;
#(
  parameter bid_t BID        = 8'd1,
  parameter int   FIFO_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic n_in_valid, output logic n_in_ready, input  seg_t n_in_data,
  input  logic w_in_valid, output logic w_in_ready, input  seg_t w_in_data,
  output logic s_out_valid, input logic s_out_ready, output seg_t s_out_data,
  output logic e_out_valid, input logic e_out_ready, output seg_t e_out_data
);
  typedef struct packed {
    logic [1:0] port;   // {east, south}
    logic [3:0] nseg;
  } route_t;

  route_t table_q [NSTREAMS];

  // input buffers
  logic [1:0] iv, ir;
  seg_t       id [2];
  diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_in_n (
    .clk, .rst_n, .in_valid(n_in_valid), .in_ready(n_in_ready), .in_data(n_in_data),
    .out_valid(iv[0]), .out_ready(ir[0]), .out_data(id[0]), .count());
  diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_in_w (
    .clk, .rst_n, .in_valid(w_in_valid), .in_ready(w_in_ready), .in_data(w_in_data),
    .out_valid(iv[1]), .out_ready(ir[1]), .out_data(id[1]), .count());

  // output buffers: [0] south, [1] east
  logic [1:0] ov, orr;
  seg_t       od;
  diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_out_s (
    .clk, .rst_n, .in_valid(ov[0]), .in_ready(orr[0]), .in_data(od),
    .out_valid(s_out_valid), .out_ready(s_out_ready), .out_data(s_out_data), .count());
  diba_fifo #(.W(SEG_W), .DEPTH(FIFO_DEPTH)) u_out_e (
    .clk, .rst_n, .in_valid(ov[1]), .in_ready(orr[1]), .in_data(od),
    .out_valid(e_out_valid), .out_ready(e_out_ready), .out_data(e_out_data), .count());

  // controller state
  logic       busy_q;      // in the middle of a multi-segment tuple
  logic       src_q;       // input being served while busy
  logic [1:0] dst_q;
  logic [3:0] left_q;      // segments still to move
  logic       rr_q;        // round-robin pointer: preferred input

  logic       src;
  logic       have;
  seg_t       head;
  sid_t       sid;
  logic       is_mine;
  route_t     rt;
  logic [1:0] dst;
  logic       fire;

  always_comb begin
    if (busy_q)                 src = src_q;
    else if (iv[rr_q])          src = rr_q;
    else                        src = !rr_q;
    have    = iv[src];
    head    = id[src];
    sid     = seg_sid(head);
    is_mine = !busy_q && (sid == SID_NET) && (ins_bid(head) == BID);
    rt      = table_q[sid];
    dst     = busy_q ? dst_q : ((sid == SID_NULL) ? 2'b00 : rt.port);
    // all selected outputs need room (no selected output: segment dropped)
    fire    = have && (is_mine || ((dst & ~orr) == 2'b00));
    ir      = '0;
    ir[src] = fire;
    ov      = (fire && !is_mine) ? dst : 2'b00;
    od      = head;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0; src_q <= 1'b0; dst_q <= '0; left_q <= '0; rr_q <= 1'b0;
      for (int i = 0; i < NSTREAMS; i++)
        table_q[i] <= (i == int'(SID_PBI) || i == int'(SID_NET)) ? route_t'{PORT_SOUTH, 4'd1}
                                                                 : route_t'{2'b00, 4'd1};
    end else if (fire) begin
      if (is_mine) begin
        table_q[ins_stream(head)] <= route_t'{head[47:46], head[45:42]};
        rr_q <= !src;
      end else if (busy_q) begin
        left_q <= left_q - 1'b1;
        if (left_q == 4'd1) begin busy_q <= 1'b0; rr_q <= !src_q; end
      end else if (sid != SID_NULL && rt.nseg > 4'd1) begin
        busy_q <= 1'b1; src_q <= src; dst_q <= rt.port; left_q <= rt.nseg - 1'b1;
      end else begin
        rr_q <= !src;
      end
    end
  end

`ifndef SYNTHESIS
  // a continuation segment must follow its head on the same input
  always @(posedge clk) if (rst_n && busy_q && iv[src_q])
    assert (seg_sid(id[src_q]) == SID_NULL)
      else $error("gswitch %0d: segment with stream %0d inside a tuple", BID, seg_sid(id[src_q]));
`endif
endmodule
