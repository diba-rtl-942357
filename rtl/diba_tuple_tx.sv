// diba_tuple_tx: splits a tuple into segments for the network.
//
// Takes (stream ID, up to 120 data bits) with a push/ready handshake and
// sends diba_pkg::stream_segs(sid) segments: the first with the stream ID,
// the rest with the NULL ID, 60 payload bits each, low bits first.
// t_ready is given with the last segment, so a tuple of n segments occupies
// the output for n cycles.
module diba_tuple_tx
  import diba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               t_valid,
  output logic               t_ready,
  input  sid_t               t_sid,
  input  logic [TUP_W-1:0]   t_data,
  output logic               out_valid,
  input  logic               out_ready,
  output seg_t               out_data
);
  logic [1:0] idx_q;
  logic       last;
  assign last      = (int'(idx_q) + 1 >= stream_segs(t_sid));
  assign out_valid = t_valid;
  assign out_data  = {(idx_q == 2'd0) ? t_sid : SID_NULL, t_data[int'(idx_q)*PAY_W +: PAY_W]};
  assign t_ready   = out_ready && last;

  always_ff @(posedge clk) begin
    if (!rst_n) idx_q <= '0;
    else if (t_valid && out_ready) idx_q <= last ? 2'd0 : idx_q + 2'd1;
  end
endmodule
