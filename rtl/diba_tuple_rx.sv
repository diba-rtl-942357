// diba_tuple_rx: reassembles a tuple from its segments for a processing unit.
//
// The first segment of a tuple gives the stream ID; diba_pkg::stream_segs
// gives how many segments the tuple has. Payload of segment k lands in bits
// [60k+59 : 60k] of t_data. The complete tuple is held in a register until
// t_ready; while it is held no new segment is accepted. A stray NULL
// segment with no tuple open is discarded.
// Timing: a tuple of n segments is offered n cycles after its first
// segment arrives at the earliest.
module diba_tuple_rx
  import diba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  seg_t               in_data,
  output logic               t_valid,
  input  logic               t_ready,
  output sid_t               t_sid,
  output logic [TUP_W-1:0]   t_data
);
  logic [1:0] got_q, need_q;
  assign in_ready = !t_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t_valid <= 1'b0; got_q <= '0; need_q <= '0; t_sid <= '0; t_data <= '0;
    end else begin
      if (t_valid && t_ready) t_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (got_q == 2'd0) begin
          if (seg_sid(in_data) != SID_NULL) begin
            t_sid  <= seg_sid(in_data);
            t_data <= '0;
            t_data[PAY_W-1:0] <= in_data[PAY_W-1:0];
            need_q <= 2'(stream_segs(seg_sid(in_data)));
            if (stream_segs(seg_sid(in_data)) == 1) t_valid <= 1'b1;
            else got_q <= 2'd1;
          end
        end else begin
          t_data[int'(got_q)*PAY_W +: PAY_W] <= in_data[PAY_W-1:0];
          if (got_q + 2'd1 == need_q) begin
            t_valid <= 1'b1; got_q <= '0;
          end else got_q <= got_q + 2'd1;
        end
      end
    end
  end
endmodule
