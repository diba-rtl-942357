// diba_collector: gathers the result segments of the N slots of a brick.
//
// Linear collector: one output, served from one slot at a time. Slots are
// scanned in round-robin order starting after the last slot served (the
// paper leaves the priorities open). Once the first segment of a tuple has
// been taken from a slot, the collector stays on that slot and takes every
// following segment whose stream ID is NULL, so segments of different tuples
// never interleave. The paper ends the lock when a segment with a real stream
// ID appears; that rule alone would leave the collector waiting on a slot
// that has fallen idle after its last tuple, so here the lock also ends after
// the number of segments the stream's tuples have (diba_pkg::stream_segs).
// While locked, a slot that has not yet delivered the rest of its tuple
// stalls the collector.
//
// Timing: combinational path from the selected slot to a one-entry output
// register; one segment per cycle.
module diba_collector
  import diba_pkg::*;
#(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  seg_t [N-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output seg_t         out_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          lock_q;   // inside a multi-segment tuple
  logic [1:0]    left_q;   // continuation segments still expected
  logic [IW-1:0] cur_q;    // locked slot / last served slot
  logic [IW-1:0] sel;
  logic          found;
  logic          take;
  logic          room;
  int unsigned   nseg;

  assign room = !out_valid || out_ready;

  always_comb begin
    sel   = cur_q;
    found = 1'b0;
    if (lock_q) begin
      found = in_valid[cur_q] && (seg_sid(in_data[cur_q]) == SID_NULL);
    end else begin
      for (int k = 1; k <= N; k++) begin
        automatic int idx = (int'(cur_q) + k) % N;
        if (!found && in_valid[idx] && seg_sid(in_data[idx]) != SID_NULL) begin
          found = 1'b1;
          sel   = IW'(idx);
        end
      end
    end
    take     = found && room;
    in_ready = '0;
    in_ready[sel] = take;
    nseg     = stream_segs(seg_sid(in_data[sel]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lock_q <= 1'b0; left_q <= '0; cur_q <= '0; out_valid <= 1'b0;
    end else begin
      if (room) out_valid <= take;
      if (take) begin
        out_data <= in_data[sel];
        cur_q    <= sel;
        if (lock_q) begin
          left_q <= left_q - 1'b1;
          if (left_q == 2'd1) lock_q <= 1'b0;
        end else if (nseg > 1) begin
          lock_q <= 1'b1;
          left_q <= 2'(nseg - 1);
        end
      end
    end
  end
endmodule
