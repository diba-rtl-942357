// diba_selection: selection (filter) processing unit.
//
// Passes the tuples of stream STREAM whose field (FW bits starting at bit
// FLSB of the reassembled tuple) compares true against a constant with the
// operator OP (greater, equal or less, unsigned) and drops every other
// tuple: failing tuples, other streams, and network instructions that the
// LSwitch broadcasts. The Q3 mapping uses three of them: l_shipdate > date,
// c_mktsegment = segment, o_orderdate < date.
//
// The constant starts at INIT and can be changed online by a processing-block
// instruction (stream ID 0) whose B-ID equals BID: bits [51:0] of that
// segment become the new constant. This instruction format is this design's
// choice; the paper does not give the processing units' instruction sets.
//
// Timing: tuple reassembly, one decision cycle, then the tuple is sent again
// segment by segment; a two-segment tuple takes about four cycles per tuple.
module diba_selection
  import diba_pkg::*;
#(
  parameter sid_t        STREAM = SID_LINEITEM,
  parameter int          FLSB   = 88,
  parameter int          FW     = 21,
  parameter cmp_e        OP     = CMP_GT,
  parameter bid_t        BID    = 8'd32,
  parameter logic [51:0] INIT   = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  seg_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output seg_t out_data,
  output logic [31:0] passed,     // tuples passed (statistics)
  output logic [31:0] dropped     // tuples of STREAM dropped
);
  logic             t_valid, t_ready;
  sid_t             t_sid;
  logic [TUP_W-1:0] t_data;
  diba_tuple_rx u_rx (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                      .t_valid, .t_ready, .t_sid, .t_data);

  logic [51:0]   const_q;
  logic [FW-1:0] field, cval;
  logic          is_pbi, hit, fwd;
  logic          o_ready;

  always_comb begin
    field  = t_data[FLSB +: FW];
    cval   = const_q[FW-1:0];
    is_pbi = (t_sid == SID_PBI) && (t_data[59:52] == BID);
    unique case (OP)
      CMP_GT:  hit = field >  cval;
      CMP_EQ:  hit = field == cval;
      default: hit = field <  cval;
    endcase
    fwd     = t_valid && (t_sid == STREAM) && hit;
    t_ready = fwd ? o_ready : 1'b1;   // everything else is consumed here
  end

  diba_tuple_tx u_tx (.clk, .rst_n, .t_valid(fwd), .t_ready(o_ready), .t_sid, .t_data,
                      .out_valid, .out_ready, .out_data);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      const_q <= INIT; passed <= '0; dropped <= '0;
    end else if (t_valid && t_ready) begin
      if (is_pbi) const_q <= t_data[51:0];
      if (t_sid == STREAM) begin
        if (hit) passed <= passed + 1;
        else     dropped <= dropped + 1;
      end
    end
  end
endmodule
