// diba_cmjoin_q3: processing unit holding the optimized three-way hash
// stream join of TPC-H Q3 (lineitem x orders x customer).
//
// Tuples of LINEITEM (2), CUSTOMER (3) and ORDERS (4) are reassembled from
// segments and turned into NEW work items; END_MESSAGE becomes an END item.
// The items pass three stages in the order ORDERS -> CUSTOMER -> LINEITEM
// (diba_cmj_stage). Each stage owns the sliding window(s) of one stream,
// stores the new tuples of that stream and probes the tuples and partial
// results of the others, so every result is produced exactly once, by the
// tuple that completes it. There is no circular path: the Q3 join graph
// (lineitem - orders - customer) is a chain. Results leave as JOINED tuples
// (stream 6: l_orderkey, l_extendedprice, l_discount, o_orderdate,
// o_shippriority); END leaves after every earlier result. Instructions that
// reach the unit are dropped.
//
// ovf_count reports how many tuples sit in the overflow buffers of the
// l_orderkey, o_orderkey, c_custkey and o_custkey indexes.
// Timing: see diba_cmj_stage and diba_hbsj; input and output are
// tuple-serial (2 cycles for a two-segment tuple).
module diba_cmjoin_q3
  import diba_pkg::*;
#(
  parameter int W   = 1024,
  parameter int OVF = 1024,
  parameter int HT  = 2048
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  seg_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output seg_t out_data,
  output logic [$clog2(OVF+1)-1:0] ovf_count [4]   // l_orderkey, o_orderkey, c_custkey, o_custkey
);
  localparam int IW = $bits(cmj_item_t);

  logic             t_valid, t_ready;
  sid_t             t_sid;
  logic [TUP_W-1:0] t_data;
  diba_tuple_rx u_rx (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                      .t_valid, .t_ready, .t_sid, .t_data);

  cmj_item_t nit;
  logic      is_item;
  always_comb begin
    nit        = '0;
    nit.kind   = (t_sid == SID_END) ? IT_END : IT_NEW;
    nit.origin = (t_sid == SID_ORDERS) ? OR_O : (t_sid == SID_CUSTOMER) ? OR_C : OR_L;
    nit.l      = lineitem_t'(t_data[$bits(lineitem_t)-1:0]);
    nit.c      = customer_t'(t_data[$bits(customer_t)-1:0]);
    nit.o      = orders_t'(t_data[$bits(orders_t)-1:0]);
    is_item    = (t_sid == SID_LINEITEM) || (t_sid == SID_CUSTOMER) ||
                 (t_sid == SID_ORDERS)   || (t_sid == SID_END);
  end

  // stage chain with 2-entry buffers between the stages
  logic      bv [4], br [4];
  cmj_item_t bd [4];
  logic      sv [3], sr [3];
  cmj_item_t sd [3];
  logic [$clog2(OVF+1)-1:0] oc [3][2];

  logic f0_ready;
  diba_fifo #(.W(IW), .DEPTH(2)) u_b0 (.clk, .rst_n,
    .in_valid(t_valid && is_item), .in_ready(f0_ready), .in_data(nit),
    .out_valid(bv[0]), .out_ready(br[0]), .out_data(bd[0]), .count());
  assign t_ready = is_item ? f0_ready : 1'b1;

  for (genvar s = 0; s < 3; s++) begin : g_stage
    diba_cmj_stage #(.STAGE(s), .W(W), .OVF(OVF), .HT(HT)) u_stage (
      .clk, .rst_n,
      .in_valid(bv[s]), .in_ready(br[s]), .in_item(bd[s]),
      .out_valid(sv[s]), .out_ready(sr[s]), .out_item(sd[s]),
      .ovf_count(oc[s]));
    diba_fifo #(.W(IW), .DEPTH(2)) u_buf (.clk, .rst_n,
      .in_valid(sv[s]), .in_ready(sr[s]), .in_data(sd[s]),
      .out_valid(bv[s+1]), .out_ready(br[s+1]), .out_data(bd[s+1]), .count());
  end

  assign ovf_count[0] = oc[2][0];   // l_orderkey
  assign ovf_count[1] = oc[0][0];   // o_orderkey
  assign ovf_count[2] = oc[1][0];   // c_custkey
  assign ovf_count[3] = oc[0][1];   // o_custkey

  // results out
  joined_t          j;
  logic             o_valid, o_ready;
  sid_t             o_sid;
  logic [TUP_W-1:0] o_data;
  always_comb begin
    j.orderkey      = bd[3].l.orderkey;
    j.extendedprice = bd[3].l.extendedprice;
    j.discount      = bd[3].l.discount;
    j.orderdate     = bd[3].o.orderdate;
    j.shippriority  = bd[3].o.shippriority;
    o_sid   = (bd[3].kind == IT_END) ? SID_END : SID_JOINED;
    o_data  = TUP_W'(j);
    if (bd[3].kind == IT_END) o_data = '0;
    // only FINAL and END items reach the end of the chain; others are dropped
    o_valid = bv[3] && (bd[3].kind == IT_FINAL || bd[3].kind == IT_END);
    br[3]   = o_valid ? o_ready : 1'b1;
  end

  diba_tuple_tx u_tx (.clk, .rst_n, .t_valid(o_valid), .t_ready(o_ready), .t_sid(o_sid),
                      .t_data(o_data), .out_valid, .out_ready, .out_data);
endmodule
