// diba_brick: topology brick = LSwitch + N processing slots + Collector.
//
// The LSwitch at the top of the brick distributes segments to the N slots by
// stream ID; the Collector at the bottom merges the slot outputs into the
// brick output. What each slot holds is fixed at build time by KINDS (four
// bits per slot, pu_kind_e, slot 0 in the low bits): a Bypass, one of the
// three Q3 selections, the Q3 CMJoin, the Aggregation-GroupBy or the
// OrderBy. The paper builds this with configurable OP-Blocks whose
// instruction set it does not publish, so here each slot is a fixed
// operator, programmed only through its constants (selections) and the
// LSwitch table.
//
// Block IDs: the LSwitch answers to LSW_BID, slot s to PU_BID0 + s.
// pu_overflow[s] is 1 while the operator in slot s has tuples in an
// overflow buffer (join) or has lost a group or row (group-by / order-by);
// it is tied to 0 for bypass and selection slots.
// Timing: LSwitch (2 cycles) + operator + Collector (1 cycle).
module diba_brick
  import diba_pkg::*;
#(
  parameter int             N        = 4,
  parameter logic [4*N-1:0] KINDS    = '0,
  parameter bid_t           LSW_BID  = 8'd17,
  parameter bid_t           PU_BID0  = 8'd32,
  parameter int             W        = 1024,
  parameter int             OVF      = 1024,
  parameter int             HT       = 2048,
  parameter int             GROUPS   = 1024,
  parameter int             DEPTH    = 1024,
  parameter int             LIMIT    = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  seg_t         in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output seg_t         out_data,
  output logic [N-1:0] pu_overflow
);
  diba_seg_if s_in  [N] ();
  diba_seg_if s_out [N] ();

  logic [N-1:0] l_valid, l_ready, c_valid, c_ready;
  seg_t [N-1:0] l_data, c_data;

  diba_lswitch #(.N(N), .BID(LSW_BID)) u_lsw (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data));

  for (genvar s = 0; s < N; s++) begin : g_slot
    localparam pu_kind_e K   = pu_kind_e'(KINDS[4*s +: 4]);
    localparam bid_t     BID = bid_t'(32'(PU_BID0) + 32'(s));

    assign s_in[s].push  = l_valid[s];
    assign s_in[s].data  = l_data[s];
    assign l_ready[s]    = s_in[s].ready;
    assign c_valid[s]    = s_out[s].push;
    assign c_data[s]     = s_out[s].data;
    assign s_out[s].ready = c_ready[s];

    if (K == PU_SEL1 || K == PU_SEL2 || K == PU_SEL3) begin : g_sel
      logic [31:0] np, nd;
      diba_selection #(
        .STREAM((K == PU_SEL1) ? SID_LINEITEM : (K == PU_SEL2) ? SID_CUSTOMER : SID_ORDERS),
        .FLSB  ((K == PU_SEL1) ? 88 : (K == PU_SEL2) ? 24 : 48),
        .FW    ((K == PU_SEL2) ? 32 : 21),
        .OP    ((K == PU_SEL1) ? CMP_GT : (K == PU_SEL2) ? CMP_EQ : CMP_LT),
        .BID   (BID)
      ) u_pu (
        .clk, .rst_n,
        .in_valid(s_in[s].push), .in_ready(s_in[s].ready), .in_data(s_in[s].data),
        .out_valid(s_out[s].push), .out_ready(s_out[s].ready), .out_data(s_out[s].data),
        .passed(np), .dropped(nd));
      assign pu_overflow[s] = 1'b0;
    end else if (K == PU_CMJOIN) begin : g_cmj
      logic [$clog2(OVF+1)-1:0] oc [4];
      diba_cmjoin_q3 #(.W(W), .OVF(OVF), .HT(HT)) u_pu (
        .clk, .rst_n,
        .in_valid(s_in[s].push), .in_ready(s_in[s].ready), .in_data(s_in[s].data),
        .out_valid(s_out[s].push), .out_ready(s_out[s].ready), .out_data(s_out[s].data),
        .ovf_count(oc));
      assign pu_overflow[s] = (oc[0] != '0) || (oc[1] != '0) || (oc[2] != '0) || (oc[3] != '0);
    end else if (K == PU_GROUPBY) begin : g_grp
      logic [$clog2(GROUPS+1)-1:0] ng;
      diba_agg_groupby #(.GROUPS(GROUPS)) u_pu (
        .clk, .rst_n,
        .in_valid(s_in[s].push), .in_ready(s_in[s].ready), .in_data(s_in[s].data),
        .out_valid(s_out[s].push), .out_ready(s_out[s].ready), .out_data(s_out[s].data),
        .overflow(pu_overflow[s]), .n_groups(ng));
    end else if (K == PU_ORDERBY) begin : g_ord
      logic [$clog2(DEPTH+1)-1:0] ne;
      diba_orderby #(.DEPTH(DEPTH), .LIMIT(LIMIT)) u_pu (
        .clk, .rst_n,
        .in_valid(s_in[s].push), .in_ready(s_in[s].ready), .in_data(s_in[s].data),
        .out_valid(s_out[s].push), .out_ready(s_out[s].ready), .out_data(s_out[s].data),
        .overflow(pu_overflow[s]), .n_entries(ne));
    end else begin : g_byp
      diba_bypass u_pu (
        .clk, .rst_n,
        .in_valid(s_in[s].push), .in_ready(s_in[s].ready), .in_data(s_in[s].data),
        .out_valid(s_out[s].push), .out_ready(s_out[s].ready), .out_data(s_out[s].data));
      assign pu_overflow[s] = 1'b0;
    end
  end

  diba_collector #(.N(N)) u_col (
    .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid, .out_ready, .out_data);
endmodule
