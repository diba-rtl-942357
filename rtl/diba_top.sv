// diba_top: the TPC-H Q3 instance of the Diba stream processor
// (4 rows x 1 column of topology bricks, 5 GSwitch-A, N = 4 slots).
//
//   in  ->N [GSW1] S-> NI -> brick 1 (Bypass, Sel l_shipdate, Sel c_mktsegment, Sel o_orderdate)
//           [GSW1] E-> W [GSW2];  brick 1 -> N [GSW2]
//           [GSW2] S-> NI -> brick 2 (Bypass, CMJoin, Bypass, Bypass)
//           [GSW3] S-> NI -> brick 3 (Bypass, GroupBy-Agg, Bypass, Bypass)
//           [GSW4] S-> NI -> brick 4 (Bypass, OrderBy, Bypass, Bypass)
//           brick 4 -> N [GSW5] E-> out,  S-> out2
//   in2 is the west (open) entrance of GSW1.
//
// Each GSwitch k passes its south output through a network-interface pair
// (parallel to serial, NI_LINES wires, and back) into brick k; brick k's
// collector feeds the north input of GSwitch k+1, and GSwitch k's east
// output feeds the west input of GSwitch k+1.
//
// Everything is programmed in-band: network instructions (stream 1) fill
// the GSwitch and LSwitch routing tables, block instructions (stream 0) set
// the selection constants. Block IDs: GSwitch k = k, LSwitch of row r =
// 16 + r, slot s of row r = 32 + 4*(r-1) + s (this design's numbering; the
// paper does not print one). All ports are 64-bit segments with
// valid/ready handshakes; reset is synchronous and active low.
// pu_overflow shows, per slot (row-major), an operator using its overflow
// buffer or losing data; the bits of bypass and selection slots are
// constant 0, since those units hold no table.
module diba_top
  import diba_pkg::*;
#(
  parameter int ROWS     = 4,
  parameter int N        = 4,
  parameter int NI_LINES = 16,
  parameter int W        = 1024,
  parameter int OVF      = 1024,
  parameter int HT       = 2048,
  parameter int GROUPS   = 1024,
  parameter int DEPTH    = 1024,
  parameter int LIMIT    = 10,
  // slot kinds per row (pu_kind_e, 4 bits per slot, slot 0 lowest)
  parameter logic [4*N-1:0] ROW_KINDS [ROWS] = '{16'h3210, 16'h0040, 16'h0050, 16'h0060}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [63:0]       in_data,
  input  logic              in2_valid,
  output logic              in2_ready,
  input  logic [63:0]       in2_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [63:0]       out_data,
  output logic              out2_valid,
  input  logic              out2_ready,
  output logic [63:0]       out2_data,
  output logic [ROWS*N-1:0] pu_overflow
);
  // GSwitch k (0-based g = k-1) signals, g = 0..ROWS
  logic n_v [ROWS+1], n_r [ROWS+1];  seg_t n_d [ROWS+1];
  logic w_v [ROWS+1], w_r [ROWS+1];  seg_t w_d [ROWS+1];
  logic s_v [ROWS+1], s_r [ROWS+1];  seg_t s_d [ROWS+1];
  logic e_v [ROWS+1], e_r [ROWS+1];  seg_t e_d [ROWS+1];

  assign n_v[0] = in_valid;   assign n_d[0] = in_data;   assign in_ready  = n_r[0];
  assign w_v[0] = in2_valid;  assign w_d[0] = in2_data;  assign in2_ready = w_r[0];
  assign out_valid  = e_v[ROWS];  assign out_data  = e_d[ROWS];  assign e_r[ROWS] = out_ready;
  assign out2_valid = s_v[ROWS];  assign out2_data = s_d[ROWS];  assign s_r[ROWS] = out2_ready;

  for (genvar g = 0; g <= ROWS; g++) begin : g_gsw
    diba_gswitch_a #(.BID(bid_t'(g + 1))) u_gsw (
      .clk, .rst_n,
      .n_in_valid(n_v[g]), .n_in_ready(n_r[g]), .n_in_data(n_d[g]),
      .w_in_valid(w_v[g]), .w_in_ready(w_r[g]), .w_in_data(w_d[g]),
      .s_out_valid(s_v[g]), .s_out_ready(s_r[g]), .s_out_data(s_d[g]),
      .e_out_valid(e_v[g]), .e_out_ready(e_r[g]), .e_out_data(e_d[g]));
    if (g < ROWS) begin : g_east
      assign w_v[g+1] = e_v[g];
      assign w_d[g+1] = e_d[g];
      assign e_r[g]   = w_r[g+1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic                ser_v, ser_r;
    logic [NI_LINES-1:0] ser_d;
    logic                b_v, b_r;
    seg_t                b_d;

    diba_ni_ser #(.LINES(NI_LINES)) u_ni_tx (
      .clk, .rst_n, .in_valid(s_v[r]), .in_ready(s_r[r]), .in_data(s_d[r]),
      .ser_valid(ser_v), .ser_ready(ser_r), .ser_data(ser_d));
    diba_ni_des #(.LINES(NI_LINES)) u_ni_rx (
      .clk, .rst_n, .ser_valid(ser_v), .ser_ready(ser_r), .ser_data(ser_d),
      .out_valid(b_v), .out_ready(b_r), .out_data(b_d));

    diba_brick #(
      .N(N), .KINDS(ROW_KINDS[r]),
      .LSW_BID(bid_t'(16 + r + 1)), .PU_BID0(bid_t'(32 + N * r)),
      .W(W), .OVF(OVF), .HT(HT), .GROUPS(GROUPS), .DEPTH(DEPTH), .LIMIT(LIMIT)
    ) u_brick (
      .clk, .rst_n,
      .in_valid(b_v), .in_ready(b_r), .in_data(b_d),
      .out_valid(n_v[r+1]), .out_ready(n_r[r+1]), .out_data(n_d[r+1]),
      .pu_overflow(pu_overflow[N*r +: N]));
  end
endmodule
