// diba_agg_groupby: Aggregation-GroupBy processing unit of TPC-H Q3.
//
// Each JOINED tuple (stream 6) belongs to the group
// {l_orderkey, o_orderdate, o_shippriority}. Its revenue is
// l_extendedprice*(100-l_discount), where the price is in cents and the
// discount in hundredths, so the sum is exact and integer. The controller
// follows the states of the paper's aggregation controller:
//   Reset        - clear the group table (after power-up and after each flush)
//   Idle         - wait for a tuple
//   Group Search - compare the key with one stored group per cycle
//   New Group    - key not found: append it (overflow flag if the table is full)
//   Update Group - key found: add the revenue
//   Emit Result  - on END_MESSAGE send every group as a GROUPS tuple
//                  (stream 7, group_t), then END, then Reset.
// Other streams and instructions are dropped.
//
// Timing: a tuple with k stored groups ahead of its own costs k+2 cycles;
// the flush costs 2 cycles per group (two-segment tuples). GROUPS is the
// table size; the paper does not give one, this design chooses 1024.
module diba_agg_groupby
  import diba_pkg::*;
#(
  parameter int GROUPS = 1024
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  seg_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output seg_t out_data,
  output logic overflow,                        // a group was lost (sticky until flush)
  output logic [$clog2(GROUPS+1)-1:0] n_groups
);
  localparam int IW = $clog2(GROUPS + 1);
  localparam int KW = 24 + 21 + 6;

  logic             t_valid, t_ready;
  sid_t             t_sid;
  logic [TUP_W-1:0] t_data;
  diba_tuple_rx u_rx (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                      .t_valid, .t_ready, .t_sid, .t_data);

  typedef enum logic [2:0] { S_RESET, S_IDLE, S_SEARCH, S_NEW, S_UPDATE, S_EMIT, S_END } state_e;
  state_e state;

  logic [KW-1:0] key_mem [GROUPS];
  logic [63:0]   rev_mem [GROUPS];
  logic [IW-1:0] n_q, idx_q;
  logic [KW-1:0] key_q;
  logic [63:0]   rev_q;

  joined_t jt;
  assign jt = joined_t'(t_data[$bits(joined_t)-1:0]);

  // output
  logic             o_valid, o_ready;
  sid_t             o_sid;
  logic [TUP_W-1:0] o_data;
  group_t           g;
  always_comb begin
    g.orderkey     = key_mem[idx_q[$clog2(GROUPS)-1:0]][50:27];
    g.orderdate    = key_mem[idx_q[$clog2(GROUPS)-1:0]][26:6];
    g.shippriority = key_mem[idx_q[$clog2(GROUPS)-1:0]][5:0];
    g.revenue      = rev_mem[idx_q[$clog2(GROUPS)-1:0]];
    o_valid = (state == S_EMIT) || (state == S_END);
    o_sid   = (state == S_EMIT) ? SID_GROUPS : SID_END;
    o_data  = (state == S_EMIT) ? TUP_W'(g) : '0;
  end
  diba_tuple_tx u_tx (.clk, .rst_n, .t_valid(o_valid), .t_ready(o_ready), .t_sid(o_sid),
                      .t_data(o_data), .out_valid, .out_ready, .out_data);

  assign t_ready  = (state == S_IDLE);
  assign n_groups = n_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_RESET; n_q <= '0; idx_q <= '0; overflow <= 1'b0;
      key_q <= '0; rev_q <= '0;
    end else begin
      unique case (state)
        S_RESET: begin
          n_q <= '0; idx_q <= '0; overflow <= 1'b0; state <= S_IDLE;
        end
        S_IDLE: if (t_valid) begin
          idx_q <= '0;
          key_q <= {jt.orderkey, jt.orderdate, jt.shippriority};
          rev_q <= 64'(jt.extendedprice) * (64'd100 - 64'(jt.discount));
          if (t_sid == SID_JOINED)   state <= S_SEARCH;
          else if (t_sid == SID_END) state <= (n_q == '0) ? S_END : S_EMIT;
        end
        S_SEARCH: begin
          if (idx_q == n_q)                                          state <= S_NEW;
          else if (key_mem[idx_q[$clog2(GROUPS)-1:0]] == key_q)     state <= S_UPDATE;
          else                                                       idx_q <= idx_q + 1'b1;
        end
        S_NEW: begin
          if (n_q < IW'(GROUPS)) begin
            key_mem[n_q[$clog2(GROUPS)-1:0]] <= key_q;
            rev_mem[n_q[$clog2(GROUPS)-1:0]] <= rev_q;
            n_q <= n_q + 1'b1;
          end else overflow <= 1'b1;
          state <= S_IDLE;
        end
        S_UPDATE: begin
          rev_mem[idx_q[$clog2(GROUPS)-1:0]] <= rev_mem[idx_q[$clog2(GROUPS)-1:0]] + rev_q;
          state <= S_IDLE;
        end
        S_EMIT: if (o_ready) begin
          if (idx_q + 1'b1 == n_q) state <= S_END;
          idx_q <= idx_q + 1'b1;
        end
        default: if (o_ready) state <= S_RESET;   // S_END
      endcase
    end
  end
endmodule
