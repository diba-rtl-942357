// diba_orderby: OrderBy processing unit of TPC-H Q3
// (ORDER BY revenue DESC, o_orderdate; the first LIMIT rows are returned).
//
// GROUPS tuples (stream 7) are kept in a sorted list of DEPTH entries. As in
// the paper the OrderBy works like the group-by unit but inserts with a
// bubble step: the new tuple enters at the tail and moves one place up per
// cycle while it ranks before its neighbour (higher revenue, or equal
// revenue and earlier date); equal entries keep arrival order. When the
// list is full, a tuple that ranks after the last entry is dropped and
// otherwise the last entry falls off (overflow flag). END_MESSAGE emits the
// first LIMIT entries as RESULT tuples (stream 8, group_t) followed by END,
// and clears the list. Other streams and instructions are dropped.
//
// Timing: inserting costs 1 cycle plus one per place moved; the flush costs
// 2 cycles per result. DEPTH and LIMIT are design choices (the paper gives
// none; LIMIT = 10 is the row count of TPC-H Q3).
module diba_orderby
  import diba_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int LIMIT = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  seg_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output seg_t out_data,
  output logic overflow,
  output logic [$clog2(DEPTH+1)-1:0] n_entries
);
  localparam int IW = $clog2(DEPTH + 1);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic             t_valid, t_ready;
  sid_t             t_sid;
  logic [TUP_W-1:0] t_data;
  diba_tuple_rx u_rx (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                      .t_valid, .t_ready, .t_sid, .t_data);

  typedef enum logic [2:0] { S_IDLE, S_BUBBLE, S_EMIT, S_END } state_e;
  state_e state;

  group_t        mem [DEPTH];
  logic [IW-1:0] n_q, pos_q;
  group_t        new_q;

  function automatic logic ranks_first(group_t a, group_t b);
    return (a.revenue > b.revenue) ||
           (a.revenue == b.revenue && a.orderdate < b.orderdate);
  endfunction

  logic             o_valid, o_ready;
  sid_t             o_sid;
  logic [TUP_W-1:0] o_data;
  always_comb begin
    o_valid = (state == S_EMIT) || (state == S_END);
    o_sid   = (state == S_EMIT) ? SID_RESULT : SID_END;
    o_data  = (state == S_EMIT) ? TUP_W'(mem[AW'(pos_q)]) : '0;
  end
  diba_tuple_tx u_tx (.clk, .rst_n, .t_valid(o_valid), .t_ready(o_ready), .t_sid(o_sid),
                      .t_data(o_data), .out_valid, .out_ready, .out_data);

  assign t_ready   = (state == S_IDLE);
  assign n_entries = n_q;

  group_t prev;
  assign prev = mem[AW'(pos_q - 1'b1)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; n_q <= '0; pos_q <= '0; overflow <= 1'b0; new_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (t_valid) begin
          new_q <= group_t'(t_data[$bits(group_t)-1:0]);
          if (t_sid == SID_GROUPS) begin
            if (n_q == IW'(DEPTH)) begin
              // full: the new tuple competes for the last place
              overflow <= 1'b1;
              if (ranks_first(group_t'(t_data[$bits(group_t)-1:0]), mem[DEPTH-1])) begin
                pos_q <= IW'(DEPTH - 1);
                state <= S_BUBBLE;
              end
            end else begin
              pos_q <= n_q;
              n_q   <= n_q + 1'b1;
              state <= S_BUBBLE;
            end
          end else if (t_sid == SID_END) begin
            pos_q <= '0;
            state <= (n_q == '0) ? S_END : S_EMIT;
          end
        end
        S_BUBBLE: begin
          if (pos_q != '0 && ranks_first(new_q, prev)) begin
            mem[AW'(pos_q)] <= prev;
            pos_q <= pos_q - 1'b1;
          end else begin
            mem[AW'(pos_q)] <= new_q;
            state <= S_IDLE;
          end
        end
        S_EMIT: if (o_ready) begin
          if (pos_q + 1'b1 == n_q || pos_q + 1'b1 == IW'(LIMIT)) state <= S_END;
          pos_q <= pos_q + 1'b1;
        end
        default: if (o_ready) begin   // S_END
          n_q <= '0; overflow <= 1'b0; state <= S_IDLE;
        end
      endcase
    end
  end
endmodule
