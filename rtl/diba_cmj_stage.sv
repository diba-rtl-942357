// diba_cmj_stage: one pipeline stage of the customized TPC-H Q3 three-way
// join. STAGE 0 holds the ORDERS window twice (one hash join unit indexed
// by o_orderkey, one by o_custkey), STAGE 1 the CUSTOMER window (c_custkey),
// STAGE 2 the LINEITEM window (l_orderkey).
//
// Items arrive in order from the previous stage. What a stage does with an
// item (the flows the paper gives for the optimized join):
//   stage 0: NEW orders   -> store in both units, forward
//            NEW customer -> probe by c_custkey (o_custkey unit): one MID
//                            item per match, then forward the NEW item
//            NEW lineitem -> probe by l_orderkey (o_orderkey unit): MIDs,
//                            then forward the NEW item
//   stage 1: NEW orders   -> probe by o_custkey: MID items (orders+customer)
//            NEW customer -> store
//            NEW lineitem -> forward
//            MID from a customer -> forward (passes without processing)
//            MID from a lineitem -> probe by o_custkey: FINAL items
//   stage 2: NEW lineitem -> store
//            MID (orders+customer) -> probe by o_orderkey: FINAL items
//   every stage forwards FINAL and END items and drops what it does not use.
// Since every stage handles its items strictly in order, each new tuple is
// joined exactly with the tuples that arrived before it and are still in
// their windows.
//
// Timing: one item at a time per stage; an item costs the hash unit's cycles
// plus one cycle per item sent. Stages are decoupled by 2-entry buffers.
module diba_cmj_stage
  import diba_pkg::*;
#(
  parameter int STAGE = 0,
  parameter int W     = 1024,
  parameter int OVF   = 1024,
  parameter int HT    = 2048
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  cmj_item_t in_item,
  output logic      out_valid,
  input  logic      out_ready,
  output cmj_item_t out_item,
  output logic [$clog2(OVF+1)-1:0] ovf_count [2]
);
  localparam int NH = (STAGE == 0) ? 2 : 1;
  localparam int TW = (STAGE == 0) ? $bits(orders_t) :
                      (STAGE == 1) ? $bits(customer_t) : $bits(lineitem_t);

  typedef enum logic [1:0] { A_NONE, A_STORE, A_PROBE } act_e;

  // ---------------- decision for the item at the input ----------------
  act_e       act;
  logic       fwd;        // send the item itself on (after the operation)
  logic       psel;       // which unit is probed (stage 0 only)
  logic [23:0] pkey;
  item_kind_e res_kind;

  always_comb begin
    act = A_NONE; fwd = 1'b0; psel = 1'b0; pkey = '0;
    res_kind = (in_item.kind == IT_NEW) ? IT_MID : IT_FINAL;
    unique case (in_item.kind)
      IT_FINAL, IT_END: fwd = 1'b1;
      IT_NEW: begin
        unique case (STAGE)
          0: begin
            fwd = 1'b1;
            if (in_item.origin == OR_O) act = A_STORE;
            else if (in_item.origin == OR_C) begin act = A_PROBE; psel = 1'b1; pkey = in_item.c.custkey; end
            else begin act = A_PROBE; psel = 1'b0; pkey = in_item.l.orderkey; end
          end
          1: begin
            if (in_item.origin == OR_O) begin act = A_PROBE; pkey = in_item.o.custkey; end
            else if (in_item.origin == OR_C) act = A_STORE;
            else fwd = 1'b1;
          end
          default: if (in_item.origin == OR_L) act = A_STORE;
        endcase
      end
      default: begin // IT_MID
        unique case (STAGE)
          0: ;
          1: begin
            if (in_item.origin == OR_L) begin act = A_PROBE; pkey = in_item.o.custkey; end
            else fwd = 1'b1;
          end
          default: begin act = A_PROBE; pkey = in_item.o.orderkey; end
        endcase
      end
    endcase
  end

  // ---------------- hash join units ----------------
  logic [NH-1:0] h_cmd_valid, h_cmd_ready, h_done, h_m_valid, h_m_ready;
  logic [TW-1:0] h_m_tuple [NH];
  logic [TW-1:0] st_tuple;
  logic [23:0]   st_key [NH];

  always_comb begin
    unique case (STAGE)
      0:       st_tuple = TW'(in_item.o);
      1:       st_tuple = TW'(in_item.c);
      default: st_tuple = TW'(in_item.l);
    endcase
    st_key[0] = (STAGE == 0) ? in_item.o.orderkey :
                (STAGE == 1) ? in_item.c.custkey  : in_item.l.orderkey;
    st_key[NH-1] = (STAGE == 0) ? in_item.o.custkey : st_key[0];
  end

  typedef enum logic [1:0] { S_IDLE, S_BUSY, S_FWD } state_e;
  state_e    state;
  cmj_item_t cur_q;
  logic      cur_fwd_q, cur_sel_q;
  act_e      cur_act_q;
  logic [NH-1:0] done_q;
  item_kind_e cur_res_q;

  for (genvar u = 0; u < NH; u++) begin : g_unit
    logic [$clog2(W+1)-1:0] wc;
    diba_hbsj #(.KEY_W(24), .TW(TW), .W(W), .OVF(OVF), .HT(HT),
                .SEED1(32'h0000_0000 + 32'(STAGE * 2 + u)),
                .SEED2(32'h9747_b28c + 32'(STAGE * 2 + u))) u_hbsj (
      .clk, .rst_n,
      .cmd_valid(h_cmd_valid[u]), .cmd_ready(h_cmd_ready[u]),
      .cmd_store(act == A_STORE), .cmd_key((act == A_STORE) ? st_key[u] : pkey),
      .cmd_tuple(st_tuple),
      .m_valid(h_m_valid[u]), .m_ready(h_m_ready[u]), .m_tuple(h_m_tuple[u]),
      .done(h_done[u]), .ovf_count(ovf_count[u]), .win_count(wc));
  end
  if (NH == 1) begin : g_one
    assign ovf_count[1] = '0;
  end

  // ---------------- control ----------------
  logic        start;
  cmj_item_t   merged;
  logic        msel;

  always_comb begin
    msel   = (NH == 2) ? cur_sel_q : 1'b0;
    merged = cur_q;
    merged.kind = cur_res_q;
    unique case (STAGE)
      0:       merged.o = orders_t'(h_m_tuple[msel]);
      1:       merged.c = customer_t'(h_m_tuple[msel]);
      default: merged.l = lineitem_t'(h_m_tuple[NH-1]);
    endcase

    start       = (state == S_IDLE) && in_valid && (act != A_NONE) && (&h_cmd_ready);
    h_cmd_valid = '0;
    if (start) begin
      if (act == A_STORE) h_cmd_valid = '1;
      else                h_cmd_valid[(NH == 2) ? int'(psel) : 0] = 1'b1;
    end

    out_valid = 1'b0;
    out_item  = in_item;
    in_ready  = 1'b0;
    h_m_ready = '0;
    unique case (state)
      S_IDLE: begin
        if (in_valid && act == A_NONE) begin
          out_valid = fwd;
          in_ready  = fwd ? out_ready : 1'b1;
        end else in_ready = start;
      end
      S_BUSY: begin
        out_item  = merged;
        out_valid = h_m_valid[msel];
        h_m_ready[msel] = out_ready;
      end
      default: begin // S_FWD
        out_item  = cur_q;
        out_valid = 1'b1;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; done_q <= '0; cur_fwd_q <= 1'b0; cur_sel_q <= 1'b0;
      cur_act_q <= A_NONE; cur_res_q <= IT_MID;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cur_q     <= in_item;
          cur_fwd_q <= fwd;
          cur_sel_q <= psel;
          cur_act_q <= act;
          cur_res_q <= res_kind;
          done_q    <= '0;
          state     <= S_BUSY;
        end
        S_BUSY: begin
          // finished when the unit(s) used have pulsed done
          if (cur_act_q == A_STORE ? ((done_q | h_done) == '1) : h_done[msel]) begin
            state  <= cur_fwd_q ? S_FWD : S_IDLE;
            done_q <= '0;
          end else done_q <= done_q | h_done;
        end
        default: if (out_ready) state <= S_IDLE;
      endcase
    end
  end
endmodule
