// diba_hbsj: hash-based stream join unit (one direction, one window).
//
// Holds a count-based sliding window of the last W tuples of one stream and
// answers probes against it with an equality test on a KEY_W-bit key.
//
// Storage (as in the paper): two hash tables X and Y, indexed by the low
// bits of Murmur3 hashes H1 and H2 of the key, each with two lanes L0 and
// L1 and a valid bit per row, i.e. four storage tables of HT rows. A new
// tuple goes to the first free of X.L0, X.L1, Y.L0, Y.L1 at its rows; if all
// four are taken it goes to the overflow buffer, a circular FIFO of OVF
// entries. The ordered sliding window, a circular buffer of W entries,
// records for every stored tuple, in arrival order, a 4-bit location
// {valid, overflow, table Y, lane L1} and its row. Before a tuple is
// inserted into a full window the oldest one is expired: its valid bit is
// cleared, or, if it lives in the overflow buffer, the buffer's tail is
// advanced (overflow entries expire in FIFO order).
//
// Probe: the four candidate rows are compared in parallel; every match is
// returned, one per cycle, then the overflow buffer is scanned from tail
// to head, one entry per cycle (the nested-loop part that makes a poor hash
// slow).
//
// Interface: cmd_valid/cmd_ready starts a store (cmd_store=1) or probe;
// cmd_ready is high only when idle. Matches leave on m_valid/m_ready; done
// pulses for one cycle when the operation has finished.
// Timing (this design's): store 2 cycles, 3 when a tuple expires; probe
// 2 cycles + 1 per hash match + 1 per overflow entry, plus output stalls.
// After reset the unit spends 4*HT cycles clearing the valid bits (cmd_ready
// low); the valid bits are a memory with one write port, not flip-flops.
module diba_hbsj #(
  parameter int          KEY_W = 24,
  parameter int          TW    = 64,
  parameter int          W     = 1024,
  parameter int          OVF   = 1024,
  parameter int          HT    = 2048,
  parameter logic [31:0] SEED1 = 32'h0000_0000,
  parameter logic [31:0] SEED2 = 32'h9747_b28c
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic             cmd_store,
  input  logic [KEY_W-1:0] cmd_key,
  input  logic [TW-1:0]    cmd_tuple,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [TW-1:0]    m_tuple,
  output logic             done,
  output logic [$clog2(OVF+1)-1:0] ovf_count,
  output logic [$clog2(W+1)-1:0]   win_count
);
  localparam int HB = (HT  > 1) ? $clog2(HT)  : 1;
  localparam int WB = (W   > 1) ? $clog2(W)   : 1;
  localparam int OB = (OVF > 1) ? $clog2(OVF) : 1;
  localparam int EW = KEY_W + TW;

  typedef struct packed {
    logic valid;
    logic ovf;
    logic tab_y;
    logic lane1;
  } loc_t;

  typedef enum logic [2:0] { S_CLEAR, S_IDLE, S_EXPIRE, S_INSERT, S_LOOKUP, S_EMIT, S_SCAN, S_DONE } state_e;
  state_e state;

  // storage
  // the four tables X.L0, X.L1, Y.L0, Y.L1 share one address space {table, row}
  logic [EW-1:0] tab  [4*HT];
  logic          vld  [4*HT];
  logic [HB+1:0] clr_ptr;    // {table, row} being cleared after reset
  logic [EW-1:0] ob   [OVF];
  loc_t          ow_loc [W];
  logic [HB-1:0] ow_idx [W];

  logic [WB-1:0] ow_head, ow_tail;
  logic [OB-1:0] ob_head, ob_tail;

  logic [KEY_W-1:0] key_q;
  logic [TW-1:0]    tup_q;
  logic [3:0]       mask_q;
  logic [OB-1:0]    scan_ptr;
  logic [$clog2(OVF+1)-1:0] scan_left;

  // hashes of the latched key
  logic [31:0] h1, h2;
  diba_murmur3 #(.SEED(SEED1)) u_h1 (.key(32'(key_q)), .hash(h1));
  diba_murmur3 #(.SEED(SEED2)) u_h2 (.key(32'(key_q)), .hash(h2));

  logic [HB-1:0] row [4];
  logic [3:0]    occ, hitv;
  logic [1:0]    first_free, first_hit;
  logic          any_free;

  always_comb begin
    row[0] = h1[HB-1:0]; row[1] = h1[HB-1:0];
    row[2] = h2[HB-1:0]; row[3] = h2[HB-1:0];
    for (int j = 0; j < 4; j++) begin
      occ[j]  = vld[{2'(j), row[j]}];
      hitv[j] = occ[j] && (tab[{2'(j), row[j]}][EW-1 -: KEY_W] == key_q);
    end
    any_free = (occ != 4'hF);
    first_free = 2'd0;
    for (int j = 3; j >= 0; j--) if (!occ[j]) first_free = 2'(j);
    first_hit = 2'd0;
    for (int j = 3; j >= 0; j--) if (mask_q[j]) first_hit = 2'(j);
  end

  assign cmd_ready = (state == S_IDLE);
  assign done      = (state == S_DONE);

  always_comb begin
    m_valid = 1'b0;
    m_tuple = tab[{first_hit, row[first_hit]}][TW-1:0];
    if (state == S_EMIT && mask_q != '0) m_valid = 1'b1;
    if (state == S_SCAN && scan_left != '0 && ob[scan_ptr][EW-1 -: KEY_W] == key_q) begin
      m_valid = 1'b1;
      m_tuple = ob[scan_ptr][TW-1:0];
    end
  end

  loc_t old;
  assign old = ow_loc[ow_tail];

  // the one write port of the valid bits
  logic          v_we, v_bit;
  logic [1:0]    v_tab;
  logic [HB-1:0] v_row;
  always_comb begin
    v_we = 1'b0; v_bit = 1'b0; v_tab = clr_ptr[HB+1:HB]; v_row = clr_ptr[HB-1:0];
    unique case (state)
      S_CLEAR:  v_we = 1'b1;
      S_EXPIRE: begin
        v_we  = old.valid && !old.ovf;
        v_tab = {old.tab_y, old.lane1};
        v_row = ow_idx[ow_tail];
      end
      S_INSERT: begin
        v_we  = any_free;
        v_bit = 1'b1;
        v_tab = first_free;
        v_row = row[first_free];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (v_we) vld[{v_tab, v_row}] <= v_bit;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_CLEAR;
      clr_ptr <= '0;
      ow_head <= '0; ow_tail <= '0; win_count <= '0;
      ob_head <= '0; ob_tail <= '0; ovf_count <= '0;
      mask_q <= '0; scan_ptr <= '0; scan_left <= '0;
    end else begin
      unique case (state)
        S_CLEAR: begin
          // one valid bit per cycle: 4*HT cycles
          clr_ptr <= clr_ptr + 1'b1;
          if (clr_ptr == {2'b11, HB'(HT - 1)}) state <= S_IDLE;
        end
        S_IDLE: if (cmd_valid) begin
          key_q <= cmd_key;
          tup_q <= cmd_tuple;
          if (!cmd_store)                      state <= S_LOOKUP;
          else if (win_count == ($bits(win_count))'(W)) state <= S_EXPIRE;
          else                                 state <= S_INSERT;
        end
        S_EXPIRE: begin
          if (old.valid) begin
            if (old.ovf) begin
              ob_tail   <= (ob_tail == OB'(OVF - 1)) ? '0 : ob_tail + 1'b1;
              ovf_count <= ovf_count - 1'b1;
            end
          end
          ow_tail   <= (ow_tail == WB'(W - 1)) ? '0 : ow_tail + 1'b1;
          win_count <= win_count - 1'b1;
          state     <= S_INSERT;
        end
        S_INSERT: begin
          if (any_free) begin
            tab[{first_free, row[first_free]}] <= {key_q, tup_q};
            ow_loc[ow_head] <= loc_t'{1'b1, 1'b0, first_free[1], first_free[0]};
            ow_idx[ow_head] <= row[first_free];
          end else if (ovf_count != ($bits(ovf_count))'(OVF)) begin
            ob[ob_head] <= {key_q, tup_q};
            ob_head     <= (ob_head == OB'(OVF - 1)) ? '0 : ob_head + 1'b1;
            ovf_count   <= ovf_count + 1'b1;
            ow_loc[ow_head] <= loc_t'{1'b1, 1'b1, 1'b0, 1'b0};
            ow_idx[ow_head] <= '0;
          end else begin
            // overflow buffer full (only possible when OVF < W): tuple lost
            ow_loc[ow_head] <= loc_t'{1'b0, 1'b0, 1'b0, 1'b0};
            ow_idx[ow_head] <= '0;
          end
          ow_head   <= (ow_head == WB'(W - 1)) ? '0 : ow_head + 1'b1;
          win_count <= win_count + 1'b1;
          state     <= S_DONE;
        end
        S_LOOKUP: begin
          mask_q    <= hitv;
          scan_ptr  <= ob_tail;
          scan_left <= ovf_count;
          state     <= S_EMIT;
        end
        S_EMIT: begin
          if (mask_q == '0) state <= S_SCAN;
          else if (m_ready) mask_q[first_hit] <= 1'b0;
        end
        S_SCAN: begin
          if (scan_left == '0) state <= S_DONE;
          else if (!m_valid || m_ready) begin
            scan_ptr  <= (scan_ptr == OB'(OVF - 1)) ? '0 : scan_ptr + 1'b1;
            scan_left <= scan_left - 1'b1;
          end
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end
endmodule
