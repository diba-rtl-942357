// diba_pkg: types and constants shared by the stream-processor blocks.
//
// Every link in the network carries 64-bit segments. The top SID_W bits of a
// segment hold a stream ID, the remaining 60 bits are payload. A tuple wider
// than 60 bits is sent as several segments: the first carries the stream ID,
// the following ones carry the NULL ID and the next 60 bits of the tuple.
// Stream IDs 0 (processing-block instruction) and 1 (network instruction)
// follow the paper; the numbering of the data streams (2..5) follows the
// instruction listing of the TPC-H Q3 example, IDs 6..8 and the NULL value
// are this design's choice. Field widths of the Q3 tuples follow the paper's
// tuple-to-bit table; the order of fields inside a tuple is this design's.
package diba_pkg;

  localparam int SEG_W   = 64;
  localparam int SID_W   = 4;
  localparam int PAY_W   = SEG_W - SID_W;   // 60 payload bits per segment
  localparam int MAX_SEG = 2;               // longest tuple in the Q3 mapping
  localparam int TUP_W   = PAY_W * MAX_SEG; // 120-bit tuple container

  typedef logic [SEG_W-1:0] seg_t;
  typedef logic [SID_W-1:0] sid_t;

  localparam sid_t SID_PBI      = 4'd0;   // processing-block instruction
  localparam sid_t SID_NET      = 4'd1;   // network (switch) instruction
  localparam sid_t SID_LINEITEM = 4'd2;
  localparam sid_t SID_CUSTOMER = 4'd3;
  localparam sid_t SID_ORDERS   = 4'd4;
  localparam sid_t SID_END      = 4'd5;   // END_MESSAGE
  localparam sid_t SID_JOINED   = 4'd6;   // output of the 3-way join
  localparam sid_t SID_GROUPS   = 4'd7;   // output of aggregation/group-by
  localparam sid_t SID_RESULT   = 4'd8;   // output of order-by
  localparam sid_t SID_NULL     = 4'hF;   // continuation segment

  localparam int NSTREAMS = 1 << SID_W;

  function automatic sid_t seg_sid(seg_t s);
    return s[SEG_W-1 -: SID_W];
  endfunction

  // Network instruction payload (bits of the 64-bit segment)
  //   [59:52] B-ID     target block
  //   [51:48] stream   stream whose route is programmed
  //   GSwitch-A: [47:46] port mask {east, south}, [45:42] segment count
  //   LSwitch  : [47:40] S_Filter, bit k = port k+1 (port 1 is the bypass)
  // Processing-block instruction: [59:52] B-ID, [51:0] operand.
  typedef logic [7:0] bid_t;
  function automatic bid_t ins_bid(seg_t s);    return s[59:52]; endfunction
  function automatic sid_t ins_stream(seg_t s); return s[51:48]; endfunction

  function automatic seg_t mk_gsw_ins(bid_t bid, sid_t stream, logic [1:0] port,
                                      logic [3:0] nseg);
    seg_t s = '0;
    s[63:60] = SID_NET; s[59:52] = bid; s[51:48] = stream;
    s[47:46] = port;    s[45:42] = nseg;
    return s;
  endfunction

  function automatic seg_t mk_lsw_ins(bid_t bid, sid_t stream, logic [7:0] filter);
    seg_t s = '0;
    s[63:60] = SID_NET; s[59:52] = bid; s[51:48] = stream; s[47:40] = filter;
    return s;
  endfunction

  function automatic seg_t mk_pb_ins(bid_t bid, logic [51:0] operand);
    seg_t s = '0;
    s[63:60] = SID_PBI; s[59:52] = bid; s[51:0] = operand;
    return s;
  endfunction

  // GSwitch-A port mask bits
  localparam logic [1:0] PORT_SOUTH = 2'b01;
  localparam logic [1:0] PORT_EAST  = 2'b10;

  // Number of segments of a tuple of each stream (what the receiving units
  // need to reassemble it).
  function automatic int unsigned stream_segs(sid_t sid);
    case (sid)
      SID_LINEITEM, SID_ORDERS, SID_JOINED, SID_GROUPS, SID_RESULT: return 2;
      default: return 1;
    endcase
  endfunction

  // Q3 tuples, least significant field first (widths from the paper).
  typedef struct packed {
    logic [20:0] shipdate;       // 21 bits
    logic [31:0] discount;       // 32 bits, hundredths
    logic [31:0] extendedprice;  // 32 bits, cents
    logic [23:0] orderkey;       // 24 bits
  } lineitem_t;                  // 109 bits

  typedef struct packed {
    logic [31:0] mktsegment;     // 32 bits
    logic [23:0] custkey;        // 24 bits
  } customer_t;                  // 56 bits

  typedef struct packed {
    logic [5:0]  shippriority;   // 6 bits
    logic [20:0] orderdate;      // 21 bits
    logic [23:0] custkey;        // 24 bits
    logic [23:0] orderkey;       // 24 bits
  } orders_t;                    // 75 bits

  typedef struct packed {
    logic [5:0]  shippriority;
    logic [20:0] orderdate;
    logic [31:0] discount;
    logic [31:0] extendedprice;
    logic [23:0] orderkey;
  } joined_t;                    // 115 bits

  typedef struct packed {
    logic [63:0] revenue;        // sum of price*(100-discount)
    logic [5:0]  shippriority;
    logic [20:0] orderdate;
    logic [23:0] orderkey;
  } group_t;                     // 115 bits

  // Processing-slot kinds of a topology brick (names as in the Q3 mapping).
  typedef enum logic [3:0] {
    PU_BYPASS  = 4'd0,
    PU_SEL1    = 4'd1,   // l_shipdate  >  constant
    PU_SEL2    = 4'd2,   // c_mktsegment = constant
    PU_SEL3    = 4'd3,   // o_orderdate <  constant
    PU_CMJOIN  = 4'd4,
    PU_GROUPBY = 4'd5,
    PU_ORDERBY = 4'd6
  } pu_kind_e;

  // Work item inside the three-way join pipeline. A NEW item is a tuple
  // that has just arrived (it travels the distribution chain and is stored
  // by the stage that owns its stream); a MID item carries a partial join
  // result, a FINAL item a complete (lineitem, orders, customer) result.
  typedef enum logic [1:0] { IT_NEW = 2'd0, IT_MID = 2'd1, IT_FINAL = 2'd2, IT_END = 2'd3 } item_kind_e;
  typedef enum logic [1:0] { OR_L = 2'd0, OR_C = 2'd1, OR_O = 2'd2 } origin_e;
  typedef struct packed {
    item_kind_e kind;
    origin_e    origin;
    lineitem_t  l;
    customer_t  c;
    orders_t    o;
  } cmj_item_t;

  typedef enum logic [1:0] { CMP_GT = 2'd0, CMP_EQ = 2'd1, CMP_LT = 2'd2 } cmp_e;

endpackage
