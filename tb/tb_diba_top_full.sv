// tb_diba_top_full: end-to-end test of the Q3 instance at the sizes of the
// paper's experiments (window 2^10, hash tables 2^11, overflow buffer 2^10),
// no parameter changed. About 1500 customers make the customer window
// expire; orders share 20 customer keys, which fills the four hash slots of
// those keys and uses the overflow buffer. See tb_top_body.svh.
`define TOP_PARAMS
`define TB_W      1024
`define TB_NC     1500
`define TB_NO     200
`define TB_NL     400
`define TB_KC     1500
`define TB_KO     150
`define TB_KCO    20
`define TB_MAXCYC 3000000
module tb_diba_top_full;
`include "tb_top_body.svh"
endmodule
