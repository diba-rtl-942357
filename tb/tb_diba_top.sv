// tb_diba_top: end-to-end test of the Q3 instance at reduced sizes
// (window 8, hash tables of 4 rows, so expiry and the overflow buffer are
// exercised by a few hundred tuples). See tb_top_body.svh.
`define TOP_PARAMS #(.W(8), .OVF(8), .HT(4), .GROUPS(64), .DEPTH(64), .LIMIT(10))
`define TB_W      8
`define TB_NC     40
`define TB_NO     40
`define TB_NL     80
`define TB_KC     6
`define TB_KO     10
`define TB_KCO    6
`define TB_MAXCYC 400000
module tb_diba_top;
`include "tb_top_body.svh"
endmodule
