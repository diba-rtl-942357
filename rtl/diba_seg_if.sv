// diba_seg_if: one segment link (push/ready/data) between network blocks.
// A segment moves when push (valid) and ready are both 1 on a rising clock
// edge. Used as the bundle of wires between the LSwitch, the processing
// slots and the collector inside a topology brick.
interface diba_seg_if;
  import diba_pkg::*;
  logic push;
  logic ready;
  seg_t data;
  modport src (output push, output data, input ready);
  modport dst (input push, input data, output ready);
endinterface
