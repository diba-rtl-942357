// diba_bypass: the bypass slot of a topology brick.
//
// It forwards every segment it receives (tuples, network and block
// instructions alike) unchanged, so that instructions and streams that no
// processing unit of the brick handles reach the next brick. The paper calls
// it a pass-through with no internal component; here it is one elastic
// register stage so the brick's timing paths are cut: one cycle of latency,
// one segment per cycle, in_ready = !full || out_ready.
module diba_bypass
  import diba_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  seg_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output seg_t out_data
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data;
    end
  end
endmodule
