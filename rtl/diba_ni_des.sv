// diba_ni_des: serial-to-parallel network interface, the receiving half of
// diba_ni_ser. Collects SEG_W/LINES beats (lowest bits first) into one
// 64-bit segment and offers it on a push/ready output; a new beat is taken
// only while no finished segment is waiting.
module diba_ni_des
  import diba_pkg::*;
#(
  parameter int LINES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ser_valid,
  output logic             ser_ready,
  input  logic [LINES-1:0] ser_data,
  output logic             out_valid,
  input  logic             out_ready,
  output seg_t             out_data
);
  localparam int BEATS = SEG_W / LINES;
  localparam int BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  logic [BW-1:0] cnt_q;

  assign ser_ready = !out_valid || out_ready;   // a finished segment leaving frees the register

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cnt_q <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (ser_valid && ser_ready) begin
        out_data <= SEG_W'({ser_data, out_data} >> LINES);
        if (cnt_q == BW'(BEATS - 1)) begin
          cnt_q <= '0; out_valid <= 1'b1;
        end else cnt_q <= cnt_q + 1'b1;
      end
    end
  end
endmodule
