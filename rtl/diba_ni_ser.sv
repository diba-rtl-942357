// diba_ni_ser: parallel-to-serial network interface.
//
// Sends each 64-bit segment as SEG_W/LINES beats of LINES bits, lowest bits
// first, over a link with valid/ready per beat; diba_ni_des on the far side
// rebuilds the segment. The paper proposes such NI pairs to save wiring
// between switches and bricks and leaves the number of lines to the
// application; LINES must divide 64. With LINES = 64 the pair is a plain
// register stage.
// Timing: a segment occupies the serial link for SEG_W/LINES cycles;
// back-to-back segments keep the link busy every cycle.
module diba_ni_ser
  import diba_pkg::*;
#(
  parameter int LINES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  seg_t             in_data,
  output logic             ser_valid,
  input  logic             ser_ready,
  output logic [LINES-1:0] ser_data
);
  localparam int BEATS = SEG_W / LINES;
  localparam int BW    = (BEATS > 1) ? $clog2(BEATS) : 1;
  seg_t          sh_q;
  logic [BW-1:0] left_q;
  logic          full_q;

  // the next segment loads while the last beat of the current one leaves
  assign in_ready  = !full_q || (ser_ready && left_q == '0);
  assign ser_valid = full_q;
  assign ser_data  = sh_q[LINES-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q <= 1'b0; left_q <= '0;
    end else if (in_valid && in_ready) begin
      full_q <= 1'b1; sh_q <= in_data; left_q <= BW'(BEATS - 1);
    end else if (ser_valid && ser_ready) begin
      sh_q <= sh_q >> LINES;
      if (left_q == '0) full_q <= 1'b0;
      else left_q <= left_q - 1'b1;
    end
  end
endmodule
