// coarse_counter -- free-running binary counter of sampling-clock periods.
//
// count holds m during the m-th clock period after reset and wraps modulo
// 2**W. A channel latches it at the clock edge that samples a hit, so a
// timestamp is count * T minus the fine time tau measured back from that edge.
// From the paper: a binary (or Gray) coarse counter on the sampling clock.
// Own choices: binary, synchronous active-high reset, width W.
module coarse_counter #(
  parameter int unsigned W = tdc_pkg::COARSE_W
) (
  input  logic         clk,
  input  logic         rst,
  output logic [W-1:0] count
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk)
    if (rst) count <= '0;
    else     count <= count + 1'b1;
endmodule
