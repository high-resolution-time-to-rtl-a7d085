// onehot2bin -- one-hot to binary converter: out bit b is the OR of every
// input bit whose index has bit b set, so a true one-hot input gives its
// index and an all-zero input gives 0. found tells whether any bit was set.
// Purely combinational.
module onehot2bin #(
  parameter int unsigned N = 30,
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0] onehot,
  output logic [W-1:0] bin,
  output logic         found
);
  timeunit 1ps;
  timeprecision 1fs;

  always_comb begin
    bin = '0;
    for (int i = 0; i < int'(N); i++)
      if (onehot[i]) bin = bin | W'(i);
  end
  assign found = |onehot;
endmodule
