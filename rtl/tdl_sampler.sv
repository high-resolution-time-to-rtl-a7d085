// tdl_sampler -- sampling flip-flops of one channel and the sub-TDL split.
//
// Every rising clock edge registers all N_TAPS taps of the carry chain
// (launcher taps first, then delay-line taps). The O taps (even indices)
// carry the inverted carry signal, so they are re-inverted here; the result
// is a pseudo thermometer code in which tap 0 is nearest the chain input
// (LSB) and a 1 means the element holds a high level.
//
// The registered code is then split into N_SUB interleaved sub-TDLs:
//   sub_code[k][j] = therm[k + N_SUB*j],  j = 0 .. N_TAPS/N_SUB - 1
// A sub-TDL only sees every N_SUB-th tap, so its bins are N_SUB taps wide
// and bubbles from clock skew and uneven tap delays (up to about 60 taps deep
// in this device family) do not appear inside it.
//
// Timing: one register stage; sub_code and therm are valid one cycle after
// the taps are sampled and are overwritten every cycle (no reset needed).
// From the paper: DFFs on both O and CO (dual sampling), 1920 taps, 64
// sub-TDLs by decomposition. Own choice: tap order O before CO within an
// element, and the polarity fix of the O taps done at the flip-flop inputs.
module tdl_sampler #(
  parameter int unsigned N_TAPS = tdc_pkg::N_TAPS,
  parameter int unsigned N_SUB  = tdc_pkg::N_SUB,
  localparam int unsigned SUB_LEN = N_TAPS / N_SUB
) (
  input  logic                             clk,
  input  logic [N_TAPS-1:0]                taps,
  output logic [N_TAPS-1:0]                therm,
  output logic [N_SUB-1:0][SUB_LEN-1:0]    sub_code
);
  timeunit 1ps;
  timeprecision 1fs;

  // Even taps are O outputs (O = 1 xor carry-in), odd taps are CO outputs.
  localparam logic [N_TAPS-1:0] O_MASK = {(N_TAPS/2){2'b01}};

  initial assert (N_TAPS % N_SUB == 0) else $error("N_TAPS must be a multiple of N_SUB");

  always_ff @(posedge clk) therm <= taps ^ O_MASK;

  always_comb begin
    for (int k = 0; k < int'(N_SUB); k++)
      for (int j = 0; j < int'(SUB_LEN); j++)
        sub_code[k][j] = therm[k + N_SUB * j];
  end
endmodule
