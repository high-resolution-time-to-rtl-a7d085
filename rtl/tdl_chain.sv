// tdl_chain -- behavioural model of the tapped delay line: a cascade of
// CARRY8 cells whose elements all propagate (select 1, data 0).
//
// The pulse train from the launcher enters at pulse_in and moves one element
// per RISE_PS (rising transitions) or FALL_PS (falling transitions). Each element gives two taps, taps[2e] = O (inverted carry
// input, half an element after it) and taps[2e+1] = CO, so one CARRY8 gives
// 16 taps (dual sampling). No clock; the taps are sampled by tdl_sampler.
// From the paper: CARRY8 cascade, O and CO both tapped, 1920 taps per channel
// including the launcher. Own choice: identical
// elements (no bin mismatch), rising edges slightly faster than falling ones.
module tdl_chain #(
  parameter int unsigned TDL_TAPS = tdc_pkg::N_TAPS - tdc_pkg::LAUNCH_TAPS,
  parameter real         RISE_PS  = tdc_pkg::RISE_PS,
  parameter real         FALL_PS  = tdc_pkg::FALL_PS
) (
  input  logic                pulse_in,
  output logic [TDL_TAPS-1:0] taps
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned N_C8 = TDL_TAPS / 16;

  initial assert (TDL_TAPS % 16 == 0) else $error("TDL_TAPS must fill whole CARRY8s");

  logic cc [N_C8 + 1];
  assign cc[0] = pulse_in;

  for (genvar k = 0; k < N_C8; k++) begin : g_c8
    logic [7:0] o, co;
    carry8 #(.RISE_PS(RISE_PS), .FALL_PS(FALL_PS)) u_carry8 (.ci(cc[k]), .s(8'hFF), .di(8'h00), .o(o), .co(co));
    for (genvar i = 0; i < 8; i++) begin : g_tap
      assign taps[16*k+2*i]   = o[i];
      assign taps[16*k+2*i+1] = co[i];
    end
    assign cc[k+1] = co[7];
  end
endmodule
