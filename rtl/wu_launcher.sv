// wu_launcher -- behavioural model of the four-edge wave-union (WU A)
// launcher, built as the first part of the carry chain from CARRY8 cells.
//
// Most elements are plain delay elements (select tied to 1). Four
// "configuring elements" take the hit signal as their select and a constant
// as their data input, in the order 1, 0, 1, 0 from the chain input. While
// hit = 0 (standby) each configuring element drives its constant, so the
// chain holds the stored pattern: zeros, POS_TAPS ones, NEG_TAPS zeros,
// POS_TAPS ones, then zeros up to the end. When hit rises (launch) every
// element propagates, the "0" at the chain input follows, and the stored
// pattern travels into the delay line as the train 0-1-0-1-0 with four
// transitions. Pulse widths are set by the number of elements between
// configuring elements.
//
// Interface: hit in; taps out (taps[2e] = O and taps[2e+1] = CO of element e,
// raw, not yet re-inverted); pulse_out is the last carry output, which feeds
// the delay line. No clock: this is the timing part of the design and only
// synthesizes on an FPGA as hand-placed carry primitives.
//
// From the paper: CARRY8-based launcher, hit as MUX select, constants 1 0 1 0
// on the configuring elements, 80-tap positive and 112-tap negative pulses,
// 368 taps in all. Own choice: the 368 - 272 = 96 leading taps are put before
// the first configuring element, and the last configuring element is the
// launcher's final element.
module wu_launcher #(
  parameter int unsigned LAUNCH_TAPS = tdc_pkg::LAUNCH_TAPS,
  parameter int unsigned POS_TAPS    = tdc_pkg::POS_TAPS,
  parameter int unsigned NEG_TAPS    = tdc_pkg::NEG_TAPS,
  parameter real         RISE_PS     = tdc_pkg::RISE_PS,
  parameter real         FALL_PS     = tdc_pkg::FALL_PS
) (
  input  logic                   hit,
  output logic [LAUNCH_TAPS-1:0] taps,
  output logic                   pulse_out
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned N_EL = LAUNCH_TAPS / 2;
  localparam int unsigned N_C8 = N_EL / 8;
  // Element index of each configuring element, counted from the chain input.
  localparam int unsigned CFG3 = N_EL - 1;
  localparam int unsigned CFG2 = CFG3 - POS_TAPS / 2;
  localparam int unsigned CFG1 = CFG2 - NEG_TAPS / 2;
  localparam int unsigned CFG0 = CFG1 - POS_TAPS / 2;

  initial begin
    assert (LAUNCH_TAPS % 16 == 0) else $error("LAUNCH_TAPS must fill whole CARRY8s");
    assert (2 * POS_TAPS + NEG_TAPS < LAUNCH_TAPS) else $error("pattern longer than launcher");
  end

  logic cc [N_C8 + 1];
  assign cc[0] = 1'b0; // the "0" fed into the first element

  for (genvar k = 0; k < N_C8; k++) begin : g_c8
    logic [7:0] s, di, o, co;
    for (genvar i = 0; i < 8; i++) begin : g_cfg
      localparam int unsigned E = 8 * k + i;
      if (E == CFG0 || E == CFG2) begin : g_one
        assign s[i]  = hit;
        assign di[i] = 1'b1;
      end else if (E == CFG1 || E == CFG3) begin : g_zero
        assign s[i]  = hit;
        assign di[i] = 1'b0;
      end else begin : g_pass
        assign s[i]  = 1'b1;
        assign di[i] = 1'b0;
      end
      assign taps[2*E]   = o[i];
      assign taps[2*E+1] = co[i];
    end
    carry8 #(.RISE_PS(RISE_PS), .FALL_PS(FALL_PS)) u_carry8 (.ci(cc[k]), .s(s), .di(di), .o(o), .co(co));
    assign cc[k+1] = co[7];
  end

  assign pulse_out = cc[N_C8];
endmodule
