// bidir_encoder -- bidirectional encoder for one sub-TDL.
//
// The sub-TDL code (bit 0 = LSB, nearest the chain input) holds a train of
// two 1-blocks separated by a narrow 0-gap, e.g. MSB ...0001100110000... LSB.
// It has two "10" transitions (a 1 above a 0) and two "01" transitions. Plain
// edge detection would give dual-hot codes, so each direction uses two
// detectors per bit position n:
//   rising pattern detector  : code[n+1:n-4] == 100000    (6-input LUT)
//   rising edge detector     : code[n+1], code[n], prp[n] == 1,0,0 (3-input LUT)
//   falling pattern detector : code[n+5:n]   == 000001
//   falling edge detector    : code[n+1], code[n], fpp[n] == 0,1,0
// The pattern detector fires only on the transition followed by at least
// PAT_WIN zeros, i.e. not on the one that borders the narrow gap, so it gives
// a one-hot code. The edge detector sees the "10" (or "01") pattern, which is
// dual-hot, and removes the position the pattern detector found (an XOR of
// the two codes), leaving the other transition as a second one-hot code. The
// gap must be narrower than PAT_WIN taps of the sub-TDL, or both transitions
// pass the pattern detector and the codes are wrong.
//
// Bits beyond either end of the code are taken as 0.
// Output order (tdc_pkg::edge_e): 0 rising pattern, 1 rising edge, 2 falling
// pattern, 3 falling edge; pos is the bit index of each transition (n), found
// whether it was seen.
// Timing: the four one-hot codes are registered (cycle 1), converted to
// binary and registered again (cycle 2): latency 2, one code per clock.
// From the paper: both LUT truth tables and their input wiring. Own choice:
// the register stages and the zero padding at the ends.
module bidir_encoder #(
  parameter int unsigned SUB_LEN = tdc_pkg::N_TAPS / tdc_pkg::N_SUB,
  parameter int unsigned PAT_WIN = tdc_pkg::PAT_WIN,
  localparam int unsigned POS_W  = $clog2(SUB_LEN)
) (
  input  logic                         clk,
  input  logic [SUB_LEN-1:0]           code,
  output logic [3:0][SUB_LEN-1:0]      onehot,
  output logic [3:0][POS_W-1:0]        pos,
  output logic [3:0]                   found
);
  timeunit 1ps;
  timeprecision 1fs;

  import tdc_pkg::*;

  // Code padded with PAT_WIN zeros below and PAT_WIN + 1 zeros above.
  localparam int unsigned PW = SUB_LEN + 2 * PAT_WIN + 1;
  logic [PW-1:0] cp;
  assign cp = {{(PAT_WIN + 1){1'b0}}, code, {PAT_WIN{1'b0}}};

  logic [SUB_LEN-1:0] rise_pat, rise_edge, fall_pat, fall_edge;

  always_comb begin
    for (int n = 0; n < int'(SUB_LEN); n++) begin
      automatic int p = n + int'(PAT_WIN); // index of code[n] in cp
      // Rising edge generator: pattern 1 followed by PAT_WIN zeros toward LSB.
      rise_pat[n]  = cp[p+1] && (cp[p -: PAT_WIN] == '0);
      rise_edge[n] = cp[p+1] && !cp[p] && !rise_pat[n];
      // Falling edge generator: 1 with PAT_WIN zeros toward MSB.
      fall_pat[n]  = cp[p] && (cp[p+1 +: PAT_WIN] == '0);
      fall_edge[n] = !cp[p+1] && cp[p] && !fall_pat[n];
    end
  end

  always_ff @(posedge clk) begin
    onehot[EDGE_RISE_PAT]  <= rise_pat;
    onehot[EDGE_RISE_EDGE] <= rise_edge;
    onehot[EDGE_FALL_PAT]  <= fall_pat;
    onehot[EDGE_FALL_EDGE] <= fall_edge;
  end

  logic [3:0][POS_W-1:0] pos_c;
  logic [3:0]            found_c;
  for (genvar e = 0; e < 4; e++) begin : g_conv
    onehot2bin #(.N(SUB_LEN)) u_o2b (.onehot(onehot[e]), .bin(pos_c[e]), .found(found_c[e]));
  end

  always_ff @(posedge clk) begin
    pos   <= pos_c;
    found <= found_c;
  end
endmodule
