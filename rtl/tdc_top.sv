// tdc_top -- two-channel wave-union TDC: a start channel and a stop channel
// driven by the same sampling clock (450 MHz in the reference setup).
//
// Each channel turns the rising edge of its hit input into a coarse code
// (clock periods) and a fine code (position of the four-edge wave-union
// pattern, summed over 64 sub-TDLs). A time interval follows as
//   TI = (n - m) * T + (tau_start - tau_stop)
// with m, n the coarse codes of start and stop and tau the fine times after
// calibration; that arithmetic, and the code-density calibration of the bins,
// are left to whatever collects the codes. Both channels have their own
// coarse counter, reset together, so their counts are always equal.
// Latency and handshake are those of tdc_channel: one meas_valid pulse per
// hit, 2 + clog2(4 * N_SUB) cycles after the sampling edge.
// start_fine_now / stop_fine_now give each channel's fine code every cycle
// (the idle code when no hit is in flight), needed for calibration.
// From the paper: two identical channels on one clock (Fig. 1a). Own choice:
// the port list and the per-channel complete flags.
module tdc_top #(
  parameter int unsigned N_TAPS      = tdc_pkg::N_TAPS,
  parameter int unsigned N_SUB       = tdc_pkg::N_SUB,
  parameter int unsigned LAUNCH_TAPS = tdc_pkg::LAUNCH_TAPS,
  parameter int unsigned POS_TAPS    = tdc_pkg::POS_TAPS,
  parameter int unsigned NEG_TAPS    = tdc_pkg::NEG_TAPS,
  parameter int unsigned COARSE_W    = tdc_pkg::COARSE_W,
  parameter real         RISE_PS     = tdc_pkg::RISE_PS,
  parameter real         FALL_PS     = tdc_pkg::FALL_PS,
  localparam int unsigned FINE_W = $clog2(N_TAPS / N_SUB) + $clog2(4 * N_SUB)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                hit_start,
  input  logic                hit_stop,
  output logic                start_valid,
  output logic [COARSE_W-1:0] start_coarse,
  output logic [FINE_W-1:0]   start_fine,
  output logic                start_complete,
  output logic                stop_valid,
  output logic [COARSE_W-1:0] stop_coarse,
  output logic [FINE_W-1:0]   stop_fine,
  output logic                stop_complete,
  output logic [FINE_W-1:0]   start_fine_now,
  output logic [FINE_W-1:0]   stop_fine_now
);
  timeunit 1ps;
  timeprecision 1fs;

  tdc_channel #(.N_TAPS(N_TAPS), .N_SUB(N_SUB), .LAUNCH_TAPS(LAUNCH_TAPS),
                .POS_TAPS(POS_TAPS), .NEG_TAPS(NEG_TAPS), .COARSE_W(COARSE_W),
                .RISE_PS(RISE_PS), .FALL_PS(FALL_PS))
    u_start (.clk(clk), .rst(rst), .hit(hit_start), .meas_valid(start_valid),
             .coarse(start_coarse), .fine(start_fine), .complete(start_complete),
             .fine_now(start_fine_now));

  tdc_channel #(.N_TAPS(N_TAPS), .N_SUB(N_SUB), .LAUNCH_TAPS(LAUNCH_TAPS),
                .POS_TAPS(POS_TAPS), .NEG_TAPS(NEG_TAPS), .COARSE_W(COARSE_W),
                .RISE_PS(RISE_PS), .FALL_PS(FALL_PS))
    u_stop (.clk(clk), .rst(rst), .hit(hit_stop), .meas_valid(stop_valid),
            .coarse(stop_coarse), .fine(stop_fine), .complete(stop_complete),
            .fine_now(stop_fine_now));
endmodule
