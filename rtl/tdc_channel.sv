// tdc_channel -- one wave-union TDC channel (the start or the stop channel).
//
// A hit rising edge makes the launcher release its stored 0-1-0-1-0 pattern
// into the carry chain. At every clock edge the N_TAPS taps are sampled,
// split into N_SUB sub-TDLs, and every sub-TDL is encoded into four edge
// positions by its bidirectional encoder; the 4 * N_SUB positions are summed
// into the fine code. The further the pattern has travelled, the larger the
// fine code, so fine grows with tau, the time from the hit to the sampling
// edge. With no hit the stored pattern still sits in the launcher taps and
// fine holds a constant idle code.
//
// Measurement cycle: the hit line is also registered by the sampling clock.
// The first edge at which it reads 1 (after having read 0) is the edge whose
// sample holds the launched pattern; that sample gives the measurement, and
// the coarse counter value latched at the same edge gives the coarse code.
// meas_valid pulses for one cycle with coarse and fine of that measurement;
// complete says that all 4 * N_SUB edges were found. The hit must stay high
// until that edge and go low again (the pattern is re-stored) at least one
// chain delay before the next hit.
//
// Timestamp of a measurement: coarse * T - tau, with tau obtained from
// fine - idle code through a bin calibration outside this block.
// Timing: fine and complete follow the sampling edge by ENC_LAT + SUM_LAT
// = 2 + clog2(4 * N_SUB) cycles (10 at full size); fine_now gives the fine
// code of every cycle, including idle ones, with the same latency.
// From the paper: the chain of launcher, TDL, sampling DFFs, sub-TDL,
// bidirectional encoder, sum and coarse counter (Fig. 1a). Own choices: the
// hit-sampling flip-flop that marks the measurement cycle, the pipeline, the
// complete flag.
module tdc_channel #(
  parameter int unsigned N_TAPS      = tdc_pkg::N_TAPS,
  parameter int unsigned N_SUB       = tdc_pkg::N_SUB,
  parameter int unsigned LAUNCH_TAPS = tdc_pkg::LAUNCH_TAPS,
  parameter int unsigned POS_TAPS    = tdc_pkg::POS_TAPS,
  parameter int unsigned NEG_TAPS    = tdc_pkg::NEG_TAPS,
  parameter int unsigned PAT_WIN     = tdc_pkg::PAT_WIN,
  parameter int unsigned COARSE_W    = tdc_pkg::COARSE_W,
  parameter real         RISE_PS     = tdc_pkg::RISE_PS,
  parameter real         FALL_PS     = tdc_pkg::FALL_PS,
  localparam int unsigned SUB_LEN = N_TAPS / N_SUB,
  localparam int unsigned POS_W   = $clog2(SUB_LEN),
  localparam int unsigned SUM_LAT = $clog2(4 * N_SUB),
  localparam int unsigned FINE_W  = POS_W + SUM_LAT
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                hit,
  output logic                meas_valid,
  output logic [COARSE_W-1:0] coarse,
  output logic [FINE_W-1:0]   fine,
  output logic                complete,
  output logic [FINE_W-1:0]   fine_now
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned ENC_LAT = 2;
  localparam int unsigned TDL_TAPS = N_TAPS - LAUNCH_TAPS;

  // ---- carry chain: launcher followed by the delay line -------------------
  logic [LAUNCH_TAPS-1:0] l_taps;
  logic [TDL_TAPS-1:0]    d_taps;
  logic                   launch_out;

  wu_launcher #(.LAUNCH_TAPS(LAUNCH_TAPS), .POS_TAPS(POS_TAPS), .NEG_TAPS(NEG_TAPS),
                .RISE_PS(RISE_PS), .FALL_PS(FALL_PS))
    u_launcher (.hit(hit), .taps(l_taps), .pulse_out(launch_out));

  tdl_chain #(.TDL_TAPS(TDL_TAPS), .RISE_PS(RISE_PS), .FALL_PS(FALL_PS))
    u_tdl (.pulse_in(launch_out), .taps(d_taps));

  // ---- sampling DFFs and sub-TDLs -------------------------------------------
  logic [N_TAPS-1:0]              therm;
  logic [N_SUB-1:0][SUB_LEN-1:0]  sub_code;

  tdl_sampler #(.N_TAPS(N_TAPS), .N_SUB(N_SUB))
    u_sampler (.clk(clk), .taps({d_taps, l_taps}), .therm(therm), .sub_code(sub_code));

  // ---- measurement-cycle marker and coarse code ----------------------------
  logic                hit_q, hit_qq;
  logic [COARSE_W-1:0] count, coarse_s;

  coarse_counter #(.W(COARSE_W)) u_coarse (.clk(clk), .rst(rst), .count(count));

  always_ff @(posedge clk) begin
    if (rst) begin
      hit_q  <= 1'b0;
      hit_qq <= 1'b0;
    end else begin
      hit_q  <= hit;
      hit_qq <= hit_q;
    end
    coarse_s <= count; // value of the period that this edge closes
  end

  logic meas_s;
  assign meas_s = hit_q && !hit_qq;

  // ---- bidirectional encoders ---------------------------------------------
  logic [N_SUB-1:0][3:0][POS_W-1:0]   pos;
  logic [N_SUB-1:0][3:0]              found;
  logic [N_SUB-1:0][3:0][SUB_LEN-1:0] onehot;

  for (genvar k = 0; k < N_SUB; k++) begin : g_enc
    bidir_encoder #(.SUB_LEN(SUB_LEN), .PAT_WIN(PAT_WIN))
      u_enc (.clk(clk), .code(sub_code[k]), .onehot(onehot[k]), .pos(pos[k]), .found(found[k]));
  end

  // Marker and coarse code follow the encoder pipeline.
  logic [ENC_LAT-1:0]  meas_d;
  logic [COARSE_W-1:0] coarse_d [ENC_LAT + SUM_LAT];
  logic [SUM_LAT-1:0]  complete_d;

  always_ff @(posedge clk) begin
    if (rst) meas_d <= '0;
    else     meas_d <= {meas_d[ENC_LAT-2:0], meas_s};
    coarse_d[0] <= coarse_s;
    for (int i = 1; i < int'(ENC_LAT + SUM_LAT); i++) coarse_d[i] <= coarse_d[i-1];
    complete_d <= {complete_d[SUM_LAT-2:0], &found};
  end

  // ---- sum of all edge positions ------------------------------------------
  fine_sum #(.N_IN(4 * N_SUB), .IN_W(POS_W))
    u_sum (.clk(clk), .rst(rst), .din(pos), .in_valid(meas_d[ENC_LAT-1]),
           .sum(fine_now), .out_valid(meas_valid));

  assign fine     = fine_now;
  assign coarse   = coarse_d[ENC_LAT + SUM_LAT - 1];
  assign complete = complete_d[SUM_LAT-1];
endmodule
