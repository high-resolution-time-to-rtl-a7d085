// tb_tdc_top -- end-to-end test of the two-channel TDC at its full default
// size (1920 taps, 64 sub-TDLs, 368 launcher taps) with a 450 MHz clock.
//
// Reference model: with no hit, the launcher holds 1-blocks at taps
// [94, 173] and [286, 365]; a hit tau before a sampling edge moves the upper
// end of each block (a rising transition) up by 2 * tau / RISE_PS taps and
// the lower end (a falling transition) by 2 * tau / FALL_PS taps. Sub-TDL k sees taps k + 64 j, so the
// expected edge positions, and their sum, follow from counting taps below
// each block boundary. The testbench checks against that model (within
// FINE_TOL codes, for the quantisation of the shift):
//   * the idle fine code of both channels, constant over time;
//   * a sweep of tau across the clock period: fine code, monotonic growth,
//     coarse code, all four edges found in every sub-TDL, and the latency of
//     meas_valid (10 cycles after the sampling edge);
//   * time intervals 0 .. 100 ns in 5 ns steps at random clock phases, the
//     interval recovered as (n - m) * T + tau_start - tau_stop;
//   * the TI = 0 case in which start and stop straddle a clock edge, so the
//     coarse codes differ by one (the stop path carries a 206.73 ps offset);
//   * a hit held high for many cycles: one measurement only, and the fine code
//     drops once the wave has left the chain.
// Each mechanism is counted, and one that never happened counts a failure.
module tb_tdc_top;
  timeunit 1ps;
  timeprecision 1fs;

  localparam real T   = 2222.222;  // 450 MHz
  localparam real DR  = tdc_pkg::RISE_PS;  // element delays of the chain model
  localparam real DF  = tdc_pkg::FALL_PS;
  localparam real CODES_PER_PS = 4.0 / DR + 4.0 / DF;
  localparam int  LAT = 10;        // sampling edge to meas_valid
  localparam int  FINE_TOL = 6;
  localparam real TI_TOL   = 6.0;  // ps

  logic        clk = 1'b0, rst = 1'b1;
  logic        hit_start = 1'b0, hit_stop = 1'b0;
  logic        start_valid, stop_valid, start_complete, stop_complete;
  logic [15:0] start_coarse, stop_coarse;
  logic [12:0] start_fine, stop_fine, start_fine_now, stop_fine_now;

  tdc_top dut (
    .clk(clk), .rst(rst), .hit_start(hit_start), .hit_stop(hit_stop),
    .start_valid(start_valid), .start_coarse(start_coarse), .start_fine(start_fine),
    .start_complete(start_complete),
    .stop_valid(stop_valid), .stop_coarse(stop_coarse), .stop_fine(stop_fine),
    .stop_complete(stop_complete),
    .start_fine_now(start_fine_now), .stop_fine_now(stop_fine_now));

  int checks = 0, failures = 0;
  int n_start_meas = 0, n_stop_meas = 0, n_cross = 0, n_ti = 0, n_idle = 0, n_left = 0, n_sweep = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  // ---- clock, edge counter mirroring the coarse counter ----------------------
  initial forever #(T / 2) clk = ~clk;   // posedge k at T/2 + k*T
  int unsigned edge_no = 0;   // number of posedges so far
  int unsigned cnt = 0;       // mirror of the coarse counter
  always @(posedge clk) begin
    edge_no++;
    cnt = rst ? 0 : cnt + 1;
  end
  function automatic realtime edge_time(input int unsigned k);
    return T / 2 + k * T;     // time of the (k+1)-th posedge
  endfunction

  // ---- reference model of the fine code --------------------------------------
  // number of taps k + 64 j (j = 0..29) strictly below x
  function automatic int below(input int k, input real x);
    int c = 0;
    for (int j = 0; j < 30; j++) if (real'(k + 64 * j) < x) c++;
    return c;
  endfunction
  function automatic int model_fine(input real tau);
    real sf = (tau <= 0.0) ? 0.0 : 2.0 * tau / DF;
    real sr = (tau <= 0.0) ? 0.0 : 2.0 * tau / DR;
    int f = 0;
    for (int k = 0; k < 64; k++) begin
      f += below(k, 94.0 + sf) - 1;   // lower end of the lower block
      f += below(k, 174.0 + sr) - 1;  // upper end of the lower block
      f += below(k, 286.0 + sf) - 1;  // lower end of the upper block
      f += below(k, 366.0 + sr) - 1;  // upper end of the upper block
    end
    return f;
  endfunction

  // ---- result collection ---------------------------------------------------
  typedef struct { int unsigned coarse; int fine; bit complete; int unsigned at_edge; } meas_t;
  meas_t start_q[$], stop_q[$];
  always @(posedge clk) begin
    #1;
    if (start_valid) begin start_q.push_back('{start_coarse, start_fine, start_complete, edge_no}); n_start_meas++; end
    if (stop_valid)  begin stop_q.push_back('{stop_coarse, stop_fine, stop_complete, edge_no}); n_stop_meas++; end
  end

  int idle_start, idle_stop;

  // hit pulse of width w at absolute time t; returns nothing, runs in a fork
  task automatic pulse(ref logic h, input realtime t, input realtime w);
    #(t - $realtime);
    h = 1'b1;
    #(w);
    h = 1'b0;
  endtask

  // Expected values of a hit at absolute time t.
  function automatic int unsigned sample_edge(input realtime t);
    int unsigned k = 0;
    while (edge_time(k) <= t) k++;
    return k;                 // index: posedge number k+1 samples it
  endfunction

  // One start/stop measurement; returns the measured and true TI.
  task automatic measure(input realtime t_start, input realtime ti, input bit verbose,
                         output real ti_meas);
    int unsigned ks, kp;
    realtime tau_s, tau_p;
    meas_t ms, mp;
    int dc, dfs, dfp;
    start_q.delete(); stop_q.delete();
    ks = sample_edge(t_start);
    kp = sample_edge(t_start + ti);
    tau_s = edge_time(ks) - t_start;
    tau_p = edge_time(kp) - (t_start + ti);
    fork
      pulse(hit_start, t_start, 3 * T);
      pulse(hit_stop, t_start + ti, 3 * T);
    join
    #((kp - ks + LAT + 14) * T);
    check(start_q.size() == 1 && stop_q.size() == 1,
          $sformatf("one result per channel (%0d, %0d)", start_q.size(), stop_q.size()));
    ti_meas = 0.0;
    if (start_q.size() == 1 && stop_q.size() == 1) begin
      ms = start_q[0]; mp = stop_q[0];
      // latency: valid seen after posedge number (k+1) + LAT
      check(ms.at_edge == ks + 1 + LAT, $sformatf("start latency edge %0d vs %0d", ms.at_edge, ks + 1 + LAT));
      check(mp.at_edge == kp + 1 + LAT, $sformatf("stop latency edge %0d vs %0d", mp.at_edge, kp + 1 + LAT));
      // coarse: counter value held before the sampling edge (edge index ks -> value ks - reset edges)
      check(int'(mp.coarse) - int'(ms.coarse) == int'(kp) - int'(ks), "coarse difference");
      check(ms.complete && mp.complete, "all edges found");
      check(ms.fine - model_fine(tau_s) <= FINE_TOL && model_fine(tau_s) - ms.fine <= FINE_TOL,
            $sformatf("start fine %0d vs model %0d (tau %0.2f)", ms.fine, model_fine(tau_s), tau_s));
      check(mp.fine - model_fine(tau_p) <= FINE_TOL && model_fine(tau_p) - mp.fine <= FINE_TOL,
            $sformatf("stop fine %0d vs model %0d (tau %0.2f)", mp.fine, model_fine(tau_p), tau_p));
      dc = int'(mp.coarse) - int'(ms.coarse);
      dfs = ms.fine - idle_start;
      dfp = mp.fine - idle_stop;
      ti_meas = dc * T + dfs / CODES_PER_PS - dfp / CODES_PER_PS;
      if (verbose) $display("TI %0.2f ps measured %0.2f ps (coarse %0d/%0d fine %0d/%0d)",
                            ti, ti_meas, ms.coarse, mp.coarse, ms.fine, mp.fine);
    end
  endtask

  initial begin
    #(20000 * T) failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ti_meas;
    int prev_fine;
    realtime t0;
    repeat (5) @(posedge clk);
    #1 rst = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    #1;
    // ---- idle code ----
    idle_start = start_fine_now;
    idle_stop  = stop_fine_now;
    $display("idle fine codes %0d %0d, model %0d", idle_start, idle_stop, model_fine(0.0));
    check(idle_start == idle_stop, "both channels share the idle code");
    check(idle_start - model_fine(0.0) <= FINE_TOL && model_fine(0.0) - idle_start <= FINE_TOL, "idle code vs model");
    for (int i = 0; i < 5; i++) begin
      @(posedge clk); #1;
      check(start_fine_now == idle_start && stop_fine_now == idle_stop, "idle code constant");
      check(!start_valid && !stop_valid, "no measurement without hit");
      n_idle++;
    end

    // ---- tau sweep, start and stop together (TI = 0) ----
    prev_fine = -1;
    for (int i = 0; i < 40; i++) begin
      automatic realtime tau = 25.0 + i * (T - 50.0) / 39.0;
      t0 = edge_time(sample_edge($realtime) + 2) - tau;
      measure(t0, 0.0, 0, ti_meas);
      if (start_q.size() == 1) begin
        check(start_q[0].fine >= prev_fine, "fine code grows with tau");
        check(start_q[0].fine == stop_q[0].fine, "channels agree at TI = 0");
        prev_fine = start_q[0].fine;
        n_sweep++;
      end
      check(ti_meas < TI_TOL && ti_meas > -TI_TOL, $sformatf("TI = 0 measured %0.2f", ti_meas));
    end
    $display("fine code span over one period: %0d .. %0d", model_fine(25.0), prev_fine);

    // ---- TI 0 .. 100 ns in 5 ns steps, random phase ----
    for (int s = 0; s <= 20; s++) begin
      for (int r = 0; r < 3; r++) begin
        automatic realtime ti = s * 5000.0;
        automatic realtime ph = 30.0 + ($urandom_range(0, 1000) / 1000.0) * (T - 60.0);
        t0 = edge_time(sample_edge($realtime) + 2) - ph;
        // keep the stop hit away from a clock edge by more than 25 ps
        begin
          automatic realtime tp = t0 + ti;
          automatic realtime dst = edge_time(sample_edge(tp)) - tp;
          if (dst < 25.0) t0 -= 50.0;
          if (dst > T - 25.0) t0 += 50.0;
        end
        measure(t0, ti, r == 0 && s % 5 == 0, ti_meas);
        check(ti_meas - ti < TI_TOL && ti - ti_meas < TI_TOL,
              $sformatf("TI %0.1f ps measured %0.2f ps", ti, ti_meas));
        n_ti++;
      end
    end

    // ---- TI = 0 with a stop-path offset straddling a clock edge (coarse n = m + 1) ----
    for (int i = 0; i < 5; i++) begin
      automatic realtime off = 206.73;
      t0 = edge_time(sample_edge($realtime) + 2) - 30.0 - i * 30.0;  // start just before an edge
      measure(t0, off, 1, ti_meas);
      if (stop_q.size() == 1 && start_q.size() == 1 && stop_q[0].coarse == start_q[0].coarse + 1) n_cross++;
      check(ti_meas - off < TI_TOL && off - ti_meas < TI_TOL, $sformatf("offset TI measured %0.2f", ti_meas));
    end

    // ---- long hit: one measurement, then the wave leaves the chain ----
    start_q.delete();
    t0 = edge_time(sample_edge($realtime) + 2) - 500.0;
    #(t0 - $realtime);
    hit_start = 1'b1;
    repeat (LAT + 6) @(posedge clk);
    #1;
    check(start_fine_now < idle_start, "fine code drops once the wave has left the chain");
    if (start_fine_now < idle_start) n_left++;
    repeat (10) @(posedge clk);
    check(start_q.size() == 1, "one measurement for a long hit");
    hit_start = 1'b0;
    repeat (LAT + 6) @(posedge clk);
    #1;
    check(start_fine_now == idle_start, "idle code restored after the hit");

    // ---- mechanisms seen ----
    $display("measurements start %0d stop %0d, sweep %0d, TI %0d, coarse crossings %0d, idle %0d, wave left %0d",
             n_start_meas, n_stop_meas, n_sweep, n_ti, n_cross, n_idle, n_left);
    check(n_start_meas > 0 && n_stop_meas > 0, "both channels measured");
    check(n_sweep > 0, "tau sweep ran");
    check(n_ti > 0, "TI measurements ran");
    check(n_cross > 0, "coarse code crossing (n = m + 1) seen");
    check(n_idle > 0, "idle code seen");
    check(n_left > 0, "wave left the chain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
