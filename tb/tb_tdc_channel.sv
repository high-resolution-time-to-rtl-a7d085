// tb_tdc_channel -- one channel at a reduced size (480 taps, 16 sub-TDLs,
// 96-tap launcher with 20/28-tap pulses, so each pulse still spans more than
// one sub-TDL bin and the gap stays under the 5-tap detector window) and a
// 640 ps clock that the shorter chain covers.
//
// Reference model: the idle 1-blocks sit at taps [2*C0, 2*C1) and
// [2*C2, 2*C3) with C0..C3 the configuring elements; a hit tau before the
// sampling edge moves lower block ends by 2 * tau / FALL_PS taps and upper
// ends by 2 * tau / RISE_PS taps. Checks: idle code, a
// sweep of tau (fine code within FINE_TOL of the model and monotonic, coarse
// code equal to the mirrored counter, all edges found, meas_valid exactly
// 2 + clog2(64) = 8 cycles after the sampling edge), and no result without a
// hit.
module tb_tdc_channel;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NT = 480, NS = 16, LT = 96, POS = 20, NEG = 28;
  localparam real T = 640.0, DR = tdc_pkg::RISE_PS, DF = tdc_pkg::FALL_PS;
  localparam int LAT = 8, FINE_TOL = 6, SL = NT / NS;
  localparam int C3 = LT / 2 - 1, C2 = C3 - POS / 2, C1 = C2 - NEG / 2, C0 = C1 - POS / 2;

  logic        clk = 1'b0, rst = 1'b1, hit = 1'b0;
  logic        meas_valid, complete;
  logic [15:0] coarse;
  logic [10:0] fine, fine_now;
  int checks = 0, failures = 0;

  tdc_channel #(.N_TAPS(NT), .N_SUB(NS), .LAUNCH_TAPS(LT), .POS_TAPS(POS), .NEG_TAPS(NEG),
                .RISE_PS(DR), .FALL_PS(DF))
    dut (.clk(clk), .rst(rst), .hit(hit), .meas_valid(meas_valid), .coarse(coarse),
         .fine(fine), .complete(complete), .fine_now(fine_now));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  initial forever #(T / 2) clk = ~clk;
  int unsigned edge_no = 0, cnt = 0;
  always @(posedge clk) begin
    edge_no++;
    cnt = rst ? 0 : cnt + 1;
  end

  function automatic int below(input int k, input real x);
    int c = 0;
    for (int j = 0; j < SL; j++) if (real'(k + NS * j) < x) c++;
    return c;
  endfunction
  function automatic int model_fine(input real tau);
    real sf = 2.0 * tau / DF, sr = 2.0 * tau / DR;
    int f = 0;
    for (int k = 0; k < int'(NS); k++)
      f += below(k, 2 * C0 + sf) + below(k, 2 * C1 + sr) + below(k, 2 * C2 + sf) + below(k, 2 * C3 + sr) - 4;
    return f;
  endfunction

  int n_meas = 0;
  int unsigned got_edge, got_coarse;
  int got_fine;
  bit got_complete;
  always @(posedge clk) begin
    #1;
    if (meas_valid) begin
      n_meas++;
      got_edge = edge_no; got_coarse = coarse; got_fine = fine; got_complete = complete;
    end
  end

  initial begin
    #(5000 * T) failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev = -1, idle;
    int unsigned exp_coarse, exp_edge;
    repeat (4) @(posedge clk);
    #1 rst = 1'b0;
    repeat (LAT + 4) @(posedge clk);
    #1;
    idle = fine_now;
    $display("idle fine code %0d, model %0d", idle, model_fine(0.0));
    check(idle == model_fine(0.0) || (idle - model_fine(0.0) <= FINE_TOL && model_fine(0.0) - idle <= FINE_TOL),
          "idle code vs model");
    check(n_meas == 0, "no result without a hit");
    for (int i = 0; i < 60; i++) begin
      automatic real tau = 12.0 + i * (T - 24.0) / 59.0;
      // wait to a point just after an edge, then place the hit tau before the next-but-one edge
      @(posedge clk);
      #(2 * T - tau);
      exp_coarse = cnt;
      exp_edge = edge_no + 1 + LAT;
      n_meas = 0;
      hit = 1'b1;
      repeat (2) @(posedge clk);
      #1 hit = 1'b0;
      repeat (LAT + 4) @(posedge clk);
      #1;
      check(n_meas == 1, $sformatf("one result, got %0d", n_meas));
      check(got_edge == exp_edge, $sformatf("latency: edge %0d expected %0d", got_edge, exp_edge));
      check(got_coarse == exp_coarse, $sformatf("coarse %0d expected %0d", got_coarse, exp_coarse));
      check(got_complete, "all edges found");
      check(got_fine - model_fine(tau) <= FINE_TOL && model_fine(tau) - got_fine <= FINE_TOL,
            $sformatf("fine %0d model %0d tau %0.1f", got_fine, model_fine(tau), tau));
      check(got_fine >= prev, "fine grows with tau");
      prev = got_fine;
      check(fine_now == idle, "idle code after the hit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
