// tb_wu_launcher -- checks the wave-union launcher model at its default size.
// Standby: the carry outputs must hold zeros, a block of POS_TAPS/2 ones, a
// gap of NEG_TAPS/2 zeros, another POS_TAPS/2 ones, then zeros. Launch: the
// launcher output must show exactly four transitions (0-1-0-1-0) whose
// widths are POS, NEG and POS taps times half an element delay. Return to
// standby must restore the stored pattern.
module tb_wu_launcher;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned LT = 368, POS = 80, NEG = 112;
  localparam real D = 3.56;

  logic          hit;
  logic [LT-1:0] taps;
  logic          pulse_out;
  int checks = 0, failures = 0;

  wu_launcher #(.LAUNCH_TAPS(LT), .POS_TAPS(POS), .NEG_TAPS(NEG), .RISE_PS(D), .FALL_PS(D))
    dut (.hit(hit), .taps(taps), .pulse_out(pulse_out));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  // Run lengths of the CO taps (odd indices), starting at the chain input.
  task automatic check_standby(input string tag);
    int runs[$];
    logic cur;
    int len;
    cur = taps[1]; len = 0;
    for (int e = 0; e < int'(LT / 2); e++) begin
      if (taps[2*e+1] == cur) len++;
      else begin runs.push_back(len); cur = taps[2*e+1]; len = 1; end
    end
    runs.push_back(len);
    check(taps[1] == 1'b0, {tag, ": chain starts with zeros"});
    check(runs.size() == 5, $sformatf("%s: %0d runs, expected 5", tag, runs.size()));
    if (runs.size() == 5) begin
      check(runs[1] == int'(POS / 2), $sformatf("%s: first 1-block %0d elements", tag, runs[1]));
      check(runs[2] == int'(NEG / 2), $sformatf("%s: gap %0d elements", tag, runs[2]));
      check(runs[3] == int'(POS / 2), $sformatf("%s: second 1-block %0d elements", tag, runs[3]));
      check(runs[0] + runs[1] + runs[2] + runs[3] + runs[4] == int'(LT / 2), {tag, ": length"});
    end
    check(pulse_out == 1'b0, {tag, ": output low in standby"});
  endtask

  realtime edges[$];
  always @(pulse_out) if ($realtime > 1.0) edges.push_back($realtime);

  initial begin
    #100000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0;
    hit = 1'b0;
    #2000;
    check_standby("standby");
    edges.delete();
    t0 = $realtime;
    hit = 1'b1;
    #3000;
    check(edges.size() == 4, $sformatf("%0d output transitions, expected 4", edges.size()));
    if (edges.size() == 4) begin
      check(edges[0] - t0 < 2 * D, "first edge leaves within two elements");
      check(edges[1] - edges[0] > (POS / 2 - 0.5) * D && edges[1] - edges[0] < (POS / 2 + 0.5) * D,
            $sformatf("positive pulse %0.2f ps", edges[1] - edges[0]));
      check(edges[2] - edges[1] > (NEG / 2 - 0.5) * D && edges[2] - edges[1] < (NEG / 2 + 0.5) * D,
            $sformatf("negative pulse %0.2f ps", edges[2] - edges[1]));
      check(edges[3] - edges[2] > (POS / 2 - 0.5) * D && edges[3] - edges[2] < (POS / 2 + 0.5) * D,
            $sformatf("second positive pulse %0.2f ps", edges[3] - edges[2]));
    end
    check(pulse_out == 1'b0, "train has left, output low");
    hit = 1'b0;
    #2000;
    check_standby("re-stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
