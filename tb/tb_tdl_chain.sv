// tb_tdl_chain -- checks the delay-line model: after a step enters at
// pulse_in, carry tap of element e must switch (e + 1) element delays later
// and the O tap of element e (inverted) e + 1/2 delays later. Sampled at
// random times away from the switching instants, for rising and falling
// steps.
module tb_tdl_chain;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned TT = 64;
  localparam real D = 4.0;

  logic          pulse_in;
  logic [TT-1:0] taps;
  int checks = 0, failures = 0;

  tdl_chain #(.TDL_TAPS(TT), .RISE_PS(D), .FALL_PS(D)) dut (.pulse_in(pulse_in), .taps(taps));

  initial begin
    #200000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, x, tsw;
    int jit;
    logic v, expv;
    pulse_in = 1'b0;
    #1000;
    for (int n = 0; n < 60; n++) begin
      v = ~pulse_in;
      t0 = $realtime;
      pulse_in = v;
      // sample at 6 random instants inside the propagation window
      for (int m = 0; m < 6; m++) begin
        jit = $urandom_range(0, 100);
        x = t0 + (m + 1) * (TT / 2 + 2) * D / 6.0 + (jit - 50) * D / 400.0;
        #(x - $realtime);
        for (int e = 0; e < int'(TT / 2); e++) begin
          tsw = (e + 1) * D;
          if ((x - t0 - tsw) > 0.05 || (x - t0 - tsw) < -0.05) begin
            expv = ((x - t0) > tsw) ? v : ~v;
            checks++;
            if (taps[2*e+1] !== expv) begin
              failures++;
              $display("FAIL co tap of element %0d at +%0.2f ps", e, x - t0);
            end
          end
          tsw = (e + 0.5) * D;
          if ((x - t0 - tsw) > 0.05 || (x - t0 - tsw) < -0.05) begin
            expv = ((x - t0) > tsw) ? ~v : v;
            checks++;
            if (taps[2*e] !== expv) begin
              failures++;
              $display("FAIL o tap of element %0d at +%0.2f ps", e, x - t0);
            end
          end
        end
      end
      #(TT * D);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
