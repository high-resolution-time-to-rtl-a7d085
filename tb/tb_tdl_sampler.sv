// tb_tdl_sampler -- random tap vectors; checks that the registered code
// re-inverts the O (even) taps, that it appears exactly one clock edge after
// the taps, and that sub-TDL k bit j equals tap k + N_SUB * j.
module tb_tdl_sampler;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NT = 1920, NS = 64, SL = NT / NS;

  logic                      clk = 1'b0;
  logic [NT-1:0]             taps, prev, cur;
  logic [NT-1:0]             therm;
  logic [NS-1:0][SL-1:0]     sub_code;
  int checks = 0, failures = 0;

  tdl_sampler #(.N_TAPS(NT), .N_SUB(NS)) dut (.clk(clk), .taps(taps), .therm(therm), .sub_code(sub_code));

  always #1111.111 clk = ~clk;

  function automatic logic [NT-1:0] rnd();
    logic [NT-1:0] r;
    for (int i = 0; i < int'(NT); i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #1000000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    taps = rnd();
    @(posedge clk);
    for (int n = 0; n < 50; n++) begin
      prev = taps;
      #100 taps = rnd();            // changes after the edge: must not show yet
      #100;
      for (int i = 0; i < int'(NT); i++) begin
        checks++;
        if (therm[i] !== (prev[i] ^ (i % 2 == 0))) begin
          failures++;
          if (failures < 10) $display("FAIL therm[%0d]", i);
        end
      end
      cur = taps;
      @(posedge clk);
      #1;
      for (int k = 0; k < int'(NS); k++)
        for (int j = 0; j < int'(SL); j++) begin
          checks++;
          if (sub_code[k][j] !== (cur[k + NS * j] ^ ((k + NS * j) % 2 == 0))) begin
            failures++;
            if (failures < 10) $display("FAIL sub_code[%0d][%0d]", k, j);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
