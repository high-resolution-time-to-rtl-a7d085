// tb_coarse_counter -- counts clock edges after reset, checks the count and
// its wrap-around at 2**W (W = 4 here), and a second reset.
module tb_coarse_counter;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned W = 4;
  logic clk = 1'b0, rst;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  coarse_counter #(.W(W)) dut (.clk(clk), .rst(rst), .count(count));
  always #1111.111 clk = ~clk;

  initial begin
    #1000000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++) begin
      rst = 1'b1;
      repeat (2) @(posedge clk);
      #1 rst = 1'b0;
      checks++; if (count != 0) failures++;
      for (int n = 1; n < 40; n++) begin
        @(posedge clk); #1;
        checks++;
        if (count != W'(n % (1 << W))) begin failures++; $display("FAIL count %0d at %0d", count, n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
