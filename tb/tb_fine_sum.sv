// tb_fine_sum -- random inputs every cycle; the sum of each input set must
// appear exactly LAT = clog2(N_IN) cycles later, with its valid flag.
module tb_fine_sum;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned N = 256, W = 5, LAT = $clog2(N), OW = W + LAT;

  logic                  clk = 1'b0, rst;
  logic [N-1:0][W-1:0]   din;
  logic                  in_valid, out_valid;
  logic [OW-1:0]         sum;
  int checks = 0, failures = 0;

  fine_sum #(.N_IN(N), .IN_W(W)) dut (.clk(clk), .rst(rst), .din(din), .in_valid(in_valid), .sum(sum), .out_valid(out_valid));

  always #1111.111 clk = ~clk;

  int exp_sum [$];
  bit exp_vld [$];

  initial begin
    #10000000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    rst = 1'b1; in_valid = 1'b0; din = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < 400; n++) begin
      s = 0;
      for (int i = 0; i < int'(N); i++) begin
        din[i] = (n % 37 == 5) ? W'((1 << W) - 1) : W'($urandom);
        s += int'(din[i]);
      end
      in_valid = 1'($urandom);
      exp_sum.push_back(s);
      exp_vld.push_back(in_valid);
      @(posedge clk);
      #1;
      if (exp_sum.size() >= LAT) begin
        checks++;
        if (sum != OW'(exp_sum[0]) || out_valid != exp_vld[0]) begin
          failures++;
          $display("FAIL n=%0d sum %0d expected %0d valid %0b/%0b", n, sum, exp_sum[0], out_valid, exp_vld[0]);
        end
        void'(exp_sum.pop_front());
        void'(exp_vld.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
