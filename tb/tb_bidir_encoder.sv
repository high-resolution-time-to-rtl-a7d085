// tb_bidir_encoder -- drives one sub-TDL code per clock and checks the four
// one-hot codes (one cycle later) and the four binary positions (two cycles
// later) against positions found directly from how the code was built:
// a lower 1-block [a, a+w1-1], a gap of g zeros, an upper 1-block ending at
// top. For a gap narrower than PAT_WIN the expected result is
//   rising pattern = a-1, rising edge = a+w1+g-1,
//   falling pattern = top, falling edge = a+w1-1.
// For a gap of PAT_WIN or more (the failure case of the encoder) both "10"
// positions pass the rising pattern detector, both "01" positions the
// falling one, and the edge detectors give nothing. An all-zero code finds
// nothing.
module tb_bidir_encoder;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned SL = 30, PW = 5, POS_W = $clog2(SL);

  logic                    clk = 1'b0;
  logic [SL-1:0]           code;
  logic [3:0][SL-1:0]      onehot;
  logic [3:0][POS_W-1:0]   pos;
  logic [3:0]              found;
  int checks = 0, failures = 0;
  int n_narrow = 0, n_wide = 0;

  bidir_encoder #(.SUB_LEN(SL), .PAT_WIN(PW)) dut (.clk(clk), .code(code), .onehot(onehot), .pos(pos), .found(found));

  always #1111.111 clk = ~clk;

  // expected one-hot codes of the code applied one and two cycles ago
  logic [3:0][SL-1:0] exp1, exp2;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  function automatic logic [SL-1:0] bit_at(input int i);
    return (i >= 0 && i < int'(SL)) ? (SL'(1) << i) : '0;
  endfunction

  initial begin
    #10000000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, w1, g, w2, top;
    logic [3:0][SL-1:0] e;
    code = '0;
    exp1 = '0;
    exp2 = '0;
    repeat (3) @(posedge clk);
    #1;
    for (int n = 0; n < 3000; n++) begin
      // build the next code
      if (n % 50 == 7) begin
        code = '0;
        e = '0;
      end else begin
        a  = $urandom_range(1, 6);
        w1 = $urandom_range(1, 3);
        g  = (n % 5 == 0) ? $urandom_range(PW, PW + 3) : $urandom_range(1, PW - 1);
        w2 = $urandom_range(1, 3);
        top = a + w1 + g + w2 - 1;
        if (top > int'(SL) - 1) begin a -= top - (SL - 1); top = SL - 1; end
        if (a < 1) begin a = 1; top = a + w1 + g + w2 - 1; end
        // shift the whole train up at random
        begin
          int sh = $urandom_range(0, SL - 1 - top);
          a += sh; top += sh;
        end
        code = '0;
        for (int i = a; i < a + w1; i++) code[i] = 1'b1;
        for (int i = a + w1 + g; i <= top; i++) code[i] = 1'b1;
        if (g < int'(PW)) begin
          n_narrow++;
          e[0] = bit_at(a - 1);
          e[1] = bit_at(a + w1 + g - 1);
          e[2] = bit_at(top);
          e[3] = bit_at(a + w1 - 1);
        end else begin
          n_wide++;
          e[0] = bit_at(a - 1) | bit_at(a + w1 + g - 1);
          e[1] = '0;
          e[2] = bit_at(top) | bit_at(a + w1 - 1);
          e[3] = '0;
        end
      end
      @(posedge clk);
      exp2 = exp1;
      exp1 = e;
      #1;
      for (int k = 0; k < 4; k++) begin
        check(onehot[k] == exp1[k], $sformatf("onehot[%0d] = %h, expected %h (code %b)", k, onehot[k], exp1[k], code));
        // binary output lags one more cycle: it still describes exp2
        check(found[k] == (exp2[k] != '0), $sformatf("found[%0d]", k));
        if (exp2[k] != '0 && $onehot(exp2[k]))
          for (int i = 0; i < int'(SL); i++)
            if (exp2[k][i]) check(pos[k] == POS_W'(i), $sformatf("pos[%0d] = %0d, expected %0d", k, pos[k], i));
      end
    end
    check(n_narrow > 100 && n_wide > 100, "both gap cases exercised");
    $display("narrow-gap codes %0d, wide-gap codes %0d", n_narrow, n_wide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
