// tb_carry8 -- checks the CARRY8 delay-cell model: MUX function of every
// element (pass carry when s = 1, take di when s = 0), O = S xor CI, and the
// propagation timing: CO of element i follows the carry input after (i + 1)
// rise delays for a rising and (i + 1) fall delays for a falling carry, O
// half an element delay after its carry input.
module tb_carry8;
  timeunit 1ps;
  timeprecision 1fs;

  localparam real R = 3.0, F = 5.0;
  logic       ci;
  logic [7:0] s, di, o, co;
  int checks = 0, failures = 0;

  carry8 #(.RISE_PS(R), .FALL_PS(F)) dut (.ci(ci), .s(s), .di(di), .o(o), .co(co));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  // Reference for the settled outputs.
  function automatic logic [15:0] settled(input logic c0, input logic [7:0] sv, input logic [7:0] dv);
    logic c = c0;
    logic [7:0] ro, rc;
    for (int i = 0; i < 8; i++) begin
      ro[i] = sv[i] ^ c;
      c = sv[i] ? c : dv[i];
      rc[i] = c;
    end
    return {ro, rc};
  endfunction

  initial begin
    #20000 failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Timing through an all-propagate cell.
    s = 8'hFF; di = 8'h00; ci = 1'b0;
    #100;
    check(co == 8'h00 && o == 8'hFF, "all-propagate settle low");
    for (int edge_dir = 1; edge_dir >= 0; edge_dir--) begin
      realtime t0, d;
      d = edge_dir ? R : F;
      ci = 1'(edge_dir);
      t0 = $realtime;
      for (int i = 0; i < 8; i++) begin
        #(t0 + d * (i + 1) - 0.1 - $realtime);
        check(co[i] == 1'(!edge_dir), $sformatf("co[%0d] not yet switched (dir %0d)", i, edge_dir));
        #0.2;
        check(co[i] == 1'(edge_dir), $sformatf("co[%0d] switched after %0d delays (dir %0d)", i, i + 1, edge_dir));
      end
      #100;
    end
    ci = 1'b1;
    #100;
    check(o == 8'h00, "O inverted carry when s=1");
    // Random functional checks on the settled outputs.
    for (int n = 0; n < 200; n++) begin
      ci = 1'($urandom); s = 8'($urandom); di = 8'($urandom);
      #(10 * F);
      check({o, co} == settled(ci, s, di), "settled MUX/XOR function");
    end
    // O timing: O[0] changes D/2 after ci.
    s = 8'hFF; di = 8'h00; ci = 1'b0; #(20 * F);
    ci = 1'b1;
    #(R / 2 - 0.1); check(o[0] == 1'b1, "o[0] before R/2");
    #0.2;           check(o[0] == 1'b0, "o[0] after R/2");
    #(20 * F);
    ci = 1'b0;
    #(F / 2 - 0.1); check(o[0] == 1'b0, "o[0] before F/2");
    #0.2;           check(o[0] == 1'b1, "o[0] after F/2");
    #(20 * F);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
