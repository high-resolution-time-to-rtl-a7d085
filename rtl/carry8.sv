// carry8 -- behavioural model of one CARRY8 carry-chain cell (not synthesizable
// logic: it stands for the FPGA primitive and carries its propagation delays).
//
// The cell is a chain of eight MUX-based delay elements. Element i passes its
// carry input on when its select s[i] is 1 and outputs di[i] when s[i] is 0:
//   co[i] = s[i] ? c[i] : di[i],   c[0] = ci, c[i+1] = co[i]
// and it has a sum output o[i] = s[i] ^ c[i]. In a delay line s is tied to 1,
// so o[i] is the inverted carry input; sampling both o and co doubles the
// number of taps (dual sampling).
// Timing (transport delays): a carry output that rises does so RISE_PS after
// its cause, one that falls FALL_PS after it. The o output follows its carry
// input after half the delay of that carry transition, so the taps in delay
// order are o[0], co[0], o[1], co[1], ... All outputs are first set at 1 fs
// so the chain settles from any start state.
// The MUX/O/CO structure follows the cell drawn in the paper; the O = S xor CI
// relation and the delay values are this model's own. Rising edges are faster
// than falling ones, as the paper observes for the carry chain; elements are
// otherwise identical (no bin-width mismatch).
module carry8 #(
  parameter real RISE_PS = tdc_pkg::RISE_PS, // element delay of a rising carry
  parameter real FALL_PS = tdc_pkg::FALL_PS  // element delay of a falling carry
) (
  input  logic       ci,
  input  logic [7:0] s,
  input  logic [7:0] di,
  output logic [7:0] o,
  output logic [7:0] co
);
  timeunit 1ps;
  timeprecision 1fs;

  for (genvar i = 0; i < 8; i++) begin : g_elem
    logic cin, c_nxt, o_nxt, c_q, o_q;
    if (i == 0) begin : g_first
      assign cin = ci;
    end else begin : g_next
      assign cin = g_elem[i-1].c_q;
    end
    assign c_nxt = s[i] ? cin : di[i];
    assign o_nxt = s[i] ^ cin;

    initial begin
      #0.001;
      c_q = c_nxt;
      o_q = o_nxt;
    end
    always @(c_nxt) c_q <= #(c_nxt ? RISE_PS : FALL_PS) c_nxt;
    // o rises when the carry input falls (s = 1), and the other way round
    always @(o_nxt) o_q <= #((o_nxt ^ s[i]) ? RISE_PS / 2.0 : FALL_PS / 2.0) o_nxt;

    assign co[i] = c_q;
    assign o[i]  = o_q;
  end
endmodule
