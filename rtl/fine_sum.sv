// fine_sum -- pipelined adder tree that sums the edge positions of all
// sub-TDLs into the fine code.
//
// N_IN unsigned IN_W-bit values enter together; they are padded with zeros to
// the next power of two and added pairwise, one tree level per clock, so the
// sum appears LAT = clog2(N_IN) cycles later with OUT_W = IN_W + LAT bits.
// A valid flag travels alongside. Summing the positions of the same edge in
// all interleaved sub-TDLs interpolates them back to the full tap resolution,
// and summing all four edges averages the four wave-union measurements.
// From the paper: the subsets of all sub-TDLs are summed into the fine code.
// Own choice: a binary tree with a register after every level.
module fine_sum #(
  parameter int unsigned N_IN = 4 * tdc_pkg::N_SUB,
  parameter int unsigned IN_W = 5,
  localparam int unsigned LAT   = $clog2(N_IN),
  localparam int unsigned OUT_W = IN_W + LAT
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [N_IN-1:0][IN_W-1:0]  din,
  input  logic                       in_valid,
  output logic [OUT_W-1:0]           sum,
  output logic                       out_valid
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NP = 1 << LAT;

  // Level l holds NP >> l partial sums in one packed vector; level 0 is the
  // zero-padded input.
  for (genvar l = 0; l <= LAT; l++) begin : g_lvl
    logic [(NP >> l)-1:0][OUT_W-1:0] s;
    logic                            v;
    if (l == 0) begin : g_in
      for (genvar i = 0; i < NP; i++) begin : g_pad
        if (i < N_IN) begin : g_d
          assign s[i] = OUT_W'(din[i]);
        end else begin : g_z
          assign s[i] = '0;
        end
      end
      assign v = in_valid;
    end else begin : g_add
      for (genvar i = 0; i < (NP >> l); i++) begin : g_pair
        always_ff @(posedge clk) s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
      always_ff @(posedge clk)
        if (rst) v <= 1'b0;
        else     v <= g_lvl[l-1].v;
    end
  end

  assign sum       = g_lvl[LAT].s[0];
  assign out_valid = g_lvl[LAT].v;
endmodule
