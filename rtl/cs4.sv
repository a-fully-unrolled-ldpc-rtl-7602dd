// cs4: 4-input compare-and-select unit of the check-node sorting tree.
//
// Returns the smallest and second-smallest of four unsigned magnitudes (min1 <= min2).
// When used to merge two already sorted pairs (a0<=a1, b0<=b1) it gives the two smallest of
// the union, so a tree of these units sorts out the two minima of any number of inputs.
// The unit is purely combinational; ties may be returned in either order because only the
// values, not the positions, are used downstream (this design's check node compares each
// input with min1 instead of tracking the index of the minimum).
module cs4 #(
  parameter int unsigned W = ldpc_pkg::QMSG - 1   // magnitude bits
) (
  input  logic [W-1:0] in0,
  input  logic [W-1:0] in1,
  input  logic [W-1:0] in2,
  input  logic [W-1:0] in3,
  output logic [W-1:0] min1,
  output logic [W-1:0] min2
);
  logic [W-1:0] lo_a, hi_a, lo_b, hi_b;

  always_comb begin
    // sort each pair
    lo_a = (in1 < in0) ? in1 : in0;
    hi_a = (in1 < in0) ? in0 : in1;
    lo_b = (in3 < in2) ? in3 : in2;
    hi_b = (in3 < in2) ? in2 : in3;
    // merge
    if (lo_b < lo_a) begin
      min1 = lo_b;
      min2 = (hi_b < lo_a) ? hi_b : lo_a;
    end else begin
      min1 = lo_a;
      min2 = (hi_a < lo_b) ? hi_a : lo_b;
    end
  end
endmodule
