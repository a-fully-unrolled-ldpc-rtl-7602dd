// check_node: min-sum check node working directly on sign-magnitude message labels.
//
// Sorting unit: a tree of 4-input compare-and-select units (cs4). The first level takes the
// DC input magnitudes four at a time; every further level merges two (min1,min2) pairs with
// one cs4, until a single pair holds the two smallest magnitudes of all DC inputs.
// Output unit: output k carries min2 if input k's magnitude equals min1 and min1 otherwise
// (when two inputs share the minimum, min2 equals min1, so no index is needed), with sign
// = XOR of all input signs XOR input k's sign, i.e. the product of the other signs.
// Purely combinational; the registers sit in cn_stage.
// From the paper: sorting unit of 4-input CS units in a tree, two-minimum selection, sign-
// magnitude labels. This design's own choice: the equal-to-min1 test in place of an index.
// DC must be 4 times a power of two (32 in the design).
module check_node #(
  parameter int unsigned DC = ldpc_pkg::DC
) (
  input  logic [ldpc_pkg::QMSG-1:0] msg_in  [DC],
  output logic [ldpc_pkg::QMSG-1:0] msg_out [DC]
);
  localparam int unsigned Q  = ldpc_pkg::QMSG;
  localparam int unsigned W  = Q - 1;
  localparam int unsigned P0 = DC / 4;             // pairs after the first level
  localparam int unsigned LEVELS = $clog2(P0) + 1; // cs4 levels

  initial begin
    assert (DC % 4 == 0 && (P0 & (P0 - 1)) == 0)
      else $fatal(1, "check_node: DC must be 4 times a power of two");
  end

  logic [W-1:0] mag [DC];
  logic         sgn [DC];
  logic         sign_all;

  always_comb begin
    sign_all = 1'b0;
    for (int k = 0; k < DC; k++) begin
      mag[k]   = msg_in[k][W-1:0];
      sgn[k]   = msg_in[k][Q-1];
      sign_all = sign_all ^ msg_in[k][Q-1];
    end
  end

  // level l of the sorting tree holds P0 >> l (min1, min2) pairs
  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    logic [W-1:0] m1 [P0 >> l];
    logic [W-1:0] m2 [P0 >> l];
    for (genvar p = 0; p < (P0 >> l); p++) begin : g_cs
      if (l == 0) begin : g_leaf
        cs4 #(.W(W)) u_cs (
          .in0(mag[4*p]), .in1(mag[4*p+1]), .in2(mag[4*p+2]), .in3(mag[4*p+3]),
          .min1(m1[p]), .min2(m2[p]));
      end else begin : g_merge
        cs4 #(.W(W)) u_cs (
          .in0(g_lvl[l-1].m1[2*p]), .in1(g_lvl[l-1].m2[2*p]),
          .in2(g_lvl[l-1].m1[2*p+1]), .in3(g_lvl[l-1].m2[2*p+1]),
          .min1(m1[p]), .min2(m2[p]));
      end
    end
  end

  logic [W-1:0] min1, min2;
  assign min1 = g_lvl[LEVELS-1].m1[0];
  assign min2 = g_lvl[LEVELS-1].m2[0];

  always_comb begin
    for (int k = 0; k < DC; k++) begin
      msg_out[k] = {sign_all ^ sgn[k], (mag[k] == min1) ? min2 : min1};
    end
  end
endmodule
