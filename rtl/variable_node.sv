// variable_node: LUT-based variable node for a degree-6 variable (dv = 6).
//
// Each of the six outputs k is computed by a tree of two-input LUTs over the five CN-to-VN
// messages other than k and the channel LLR (tree shape of the paper's degree-6 example):
//   level 1: LUT1(mu_a, mu_b) and LUT1(mu_c, mu_d)
//   level 2: LUT2(level-1 result, level-1 result)
//   level 3: LUT3(level-2 result, mu_e)
//   level 4: LUT4(level-3 result, L)  -> output message
// Nodes that occur in several trees are built once: three level-1 LUTs on the input pairs
// (0,1), (2,3), (4,5); three level-2 LUTs on the pairs of those; six level-3 and six level-4
// LUTs. In total 18 LUTs instead of 24. All intermediate results are Q_msg-bit labels. The
// first LUT input is the high part of the address. The contents (one set per iteration) come
// in as parameters; LUT1..3 have a 2*Q_msg-bit address, LUT4 a (Q_msg+Q_ch)-bit address.
// Purely combinational; registers are in vn_stage.
// From the paper: the tree shape, dv LUT trees per node and the sharing of common nodes.
// This design's own choices: the pairing used for sharing, the intermediate width and the
// address order.
module variable_node #(
  parameter ldpc_pkg::vn_pair_tbl_t T1 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_pair_tbl_t T2 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_pair_tbl_t T3 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_root_tbl_t T4 = ldpc_pkg::VN_ROOT_DEFAULT
) (
  input  logic [ldpc_pkg::QMSG-1:0] msg_in  [ldpc_pkg::DV],
  input  logic [ldpc_pkg::QCH-1:0]  llr,
  output logic [ldpc_pkg::QMSG-1:0] msg_out [ldpc_pkg::DV]
);
  localparam int unsigned Q = ldpc_pkg::QMSG;
  typedef logic [Q-1:0] lab_t;

  // for output k: the level-2 node it uses and the single CN message added at level 3
  localparam int unsigned L2_OF  [6] = '{2, 2, 1, 1, 0, 0};
  localparam int unsigned SGL_OF [6] = '{1, 0, 3, 2, 5, 4};

  lab_t p1 [3];   // level 1: (0,1) (2,3) (4,5)
  lab_t p2 [3];   // level 2: A=(p01,p23) B=(p01,p45) C=(p23,p45)
  lab_t p3 [6];   // level 3, one per output

  initial begin
    assert (ldpc_pkg::DV == 6) else $fatal(1, "variable_node: tree is built for dv = 6");
  end

  always_comb begin
    for (int p = 0; p < 3; p++) p1[p] = T1[{msg_in[2*p], msg_in[2*p+1]}*Q +: Q];
    p2[0] = T2[{p1[0], p1[1]}*Q +: Q];
    p2[1] = T2[{p1[0], p1[2]}*Q +: Q];
    p2[2] = T2[{p1[1], p1[2]}*Q +: Q];
    for (int k = 0; k < 6; k++) begin
      p3[k]      = T3[{p2[L2_OF[k]], msg_in[SGL_OF[k]]}*Q +: Q];
      msg_out[k] = T4[{p3[k], llr}*Q +: Q];
    end
  end
endmodule
