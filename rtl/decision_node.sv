// decision_node: LUT-based decision node of the last iteration (dv = 6).
//
// One LUT tree (the paper's degree-6 decision example) turns all six CN-to-VN messages and
// the channel LLR into the decoded bit:
//   t1 = LUTA(mu0, mu1, mu2), t2 = LUTA(mu3, mu4, mu5)  (3*Q_msg-bit address, Q_msg-bit out)
//   c  = LUTR(t1, t2, L)                                (2*Q_msg+Q_ch-bit address, 1 bit)
// The first input is the high part of each address. Contents come in as parameters.
// Purely combinational; the codeword register is in dn_stage.
// From the paper: the tree shape and the single-bit output. This design's own choices: the
// grouping of the inputs, the intermediate width and the address order.
module decision_node #(
  parameter ldpc_pkg::dn_triple_tbl_t TA = ldpc_pkg::DN_TRIPLE_DEFAULT,
  parameter ldpc_pkg::dn_root_tbl_t   TR = ldpc_pkg::DN_ROOT_DEFAULT
) (
  input  logic [ldpc_pkg::QMSG-1:0] msg_in [ldpc_pkg::DV],
  input  logic [ldpc_pkg::QCH-1:0]  llr,
  output logic                      bit_out
);
  localparam int unsigned Q = ldpc_pkg::QMSG;
  logic [Q-1:0] t1, t2;

  initial begin
    assert (ldpc_pkg::DV == 6) else $fatal(1, "decision_node: tree is built for dv = 6");
  end

  always_comb begin
    t1      = TA[{msg_in[0], msg_in[1], msg_in[2]}*Q +: Q];
    t2      = TA[{msg_in[3], msg_in[4], msg_in[5]}*Q +: Q];
    bit_out = TR[{t1, t2, llr}];
  end
endmodule
