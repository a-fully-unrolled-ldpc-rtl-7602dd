// llr_msg_map: maps the channel LLR label of each bit to the initial VN-to-CN message label.
//
// The first check-node stage works on Q_msg-bit messages while the channel delivers Q_ch-bit
// LLR labels, so each bit's LLR label goes through a Q_ch -> Q_msg LUT (contents TI) and the
// result is sent on all DV edges of that bit, as the first "VN update" of message passing
// (no CN messages exist yet). Purely combinational, placed in front of the first VN-CN
// routing. The paper gives only an initial message distribution; this block and its default
// contents (a saturating re-quantisation, see ldpc_pkg) are this design's own.
module llr_msg_map #(
  parameter int unsigned N = ldpc_pkg::N,
  parameter ldpc_pkg::init_tbl_t TI = ldpc_pkg::INIT_DEFAULT
) (
  input  logic [ldpc_pkg::QCH-1:0]  llr  [N],
  output logic [ldpc_pkg::QMSG-1:0] vmsg [N][ldpc_pkg::DV]
);
  localparam int unsigned Q = ldpc_pkg::QMSG;

  always_comb begin
    for (int n = 0; n < N; n++)
      for (int i = 0; i < ldpc_pkg::DV; i++) vmsg[n][i] = TI[llr[n]*Q +: Q];
  end
endmodule
