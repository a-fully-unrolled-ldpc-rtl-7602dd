// dn_stage: decision-node stage, the last stage of the unrolled decoder pipeline.
//
// Holds N = DC*Z decision nodes, each turning the six CN-to-VN messages of its bit (variable-
// node order) and the forwarded channel LLR into the decoded bit, and the N-bit codeword
// register that loads every cycle. It has no LLR register since no stage follows.
// Asynchronous active-low reset clears the codeword register.
module dn_stage #(
  parameter int unsigned Z  = ldpc_pkg::Z,
  parameter int unsigned DC = ldpc_pkg::DC,
  parameter ldpc_pkg::dn_triple_tbl_t TA = ldpc_pkg::DN_TRIPLE_DEFAULT,
  parameter ldpc_pkg::dn_root_tbl_t   TR = ldpc_pkg::DN_ROOT_DEFAULT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ldpc_pkg::QMSG-1:0] msg_in [DC*Z][ldpc_pkg::DV],
  input  logic [ldpc_pkg::QCH-1:0]  llr_in [DC*Z],
  output logic [DC*Z-1:0]           codeword
);
  localparam int unsigned N = DC * Z;

  logic [N-1:0] dec;

  for (genvar n = 0; n < N; n++) begin : g_dn
    decision_node #(.TA(TA), .TR(TR)) u_dn (
      .msg_in(msg_in[n]), .llr(llr_in[n]), .bit_out(dec[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) codeword <= '0;
    else        codeword <= dec;
  end
endmodule
