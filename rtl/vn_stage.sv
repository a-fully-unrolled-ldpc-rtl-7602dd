// vn_stage: one variable-node stage of the unrolled decoder pipeline.
//
// Holds N = DC*Z LUT-based variable nodes (one per code bit) fed with the CN-to-VN messages
// of one codeword in variable-node order (msg_in[n][i] is the message from the check of block
// row i) and the forwarded channel LLR of each bit. Registers: N*DV Q_msg-bit output messages
// and N Q_ch-bit channel LLRs for the later stages. Both load every cycle (one codeword per
// cycle, one cycle of latency). Asynchronous active-low reset clears them.
// The LUT contents T1..T4 belong to this stage's iteration and are the same for all its nodes,
// because in a regular code all nodes of one iteration see the same message statistics.
module vn_stage #(
  parameter int unsigned Z  = ldpc_pkg::Z,
  parameter int unsigned DC = ldpc_pkg::DC,
  parameter ldpc_pkg::vn_pair_tbl_t T1 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_pair_tbl_t T2 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_pair_tbl_t T3 = ldpc_pkg::VN_PAIR_DEFAULT,
  parameter ldpc_pkg::vn_root_tbl_t T4 = ldpc_pkg::VN_ROOT_DEFAULT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ldpc_pkg::QMSG-1:0] msg_in  [DC*Z][ldpc_pkg::DV],
  input  logic [ldpc_pkg::QCH-1:0]  llr_in  [DC*Z],
  output logic [ldpc_pkg::QMSG-1:0] msg_out [DC*Z][ldpc_pkg::DV],
  output logic [ldpc_pkg::QCH-1:0]  llr_out [DC*Z]
);
  localparam int unsigned N  = DC * Z;
  localparam int unsigned DV = ldpc_pkg::DV;

  logic [ldpc_pkg::QMSG-1:0] vn_res [N][DV];

  for (genvar n = 0; n < N; n++) begin : g_vn
    variable_node #(.T1(T1), .T2(T2), .T3(T3), .T4(T4)) u_vn (
      .msg_in(msg_in[n]), .llr(llr_in[n]), .msg_out(vn_res[n]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) begin
        for (int i = 0; i < DV; i++) msg_out[n][i] <= '0;
        llr_out[n] <= '0;
      end
    end else begin
      msg_out <= vn_res;
      llr_out <= llr_in;
    end
  end
endmodule
