// cn_stage: one check-node stage of the unrolled decoder pipeline.
//
// Holds M = DV*Z check nodes working in parallel on the VN-to-CN messages of one codeword
// (already in check-node order, msg_in[m][k] is edge k of check m), an M*DC register of
// Q_msg-bit output messages and an N-entry register of Q_ch-bit channel LLRs that are passed
// on unchanged to the stages that follow. Both registers load every clock cycle, so a new
// codeword enters each cycle and the stage adds one cycle of latency.
// Reset (asynchronous, active low) clears the registers; the paper asks only for "clock and
// reset signals", the reset style and value are this design's choice.
module cn_stage #(
  parameter int unsigned Z  = ldpc_pkg::Z,
  parameter int unsigned DC = ldpc_pkg::DC
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ldpc_pkg::QMSG-1:0] msg_in  [ldpc_pkg::DV*Z][DC],
  input  logic [ldpc_pkg::QCH-1:0]  llr_in  [DC*Z],
  output logic [ldpc_pkg::QMSG-1:0] msg_out [ldpc_pkg::DV*Z][DC],
  output logic [ldpc_pkg::QCH-1:0]  llr_out [DC*Z]
);
  localparam int unsigned M = ldpc_pkg::DV * Z;
  localparam int unsigned N = DC * Z;

  logic [ldpc_pkg::QMSG-1:0] cn_res [M][DC];

  for (genvar m = 0; m < M; m++) begin : g_cn
    check_node #(.DC(DC)) u_cn (.msg_in(msg_in[m]), .msg_out(cn_res[m]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++)
        for (int k = 0; k < DC; k++) msg_out[m][k] <= '0;
      for (int n = 0; n < N; n++) llr_out[n] <= '0;
    end else begin
      msg_out <= cn_res;
      llr_out <= llr_in;
    end
  end
endmodule
