// cn_vn_router: hard-wired CN-to-VN interconnect of the Tanner graph.
//
// Reorders the M*DC check-node output messages (cmsg[m][j]) into variable-node order
// (vmsg[n][i]): bit n = j*Z + c takes on its edge i the message of check
// i*Z + ((c - s(i,j)) mod Z), the inverse of vn_cn_router. Pure wiring, no delay.
module cn_vn_router #(
  parameter int unsigned Z  = ldpc_pkg::Z,
  parameter int unsigned DC = ldpc_pkg::DC
) (
  input  logic [ldpc_pkg::QMSG-1:0] cmsg [ldpc_pkg::DV*Z][DC],
  output logic [ldpc_pkg::QMSG-1:0] vmsg [DC*Z][ldpc_pkg::DV]
);
  localparam int unsigned DV = ldpc_pkg::DV;

  for (genvar i = 0; i < DV; i++) begin : g_row
    for (genvar j = 0; j < DC; j++) begin : g_col
      for (genvar c = 0; c < Z; c++) begin : g_c
        assign vmsg[j*Z + c][i] = cmsg[i*Z + ((c + Z - ldpc_pkg::circ_shift(i, j, Z)) % Z)][j];
      end
    end
  end
endmodule
