// vn_cn_router: hard-wired VN-to-CN interconnect of the Tanner graph.
//
// Reorders the N*DV variable-node output messages (vmsg[n][i]: bit n, edge to the check of
// block row i) into check-node order (cmsg[m][j]: check m, edge to the bit of block column
// j). With the quasi-cyclic parity-check matrix of ldpc_pkg, check m = i*Z + r takes on its
// edge j the message of bit j*Z + ((r + s(i,j)) mod Z), s = ldpc_pkg::circ_shift. The
// routing is pure wiring: no logic, no delay. The paper names the routing network; the
// permutation follows the parity-check matrix chosen in ldpc_pkg.
module vn_cn_router #(
  parameter int unsigned Z  = ldpc_pkg::Z,
  parameter int unsigned DC = ldpc_pkg::DC
) (
  input  logic [ldpc_pkg::QMSG-1:0] vmsg [DC*Z][ldpc_pkg::DV],
  output logic [ldpc_pkg::QMSG-1:0] cmsg [ldpc_pkg::DV*Z][DC]
);
  localparam int unsigned DV = ldpc_pkg::DV;

  for (genvar i = 0; i < DV; i++) begin : g_row
    for (genvar j = 0; j < DC; j++) begin : g_col
      for (genvar r = 0; r < Z; r++) begin : g_r
        assign cmsg[i*Z + r][j] = vmsg[j*Z + ((r + ldpc_pkg::circ_shift(i, j, Z)) % Z)][i];
      end
    end
  end
endmodule
