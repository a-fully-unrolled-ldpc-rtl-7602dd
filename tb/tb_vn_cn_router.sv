// tb_vn_cn_router: checks the VN-to-CN interconnect against the parity-check matrix at a
// reduced block size (Z = 8, N = 256, M = 48): every message must arrive at the check and
// edge that the matrix definition of ldpc_ref_pkg (var_of) names, and every check edge must
// receive exactly one bit's message.
module tb_vn_cn_router;
  import ldpc_ref_pkg::*;
  localparam int Z = 8, DC = 32, N = DC * Z, M = 6 * Z;
  logic [2:0] vmsg [N][6];
  logic [2:0] cmsg [M][DC];
  int checks = 0, failures = 0;

  vn_cn_router #(.Z(Z), .DC(DC)) dut (.vmsg, .cmsg);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int n = 0; n < N; n++) for (int i = 0; i < 6; i++) vmsg[n][i] = 3'($urandom);
      #1;
      for (int m = 0; m < M; m++)
        for (int j = 0; j < DC; j++) begin
          checks++;
          if (cmsg[m][j] != vmsg[var_of(m / Z, j, m % Z, Z)][m / Z]) begin
            failures++;
            if (failures < 10) $display("route mismatch m=%0d j=%0d", m, j);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
