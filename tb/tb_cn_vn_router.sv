// tb_cn_vn_router: checks the CN-to-VN interconnect against the parity-check matrix at a
// reduced block size (Z = 8): the message of edge j of check (i, r) must reach bit
// var_of(i, j, r) on its edge i.
module tb_cn_vn_router;
  import ldpc_ref_pkg::*;
  localparam int Z = 8, DC = 32, N = DC * Z, M = 6 * Z;
  logic [2:0] cmsg [M][DC];
  logic [2:0] vmsg [N][6];
  int checks = 0, failures = 0;

  cn_vn_router #(.Z(Z), .DC(DC)) dut (.cmsg, .vmsg);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int m = 0; m < M; m++) for (int j = 0; j < DC; j++) cmsg[m][j] = 3'($urandom);
      #1;
      for (int m = 0; m < M; m++)
        for (int j = 0; j < DC; j++) begin
          checks++;
          if (vmsg[var_of(m / Z, j, m % Z, Z)][m / Z] != cmsg[m][j]) begin
            failures++;
            if (failures < 10) $display("route mismatch m=%0d j=%0d", m, j);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
