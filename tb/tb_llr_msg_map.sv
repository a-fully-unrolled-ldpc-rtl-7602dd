// tb_llr_msg_map: exhaustive check of the LLR-to-initial-message map on a small width: every
// LLR label on every bit must appear, re-quantised to Q_msg bits, on all six edges.
module tb_llr_msg_map;
  import ldpc_ref_pkg::*;
  localparam int unsigned N = 16;
  logic [ldpc_pkg::QCH-1:0]  llr  [N];
  logic [ldpc_pkg::QMSG-1:0] vmsg [N][6];
  int checks = 0, failures = 0;

  llr_msg_map #(.N(N)) dut (.llr, .vmsg);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 16; t++) begin
      for (int n = 0; n < N; n++) llr[n] = 4'((n + t) % 16);
      #1;
      for (int n = 0; n < N; n++)
        for (int i = 0; i < 6; i++) begin
          checks++;
          if (int'(vmsg[n][i]) != init_msg(int'(llr[n]))) begin
            failures++;
            if (failures < 10) $display("map mismatch llr=%0d got %0d", llr[n], vmsg[n][i]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
