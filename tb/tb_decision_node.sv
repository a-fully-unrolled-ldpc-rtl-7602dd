// tb_decision_node: random self-check of the degree-6 decision node with its default
// tables against the integer reference (two 3-input partial sums, then the sign of their sum
// plus the LLR; bit 1 when negative).
module tb_decision_node;
  import ldpc_ref_pkg::*;
  logic [ldpc_pkg::QMSG-1:0] msg_in [6];
  logic [ldpc_pkg::QCH-1:0]  llr;
  logic                      bit_out;
  int checks = 0, failures = 0, ones = 0;

  decision_node dut (.msg_in, .llr, .bit_out);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mu [6];
    for (int t = 0; t < 30000; t++) begin
      for (int i = 0; i < 6; i++) begin
        mu[i] = int'($urandom_range(7));
        msg_in[i] = 3'(mu[i]);
      end
      llr = 4'($urandom);
      #1;
      checks++;
      ones += int'(bit_out);
      if (int'(bit_out) != dn_bit(mu, int'(llr))) begin
        failures++;
        if (failures < 10) $display("dn mismatch t=%0d got %0d", t, bit_out);
      end
    end
    // both decisions must have occurred
    checks++;
    if (ones == 0 || ones == 30000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
