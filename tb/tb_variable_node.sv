// tb_variable_node: random self-check of the LUT-based degree-6 variable node with its
// default tables. Each of the six outputs is compared with the integer reference of
// ldpc_ref_pkg (sum of the two pairs not containing k, plus the partner input, plus the LLR,
// re-quantised after every step).
module tb_variable_node;
  import ldpc_ref_pkg::*;
  logic [ldpc_pkg::QMSG-1:0] msg_in [6], msg_out [6];
  logic [ldpc_pkg::QCH-1:0]  llr;
  int checks = 0, failures = 0;

  variable_node dut (.msg_in, .llr, .msg_out);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mu [6];
    for (int t = 0; t < 20000; t++) begin
      for (int i = 0; i < 6; i++) begin
        mu[i] = int'($urandom_range(7));
        msg_in[i] = 3'(mu[i]);
      end
      llr = 4'($urandom);
      #1;
      for (int k = 0; k < 6; k++) begin
        int e;
        e = vn_out(mu, int'(llr), k);
        checks++;
        if (int'(msg_out[k]) != e) begin
          failures++;
          if (failures < 10) $display("vn mismatch t=%0d k=%0d got %0d exp %0d", t, k, msg_out[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
