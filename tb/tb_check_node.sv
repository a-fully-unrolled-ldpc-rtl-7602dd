// tb_check_node: random self-check of the min-sum check node at the design degree (32).
// For every output k the expected label is recomputed directly from the definition: sign =
// XOR of the signs of all other inputs, magnitude = minimum magnitude over all other inputs.
// Random frames and frames with forced ties of the minimum are applied.
module tb_check_node;
  localparam int unsigned DC = 32;
  localparam int unsigned Q  = ldpc_pkg::QMSG;
  logic [Q-1:0] msg_in [DC], msg_out [DC];
  int checks = 0, failures = 0;

  check_node #(.DC(DC)) dut (.msg_in, .msg_out);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < DC; k++) msg_in[k] = Q'($urandom);
      if (t % 3 == 1) begin                 // force a tie of the minimum magnitude
        msg_in[$urandom_range(DC-1)][Q-2:0] = '0;
        msg_in[$urandom_range(DC-1)][Q-2:0] = '0;
      end else if (t % 3 == 2) begin        // a unique small minimum
        for (int k = 0; k < DC; k++) msg_in[k][Q-2:0] = (Q-1)'($urandom_range(3, 2));
        msg_in[$urandom_range(DC-1)][Q-2:0] = (Q-1)'($urandom_range(1, 0));
      end
      #1;
      for (int k = 0; k < DC; k++) begin
        logic s;
        int   mn;
        s  = 1'b0;
        mn = 1 << (Q - 1);
        for (int j = 0; j < DC; j++) if (j != k) begin
          s ^= msg_in[j][Q-1];
          if (int'(msg_in[j][Q-2:0]) < mn) mn = int'(msg_in[j][Q-2:0]);
        end
        checks++;
        if (msg_out[k] != {s, (Q-1)'(mn)}) begin
          failures++;
          if (failures < 10) $display("cn mismatch t=%0d k=%0d got %0d exp %0d", t, k, msg_out[k], {s, (Q-1)'(mn)});
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
