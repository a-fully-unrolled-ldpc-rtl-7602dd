// tb_cn_stage: clocked self-check of one check-node stage at Z = 2 (M = 12 checks of
// degree 32, N = 64). New random messages and LLRs are applied every cycle; one cycle later
// the registered outputs must equal the min-sum reference of those inputs and the forwarded
// LLRs. Also checks that reset clears both registers.
module tb_cn_stage;
  import ldpc_ref_pkg::*;
  localparam int Z = 2, DC = 32, N = DC * Z, M = 6 * Z;
  logic clk = 0, rst_n = 0;
  logic [2:0] msg_in [M][DC], msg_out [M][DC];
  logic [3:0] llr_in [N], llr_out [N];
  logic [2:0] prev_msg [M][DC];
  logic [3:0] prev_llr [N];
  int checks = 0, failures = 0;

  cn_stage #(.Z(Z), .DC(DC)) dut (.clk, .rst_n, .msg_in, .llr_in, .msg_out, .llr_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_inputs();
    for (int m = 0; m < M; m++) for (int j = 0; j < DC; j++) msg_in[m][j] = 3'($urandom);
    for (int n = 0; n < N; n++) llr_in[n] = 4'($urandom);
  endtask

  initial begin
    randomize_inputs();
    repeat (2) @(posedge clk);
    #1;
    // reset holds the registers at zero
    for (int m = 0; m < M; m++) for (int j = 0; j < DC; j++) begin
      checks++; if (msg_out[m][j] != 0) failures++;
    end
    for (int n = 0; n < N; n++) begin checks++; if (llr_out[n] != 0) failures++; end
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      randomize_inputs();
      prev_msg = msg_in;
      prev_llr = llr_in;
      @(posedge clk);
      #1;
      for (int m = 0; m < M; m++) begin
        int cm [];
        cm = new[DC];
        for (int j = 0; j < DC; j++) cm[j] = int'(prev_msg[m][j]);
        for (int j = 0; j < DC; j++) begin
          checks++;
          if (int'(msg_out[m][j]) != cn_out(cm, j)) begin
            failures++;
            if (failures < 10) $display("cn_stage mismatch t=%0d m=%0d j=%0d", t, m, j);
          end
        end
      end
      for (int n = 0; n < N; n++) begin
        checks++;
        if (llr_out[n] != prev_llr[n]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
