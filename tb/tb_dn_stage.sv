// tb_dn_stage: clocked self-check of the decision-node stage at Z = 2 (N = 64 bits). Random
// messages and LLRs every cycle; one cycle later each codeword bit must equal the integer
// decision reference. Reset is checked.
module tb_dn_stage;
  import ldpc_ref_pkg::*;
  localparam int Z = 2, DC = 32, N = DC * Z;
  logic clk = 0, rst_n = 0;
  logic [2:0] msg_in [N][6];
  logic [3:0] llr_in [N];
  logic [N-1:0] codeword;
  logic [2:0] prev_msg [N][6];
  logic [3:0] prev_llr [N];
  int checks = 0, failures = 0;

  dn_stage #(.Z(Z), .DC(DC)) dut (.clk, .rst_n, .msg_in, .llr_in, .codeword);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_inputs();
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < 6; i++) msg_in[n][i] = 3'($urandom);
      llr_in[n] = 4'($urandom);
    end
  endtask

  initial begin
    randomize_inputs();
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (codeword != '0) failures++;
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      randomize_inputs();
      prev_msg = msg_in;
      prev_llr = llr_in;
      @(posedge clk);
      #1;
      for (int n = 0; n < N; n++) begin
        int mu [6];
        for (int i = 0; i < 6; i++) mu[i] = int'(prev_msg[n][i]);
        checks++;
        if (int'(codeword[n]) != dn_bit(mu, int'(prev_llr[n]))) begin
          failures++;
          if (failures < 10) $display("dn_stage mismatch t=%0d n=%0d", t, n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
