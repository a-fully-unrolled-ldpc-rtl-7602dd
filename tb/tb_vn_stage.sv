// tb_vn_stage: clocked self-check of one variable-node stage at Z = 2 (N = 64 bits). Random
// CN-to-VN messages and LLRs every cycle; one cycle later every registered output message
// must equal the integer LUT-tree reference and the LLRs must be forwarded. Reset is checked.
module tb_vn_stage;
  import ldpc_ref_pkg::*;
  localparam int Z = 2, DC = 32, N = DC * Z;
  logic clk = 0, rst_n = 0;
  logic [2:0] msg_in [N][6], msg_out [N][6];
  logic [3:0] llr_in [N], llr_out [N];
  logic [2:0] prev_msg [N][6];
  logic [3:0] prev_llr [N];
  int checks = 0, failures = 0;

  vn_stage #(.Z(Z), .DC(DC)) dut (.clk, .rst_n, .msg_in, .llr_in, .msg_out, .llr_out);

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
    for (int n = 0; n < N; n++) begin
      checks++;
      if (llr_out[n] != 0) failures++;
      for (int i = 0; i < 6; i++) begin checks++; if (msg_out[n][i] != 0) failures++; end
    end
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      randomize_inputs();
      prev_msg = msg_in;
      prev_llr = llr_in;
      @(posedge clk);
      #1;
      for (int n = 0; n < N; n++) begin
        int mu [6];
        for (int i = 0; i < 6; i++) mu[i] = int'(prev_msg[n][i]);
        for (int k = 0; k < 6; k++) begin
          checks++;
          if (int'(msg_out[n][k]) != vn_out(mu, int'(prev_llr[n]), k)) begin
            failures++;
            if (failures < 10) $display("vn_stage mismatch t=%0d n=%0d k=%0d", t, n, k);
          end
        end
        checks++;
        if (llr_out[n] != prev_llr[n]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
