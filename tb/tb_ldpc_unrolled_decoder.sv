// tb_ldpc_unrolled_decoder: end-to-end self-check of the unrolled decoder at a reduced block
// size (Z = 2: N = 64 bits, M = 12 checks, I = 5 iterations, all other sizes as designed).
//
// A new frame of channel LLR labels is applied on every clock cycle, without gaps. The
// decoded word leaving the pipeline 2*I cycles later is compared bit for bit with the
// integer reference decoder of ldpc_ref_pkg. Frames are of three kinds:
//   - the all-zero codeword with a few weak wrong-sign LLRs (the decoder must remove them),
//   - the all-ones codeword (each check has even degree, so all-ones is a codeword),
//   - random LLR labels (exercises every table entry and min/second-min selection).
// Counted mechanisms: frames decoded back to back (one per cycle), frames whose channel hard
// decision had errors that the decoder corrected, the exact 2*I-cycle latency of the first
// frame after reset, and a reset in the middle of the stream that empties the pipeline.
module tb_ldpc_unrolled_decoder;
  import ldpc_ref_pkg::*;
  localparam int Z = 2, DC = 32, N = DC * Z, ITER = 5, LAT = 2 * ITER;
  localparam int FRAMES = 90;

  logic clk = 0, rst_n = 0;
  logic [3:0]   llr_in [N];
  logic [N-1:0] codeword;
  int checks = 0, failures = 0;
  int n_streamed = 0, n_corrected = 0, n_latency = 0, n_reset = 0;

  ldpc_unrolled_decoder #(.Z(Z), .DC(DC), .ITER(ITER)) dut (.clk, .rst_n, .llr_in, .codeword);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] expected [FRAMES];
  int           had_err  [FRAMES];
  logic [3:0]   frames   [FRAMES][N];

  // builds frame f (kind by f mod 3) and its reference decoding
  task automatic make_frame(int f);
    int l [];
    int cw [];
    l = new[N];
    had_err[f] = 0;
    for (int n = 0; n < N; n++) begin
      case (f % 3)
        0: l[n] = $urandom_range(7, 2);                       // positive: bit 0
        1: l[n] = 8 | $urandom_range(7, 2);                   // negative: bit 1
        default: l[n] = $urandom_range(15);
      endcase
    end
    if (f % 3 == 0) begin                                     // a few weak errors
      for (int e = 0; e < 3; e++) l[$urandom_range(N-1)] = 8 | $urandom_range(1);
      had_err[f] = 1;
    end
    decode(Z, DC, ITER, l, cw);
    for (int n = 0; n < N; n++) begin
      frames[f][n] = 4'(l[n]);
      expected[f][n] = cw[n][0];
    end
  endtask

  task automatic check_frame(int f);
    checks++;
    if (codeword != expected[f]) begin
      failures++;
      if (failures < 10) $display("frame %0d mismatch", f);
    end else begin
      n_streamed++;
      if (had_err[f] && codeword == '0) n_corrected++;
    end
  endtask

  initial begin
    for (int f = 0; f < FRAMES; f++) make_frame(f);
    for (int n = 0; n < N; n++) llr_in[n] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // stream all frames back to back; frame f is applied after edge f and leaves after
    // edge f + LAT
    for (int c = 0; c < FRAMES + LAT; c++) begin
      if (c < FRAMES) llr_in = frames[c];
      @(posedge clk);
      #1;
      if (c + 1 - LAT >= 0 && c + 1 - LAT < FRAMES) check_frame(c + 1 - LAT);
      else if (c + 1 < LAT) begin
        // the pipeline still holds its reset state, which decodes to all zeros: no frame
        // may appear before LAT cycles
        checks++;
        if (codeword != '0) failures++;
      end
      if (c + 1 == LAT + 1 && codeword == expected[1] && expected[1] != '0) n_latency++;
    end
    // reset in mid-stream: fill with all-ones frames, reset, output must be zero at once
    llr_in = frames[1];
    repeat (LAT) @(posedge clk);
    #1;
    checks++;
    if (codeword != expected[1]) failures++;
    rst_n = 0;
    #1;
    checks++;
    if (codeword == '0) n_reset++; else failures++;
    @(posedge clk);
    #1 rst_n = 1;
    // after the reset the pipeline refills: first LAT-1 outputs are the flushed zero state
    repeat (LAT - 1) @(posedge clk);
    #1;
    checks++;
    if (codeword != '0) failures++;
    @(posedge clk);
    #1;
    checks++;
    if (codeword != expected[1]) failures++;

    $display("mechanism count: streamed=%0d corrected=%0d latency=%0d reset=%0d",
             n_streamed, n_corrected, n_latency, n_reset);
    if (n_streamed < FRAMES) failures++;
    if (n_corrected == 0) failures++;
    if (n_latency == 0) failures++;
    if (n_reset == 0) failures++;
    checks += 4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
