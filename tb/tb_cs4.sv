// tb_cs4: exhaustive self-check of the 4-input compare-and-select unit.
// Every combination of four 2-bit magnitudes is applied; the two smallest values are worked
// out by sorting a copy of the inputs and compared with min1/min2.
module tb_cs4;
  localparam int unsigned W = 2;
  logic [W-1:0] in [4];
  logic [W-1:0] min1, min2;
  int checks = 0, failures = 0;

  cs4 #(.W(W)) dut (.in0(in[0]), .in1(in[1]), .in2(in[2]), .in3(in[3]), .min1, .min2);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [4];
    for (int c = 0; c < (1 << (4 * W)); c++) begin
      for (int k = 0; k < 4; k++) begin
        in[k] = W'(c >> (W * k));
        v[k]  = int'(in[k]);
      end
      v.sort();
      #1;
      checks++;
      if (min1 != W'(v[0]) || min2 != W'(v[1])) begin
        failures++;
        $display("cs4 mismatch in=%p got %0d,%0d expected %0d,%0d", in, min1, min2, v[0], v[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
