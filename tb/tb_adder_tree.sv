// tb_adder_tree: self-checking test of the pipelined adder tree. Two instances are tested: the
// 32-input tree used for ||s||^2 (latency 5 cycles, combinational output) and a 4-input tree with
// an output register as used for slice combining (latency 3). Random inputs change every cycle;
// the output must equal the sum of the inputs applied exactly LATENCY cycles earlier, which
// checks both the arithmetic and the pipeline depth. A watchdog ends the run if it hangs.
module tb_adder_tree;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int N1 = 32, N2 = 4, LAT1 = 5, LAT2 = 3;
  logic signed [20:0] in1 [N1];
  logic signed [20:0] in2 [N2];
  logic signed [25:0] out1;
  logic signed [22:0] out2;

  adder_tree #(.N(N1), .W_IN(21), .W_OUT(26))              dut1 (.clk, .rst_n, .in(in1), .out(out1));
  adder_tree #(.N(N2), .W_IN(21), .W_OUT(23), .OUT_REG(1)) dut2 (.clk, .rst_n, .in(in2), .out(out2));

  longint hist1 [$];
  longint hist2 [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s1, s2;
    for (int k = 0; k < N1; k++) in1[k] = '0;
    for (int k = 0; k < N2; k++) in2[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // check the outputs of the inputs applied LAT cycles ago
      if (hist1.size() == LAT1) begin
        checks++;
        if (longint'(out1) != hist1.pop_front()) begin
          failures++;
          if (failures < 10) $display("tree32 mismatch at %0d", n);
        end
      end
      if (hist2.size() == LAT2) begin
        checks++;
        if (longint'(out2) != hist2.pop_front()) begin
          failures++;
          if (failures < 10) $display("tree4 mismatch at %0d", n);
        end
      end
      s1 = 0; s2 = 0;
      for (int k = 0; k < N1; k++) begin
        in1[k] = (n % 50 == 7) ? 21'sh0FFFFF : 21'($urandom);  // includes a full-scale case
        s1 += longint'(in1[k]);
      end
      for (int k = 0; k < N2; k++) begin
        in2[k] = (n % 50 == 9) ? -21'sh100000 : 21'($urandom);
        s2 += longint'(in2[k]);
      end
      hist1.push_back(s1);
      hist2.push_back(s2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
