// tb_maed_ff_array: self-checking test of the flip-flop array that holds x (8 x 17b) and s~
// (32 x 11b). The 8 x 17b configuration is driven with random data and random write and clear
// strobes; a model array tracks the expected contents (clear has priority over write), and all
// entries are compared every cycle. It also checks the reset state. A watchdog ends the run if
// it hangs.
module tb_maed_ff_array;
  localparam int N = 8, W = 17;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, clr = 1'b0;
  always #5 clk = ~clk;

  logic signed [W-1:0] d_re [N], d_im [N], q_re [N], q_im [N];

  maed_ff_array #(.N(N), .W(W)) dut (.clk, .rst_n, .we, .clr, .d_re, .d_im, .q_re, .q_im);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_re [N], m_im [N];
    int n_we, n_clr;
    n_we = 0; n_clr = 0;
    for (int k = 0; k < N; k++) begin m_re[k] = 0; m_im[k] = 0; d_re[k] = '0; d_im[k] = '0; end
    repeat (2) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (q_re[k] != '0 || q_im[k] != '0) failures++;
    end
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < N; k++) begin d_re[k] = W'($urandom); d_im[k] = W'($urandom); end
      we = ($urandom_range(1, 0) == 1);
      clr = ($urandom_range(15, 0) == 0);
      @(negedge clk);
      if (clr) begin
        for (int k = 0; k < N; k++) begin m_re[k] = 0; m_im[k] = 0; end
        n_clr++;
      end else if (we) begin
        for (int k = 0; k < N; k++) begin m_re[k] = int'(d_re[k]); m_im[k] = int'(d_im[k]); end
        n_we++;
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (int'(q_re[k]) != m_re[k] || int'(q_im[k]) != m_im[k]) failures++;
      end
    end
    checks++;
    if (n_we == 0 || n_clr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
