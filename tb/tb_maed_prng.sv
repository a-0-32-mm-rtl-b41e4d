// tb_maed_prng: self-checking test of the random-vector generator. The state after reset must
// be the seed; each cycle with `en` high must advance it by one xorshift64 step (shifts 13, 7,
// 17, modelled here independently) and a cycle with `en` low must hold it. Each u_b must be
// +-1 +-1j with the signs taken from state bits 2b and 2b+1. The run also checks that both
// signs occur for every entry. A watchdog ends the run if it hangs.
module tb_maed_prng;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;

  localparam logic [63:0] SEED = 64'h0123_4567_89AB_CDEF;
  logic [63:0] state;
  cb_t u [B];

  maed_prng #(.SEED(SEED)) dut (.clk, .rst_n, .en, .state, .u);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] m;
    int n_neg [2*B];
    for (int i = 0; i < 2 * B; i++) n_neg[i] = 0;
    m = SEED;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      checks++;
      if (state != m) begin
        failures++;
        if (failures < 10) $display("state mismatch at %0d: %h vs %h", n, state, m);
      end
      for (int b = 0; b < B; b++) begin
        checks++;
        if (int'(u[b].re) != (m[2*b] ? -1 : 1) || int'(u[b].im) != (m[2*b+1] ? -1 : 1))
          failures++;
        if (m[2*b]) n_neg[2*b]++;
        if (m[2*b+1]) n_neg[2*b+1]++;
      end
      en = ($urandom_range(3, 0) != 0);
      if (en) begin
        m = m ^ (m << 13);
        m = m ^ (m >> 7);
        m = m ^ (m << 17);
      end
    end
    for (int i = 0; i < 2 * B; i++) begin
      checks++;
      if (n_neg[i] < 300 || n_neg[i] > 700) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
