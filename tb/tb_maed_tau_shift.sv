// tb_maed_tau_shift: self-checking test of the step-size scaling tau_t z. For random z, random
// iteration indices and a random per-iteration table of shifts, the registered output must
// equal z >>> tau_shift[iter] (arithmetic shift, as tau_t = 2^-tau_shift[t]) one cycle after
// `en`, and hold while `en` is low. A watchdog ends the run if it hangs.
module tb_maed_tau_shift;
  import maed_pkg::*;
  localparam int TMAX = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] tau_shift [TMAX];
  logic [$clog2(TMAX)-1:0] iter;
  cb_t z [B], tz [B];

  maed_tau_shift #(.TMAX(TMAX)) dut (.clk, .rst_n, .en, .tau_shift, .iter, .z, .tz);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cb_t hold [B];
    int sh;
    for (int t = 0; t < TMAX; t++) tau_shift[t] = 4'($urandom_range(8, 0));
    iter = '0;
    for (int b = 0; b < B; b++) z[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      iter = 4'($urandom_range(TMAX - 1, 0));
      for (int b = 0; b < B; b++) z[b] = '{re: WB'($urandom), im: WB'($urandom)};
      en = (n % 3 != 2);
      hold = tz;
      sh = int'(tau_shift[iter]);
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        checks++;
        if (en) begin
          if (int'(tz[b].re) != (int'(z[b].re) >>> sh) || int'(tz[b].im) != (int'(z[b].im) >>> sh))
            failures++;
        end else if (tz[b] != hold[b]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
