// tb_maed_inv_s2_lut: self-checking test of the 1/||s||^2 lookup. ||s||^2 arrives in Q.14;
// the table is addressed with ||s||^2 rounded to quarters (clamped to 4..32, the range of
// ||s~||^2 for T=4 pilots and 28 clipped data entries) and returns 1/||s||^2 in Q.16. For random
// inputs over and beyond that range, the registered output must equal round(2^18/a) with the
// address a computed here, must update one cycle after `en` and must hold while `en` is low. It
// also checks that the value is within 1/8 of the exact reciprocal inside the range. A watchdog
// ends the run if it hangs.
module tb_maed_inv_s2_lut;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;

  logic signed [20:0]   ns;
  logic signed [WA-1:0] inv;

  maed_inv_s2_lut dut (.clk, .rst_n, .en, .ns, .inv);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, a, expv, prev;
    real exact;
    ns = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    prev = 0;
    for (int n = 0; n < 2000; n++) begin
      v = $urandom_range(36 * 16384, 0);
      if (n % 97 == 0) v = 4 * 16384;
      if (n % 97 == 1) v = 32 * 16384;
      ns = 21'(v);
      en = (n % 4 != 3);
      @(negedge clk);
      a = (v + 2048) / 4096;
      if (a < 16) a = 16;
      if (a > 128) a = 128;
      expv = ((1 << 18) + a / 2) / a;
      checks++;
      if (en) begin
        if (int'(inv) != expv) begin
          failures++;
          if (failures < 10) $display("ns=%0d inv=%0d expected %0d", v, inv, expv);
        end
        if (v >= 4 * 16384 && v <= 32 * 16384) begin
          exact = 65536.0 * 16384.0 / real'(v);
          checks++;
          if ((real'(inv) - exact) > exact / 8.0 || (exact - real'(inv)) > exact / 8.0) failures++;
        end
        prev = int'(inv);
      end else if (int'(inv) != prev) begin
        failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
