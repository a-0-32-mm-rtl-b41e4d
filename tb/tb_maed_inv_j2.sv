// tb_maed_inv_j2: self-checking test of the ||j||^2 inversion. ||j||^2 arrives in Q.14
// (between 1 and 64 after pseudonormalization). The unit returns an exponent e and a mantissa
// inverse inv (Q.15) with ||j||^2 ~ 2^e / (inv/2^15), and the broadcast x_b * 16 * 2^-e. For
// random inputs, e must be floor(log2 ||j||^2) clamped to 0..6, inv * (||j||^2 / 2^e) / 2^15
// must lie within 2.5e-4 of 1 (12-bit table, half-step error), and x_out must be exact. Outputs
// update one cycle after `en` (x_out follows e) and hold otherwise. A watchdog ends the run if
// it hangs.
module tb_maed_inv_j2;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;

  logic signed [20:0]   nj;
  cx_t                  x_in [B];
  logic signed [WA-1:0] inv;
  logic [2:0]           e;
  cb_t                  x_out [B];

  maed_inv_j2 dut (.clk, .rst_n, .en, .nj, .x_in, .inv, .e, .x_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, ee, pinv, pe;
    real m, err, worst;
    worst = 0.0;
    for (int b = 0; b < B; b++) x_in[b] = '0;
    nj = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      v = $urandom_range((1 << 20) - 1, 1 << 14);  // ||j||^2 < 64 after pseudonormalization
      if (n < 6) v = 16384 << n;
      nj = 21'(v);
      for (int b = 0; b < B; b++)
        x_in[b] = '{re: WX'($urandom), im: WX'($urandom)};
      en = (n % 6 != 5);
      pinv = int'(inv); pe = int'(e);
      @(negedge clk);
      ee = 0;
      while (ee < 6 && v >= (16384 << (ee + 1))) ee++;
      if (en) begin
        checks++;
        if (int'(e) != ee) failures++;
        m = real'(v) / 16384.0 / real'(1 << ee);
        err = real'(inv) * m / 32768.0 - 1.0;
        if (err < 0.0) err = -err;
        if (err > worst) worst = err;
        checks++;
        if (err > 2.5e-4) begin
          failures++;
          if (failures < 10) $display("nj=%0d inv=%0d e=%0d err=%g", v, inv, e, err);
        end
      end else begin
        checks++;
        if (int'(inv) != pinv || int'(e) != pe) failures++;
      end
      for (int b = 0; b < B; b++) begin
        checks++;
        if (int'(x_out[b].re) != ((int'(x_in[b].re) * 16) >>> e) ||
            int'(x_out[b].im) != ((int'(x_in[b].im) * 16) >>> e)) failures++;
      end
    end
    $display("worst relative error of the inverse: %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
