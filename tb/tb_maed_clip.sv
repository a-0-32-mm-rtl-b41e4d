// tb_maed_clip: self-checking test of the prox (clipping) unit. Random 21-bit complex values,
// from small to full scale, are applied; each part of the output must equal the input limited to
// +-362 (1/sqrt(2) in Q.9), computed here independently. The unit is combinational, so each
// vector is checked 1 ns after it is applied. A watchdog ends the run if it hangs.
module tb_maed_clip;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  cb_t d;
  cs_t q;

  maed_clip dut (.d, .q);

  function automatic int ref_clip(input int v);
    if (v > 362) return 362;
    if (v < -362) return -362;
    return v;
  endfunction

  function automatic int rnd_val();
    int sh;
    sh = $urandom_range(20, 0);
    return $signed($urandom) >>> (31 - sh);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vr, vi, n_hi, n_lo;
    n_hi = 0; n_lo = 0;
    for (int n = 0; n < 2000; n++) begin
      vr = rnd_val(); vi = rnd_val();
      if (n == 0) begin vr = 362; vi = -363; end
      if (n == 1) begin vr = (1 << 20) - 1; vi = -(1 << 20); end
      d = '{re: WB'(vr), im: WB'(vi)};
      #1;
      checks++;
      if (int'(q.re) != ref_clip(vr) || int'(q.im) != ref_clip(vi)) begin
        failures++;
        if (failures < 10) $display("mismatch d=(%0d,%0d) q=(%0d,%0d)", vr, vi, q.re, q.im);
      end
      if (vr > 362) n_hi++;
      if (vr < -362) n_lo++;
    end
    // both clipping directions must have been exercised
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
