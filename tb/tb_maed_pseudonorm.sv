// tb_maed_pseudonorm: self-checking test of the jammer pseudonormalization. Random raw jammer
// estimates (8 complex 23-bit entries) of random overall size are applied. The position p of
// the highest set bit over all 16 magnitudes is found here by a separate loop, and every output
// part must equal the input shifted by p-14 (right for large, left for small vectors, Q.14
// result), with saturation. Output and p_max must update one cycle after `en` and hold
// otherwise. Both shift directions must occur. A watchdog ends the run if it hangs.
module tb_maed_pseudonorm;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #5 clk = ~clk;

  cjr_t j_in [B];
  cj_t  j_out [B];
  logic [4:0] p_max;

  maed_pseudonorm dut (.clk, .rst_n, .en, .j_in, .j_out, .p_max);

  function automatic int msb(input longint v);
    int p;
    p = 0;
    if (v < 0) v = -v;
    while (v > 1) begin v = v >> 1; p++; end
    return p;
  endfunction

  function automatic longint ref_scale(input longint v, input int p);
    longint w;
    if (p >= 14) w = v >>> (p - 14);
    else         w = v * (longint'(1) << (14 - p));
    if (w > 32767) w = 32767;
    if (w < -32768) w = -32768;
    return w;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint vre [B], vim [B];
    int p, mx, n_up, n_down;
    cj_t hold [B];
    n_up = 0; n_down = 0;
    for (int b = 0; b < B; b++) j_in[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      mx = $urandom_range(22, 1);
      p = 0;
      for (int b = 0; b < B; b++) begin
        vre[b] = longint'($signed($urandom)) >>> (32 - mx);
        vim[b] = longint'($signed($urandom)) >>> (32 - mx);
        j_in[b] = '{re: WJR'(vre[b]), im: WJR'(vim[b])};
        if (msb(vre[b]) > p) p = msb(vre[b]);
        if (msb(vim[b]) > p) p = msb(vim[b]);
      end
      hold = j_out;
      en = (n % 5 != 4);
      @(negedge clk);
      if (en) begin
        checks++;
        if (int'(p_max) != p) failures++;
        for (int b = 0; b < B; b++) begin
          checks++;
          if (longint'(j_out[b].re) != ref_scale(vre[b], p) ||
              longint'(j_out[b].im) != ref_scale(vim[b], p)) begin
            failures++;
            if (failures < 10) $display("n=%0d b=%0d p=%0d got %0d expected %0d", n, b, p,
                                        j_out[b].re, ref_scale(vre[b], p));
          end
        end
        if (p > 14) n_down++;
        if (p < 14) n_up++;
      end else begin
        checks++;
        if (j_out != hold) failures++;
      end
    end
    checks++;
    if (n_up == 0 || n_down == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
