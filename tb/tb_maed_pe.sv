// tb_maed_pe: self-checking test of one processing element. It loads a random Y row through
// the write port and then issues micro-operations as the controller would:
//   1. an 8-step multiply-accumulate sum_k Y[k] * b_k with broadcast b_k (the product shifted
//      right by 4, rounded to nearest), checked 3 cycles after the last issue (pipeline depth);
//   2. E[k] = Y[k] - s * x for all k with a broadcast x and the local s, written back to the E
//      row (Q.7 -> Q.4, rounded), then read back through a multiply by 1 and compared;
//   3. the conjugated Hermitian-style read of E with an idx_off, checked likewise;
//   4. the update s <- clip(s + conj(g)) with g in the accumulator, including clipping, and
//      that a pilot PE keeps its s;
//   5. rotation (s takes the neighbour's s) and s_load.
// Expected values are computed here from the same integer formats. A watchdog ends the run.
module tb_maed_pe;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  uop_t uop;
  ca_t  a_ext;
  cb_t  b_ext, q_ext, b_in, sum_in;
  cs_t  s_in, s_init;
  logic s_load, y_we;
  logic [2:0] y_idx;
  cy_t  y_data;
  cs_t  s_reg [2], s_new [2];
  cb_t  b_reg [2], sum [2], prod [2];

  // PE 0 is a data entry, PE 1 a pilot (both see the same stimulus)
  for (genvar g = 0; g < 2; g++) begin : g_dut
    maed_pe #(.PE_IDX(3), .IS_PILOT(g == 1)) dut (
      .clk, .rst_n, .uop, .a_ext, .b_ext, .q_ext, .s_in, .b_in, .sum_in, .s_load, .s_init,
      .y_we, .y_idx, .y_data, .s_reg(s_reg[g]), .b_reg(b_reg[g]), .sum(sum[g]),
      .prod(prod[g]), .s_new(s_new[g]));
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // product shift with rounding to nearest (ties up)
  function automatic longint fl(input longint v, input int sh);
    if (sh == 0) return v;
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  function automatic longint sat_e(input longint v);
    v = (v + 4) >>> 3;
    if (v > 4095) return 4095;
    if (v < -4096) return -4096;
    return v;
  endfunction

  task automatic issue(input uop_t u);
    uop = u;
    @(negedge clk);
    uop = UOP_NOP;
  endtask

  task automatic check(input string what, input longint got_re, got_im, exp_re, exp_im);
    checks++;
    if (got_re != exp_re || got_im != exp_im) begin
      failures++;
      if (failures < 12)
        $display("%s: got (%0d,%0d) expected (%0d,%0d)", what, got_re, got_im, exp_re, exp_im);
    end
  endtask

  initial begin
    int yr [B], yi [B], br [B], bi [B], er [B], ei [B];
    longint accr, acci;
    int sr, si, xr, xi, gr, gi;
    int first_idx, pr0, pi0;
    uop_t u;
    uop = UOP_NOP; a_ext = '0; b_ext = '0; q_ext = '0; b_in = '0; sum_in = '0; s_in = '0;
    s_init = '0; s_load = 1'b0; y_we = 1'b0; y_idx = '0; y_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // load Y
    for (int k = 0; k < B; k++) begin
      yr[k] = $urandom_range(4000, 0) - 2000;
      yi[k] = $urandom_range(4000, 0) - 2000;
      y_we = 1'b1; y_idx = 3'(k); y_data = '{re: WY'(yr[k]), im: WY'(yi[k])};
      @(negedge clk);
    end
    y_we = 1'b0;

    // 1. accumulate sum_k Y[(3+k)%8] * b_k
    accr = 0; acci = 0;
    for (int k = 0; k < B; k++) begin
      br[k] = $urandom_range(2000, 0) - 1000;
      bi[k] = $urandom_range(2000, 0) - 1000;
      first_idx = (3 + k) % B;
      accr += fl(longint'(yr[first_idx]) * br[k] - longint'(yi[first_idx]) * bi[k], 4);
      acci += fl(longint'(yr[first_idx]) * bi[k] + longint'(yi[first_idx]) * br[k], 4);
      u = UOP_NOP; u.a_sel = A_Y; u.idx_off = 3'(k); u.b_sel = B_EXT; u.shift = 5'd4;
      u.acc_en = 1'b1; u.q_sel = (k == 0) ? Q_ZERO : Q_SUM;
      b_ext = '{re: WB'(br[k]), im: WB'(bi[k])};
      issue(u);
    end
    b_ext = '0;
    repeat (2) @(negedge clk);
    check("Y*b accumulate", sum[0].re, sum[0].im, accr, acci);

    // 2. E[k] = Y[k] - (s x) >> 10, s loaded through s_load
    sr = $urandom_range(724, 0) - 362; si = $urandom_range(724, 0) - 362;
    xr = $urandom_range(40000, 0) - 20000; xi = $urandom_range(40000, 0) - 20000;
    s_init = '{re: WS'(sr), im: WS'(si)}; s_load = 1'b1;
    @(negedge clk);
    s_load = 1'b0;
    check("s_load", s_reg[0].re, s_reg[0].im, sr, si);
    pr0 = sr; pi0 = si;
    for (int k = 0; k < B; k++) begin
      first_idx = (3 + k) % B;
      er[first_idx] = int'(sat_e(longint'(yr[first_idx]) -
                      fl(longint'(sr) * xr - longint'(si) * xi, 10)));
      ei[first_idx] = int'(sat_e(longint'(yi[first_idx]) -
                      fl(longint'(sr) * xi + longint'(si) * xr, 10)));
      u = UOP_NOP; u.a_sel = A_S; u.idx_off = 3'(k); u.b_sel = B_EXT; u.shift = 5'd10;
      u.acc_en = 1'b1; u.q_sel = Q_Y; u.sub = 1'b1; u.e_we = 1'b1;
      b_ext = '{re: WB'(xr), im: WB'(xi)};
      issue(u);
    end
    b_ext = '0;
    repeat (3) @(negedge clk);
    // read back E through a multiply by 1 (prod register, 2 cycles after issue)
    for (int k = 0; k < B; k++) begin
      u = UOP_NOP; u.a_sel = A_E; u.idx_off = 3'(k); u.b_sel = B_EXT;
      b_ext = '{re: WB'(1), im: '0};
      issue(u);
      @(negedge clk);
      check("E readback", prod[0].re, prod[0].im, er[(3 + k) % B], ei[(3 + k) % B]);
    end
    // 3. conjugated E times a complex b
    br[0] = 37; bi[0] = -21;
    u = UOP_NOP; u.a_sel = A_E; u.a_conj = 1'b1; u.idx_off = 3'd5; u.b_sel = B_EXT;
    b_ext = '{re: WB'(br[0]), im: WB'(bi[0])};
    issue(u);
    @(negedge clk);
    first_idx = (3 + 5) % B;
    check("conj(E) * b", prod[0].re, prod[0].im,
          longint'(er[first_idx]) * br[0] + longint'(ei[first_idx]) * bi[0],
          longint'(er[first_idx]) * bi[0] - longint'(ei[first_idx]) * br[0]);

    // 4. s <- clip(s + conj(g)); g = Y[idx] * b >> 4 placed in the accumulator first
    for (int rep = 0; rep < 2; rep++) begin
      br[0] = (rep == 0) ? 3 : 200; bi[0] = (rep == 0) ? -2 : 150;
      first_idx = 3;
      gr = int'(fl(longint'(yr[first_idx]) * br[0] - longint'(yi[first_idx]) * bi[0], 4));
      gi = int'(fl(longint'(yr[first_idx]) * bi[0] + longint'(yi[first_idx]) * br[0], 4));
      u = UOP_NOP; u.a_sel = A_Y; u.b_sel = B_EXT; u.shift = 5'd4; u.acc_en = 1'b1;
      b_ext = '{re: WB'(br[0]), im: WB'(bi[0])};
      issue(u);
      b_ext = '0;
      u = UOP_NOP; u.acc_en = 1'b1; u.p_sel = P_SUMCONJ; u.q_sel = Q_S; u.s_upd = 1'b1;
      issue(u);
      repeat (3) @(negedge clk);
      begin
        int nr, ni;
        nr = sr + gr; ni = si - gi;
        nr = nr > 362 ? 362 : (nr < -362 ? -362 : nr);
        ni = ni > 362 ? 362 : (ni < -362 ? -362 : ni);
        check("s update", s_reg[0].re, s_reg[0].im, nr, ni);
        check("pilot s kept", s_reg[1].re, s_reg[1].im, pr0, pi0);
        sr = nr; si = ni;
      end
    end

    // 5. rotation
    s_in = '{re: WS'(123), im: WS'(-45)};
    u = UOP_NOP; u.rot_s = 1'b1;
    issue(u);
    check("s rotation", s_reg[0].re, s_reg[0].im, 123, -45);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
