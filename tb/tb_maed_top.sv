// tb_maed_top: end-to-end test of the MAED detector at its default parameters (TMAX=10,
// B=8, K=32, T=4). For each of the four jammer types (barrage, smart data, smart pilot, sparse)
// it draws Rayleigh channels h and j, QPSK symbols, a jammer signal scaled to a receive
// jammer-to-signal ratio of RHO_DB and noise at SNR_DB, quantizes Y to Q9.7, runs the detector,
// and checks:
//   - the run takes exactly 83 cycles per iteration (830 cycles start to done);
//   - the pilots in s~ are untouched;
//   - the hard decisions agree with a double-precision model of the same algorithm (same
//     PRNG vector u, same step sizes), at most MAX_REF_MISMATCH bits per block;
//   - the bit errors against the transmitted data stay below MAX_BIT_ERR per block and below
//     1 % over all blocks;
//   - every mechanism occurred at least once: iterations, clipping at the QPSK square,
//     pseudonormalization shifting the raw jammer estimate down and (rarely) up, and the
//     inversion scaling x (e > 0).
// The default signal-to-noise ratio is 15 dB, where both the fixed-point detector and the
// floating-point model make few errors; the limits leave room for the odd bit on which they
// differ. A watchdog ends the run after 200000 cycles.
module tb_maed_top;
  import maed_pkg::*;

  localparam int TMAX = 10;
  localparam int NBLK = 10;              // blocks per jammer type
  localparam real RHO_DB = 30.0;
  localparam real SNR_DB = 15.0;
  localparam int MAX_REF_MISMATCH = 3;  // of 56 bits per block
  localparam int MAX_BIT_ERR = 3;       // of 56 bits per block
  // over all blocks the detector must reach a bit error rate below 1 % (a detector that
  // fails to cancel the jammer sits near 50 %)

  logic clk = 1'b0, rst_n = 1'b0;
  logic y_we = 1'b0;
  logic [2:0] y_row = '0;
  logic [4:0] y_col = '0;
  cy_t y_data = '0;
  cs_t pilots [T];
  logic [3:0] tau_shift [TMAX];
  logic start = 1'b0, busy, done;
  cs_t s_out [K];

  maed_top dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc_count = 0;
  always @(posedge clk) cyc_count <= cyc_count + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_pn_down = 0, n_pn_up = 0, n_inv_e = 0, n_iter = 0;
  always @(posedge clk) begin
    if (dut.pn_en) begin
      if (dut.u_pn.p > 5'(FJ)) n_pn_down++;
      if (dut.u_pn.p < 5'(FJ)) n_pn_up++;
    end
    if (dut.inv_j_en && dut.u_inv_j.e_c != 0) n_inv_e++;
    if (dut.prng_en) n_iter++;
  end

  // ---- random numbers ----
  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction
  function automatic real gauss();  // N(0,1)
    return $sqrt(-2.0 * $ln(urand())) * $cos(6.283185307179586 * urand());
  endfunction

  // ---- scenario ----
  real yr [B][K], yi [B][K];
  real hr [B], hi [B], jr [B], ji [B];
  real sr [K], si [K], wr [K], wi [K];
  logic [63:0] prng;

  function automatic logic [63:0] xs(input logic [63:0] v);
    v = v ^ (v << 13); v = v ^ (v >> 7); v = v ^ (v << 17);
    return v;
  endfunction

  // double-precision MAED on the quantized Y, results in ref_r/ref_i
  real ref_r [K], ref_i [K];
  task automatic ref_model();
    real qy_r [B][K], qy_i [B][K];
    real er [B][K], ei [B][K];
    real ns, xr [B], xi [B], ur [B], ui [B], vr [K], vi [K], jjr [B], jji [B];
    real nj, jxr, jxi, zr [B], zi [B], gr, gi, tau, c;
    logic [63:0] st;
    c = 362.0 / 512.0;
    for (int b = 0; b < B; b++) for (int k = 0; k < K; k++) begin
      qy_r[b][k] = real'(qy(yr[b][k])) / 128.0;
      qy_i[b][k] = real'(qy(yi[b][k])) / 128.0;
    end
    for (int k = 0; k < K; k++) begin
      ref_r[k] = (k < T) ? real'(pilots[k].re) / 512.0 : 0.0;
      ref_i[k] = (k < T) ? real'(pilots[k].im) / 512.0 : 0.0;
    end
    st = 64'h9E37_79B9_7F4A_7C15;
    for (int t = 0; t < TMAX; t++) begin
      st = xs(st);
      ns = 0.0;
      for (int k = 0; k < K; k++) ns += ref_r[k] * ref_r[k] + ref_i[k] * ref_i[k];
      for (int b = 0; b < B; b++) begin
        xr[b] = 0.0; xi[b] = 0.0;
        for (int k = 0; k < K; k++) begin  // Y s*
          xr[b] += qy_r[b][k] * ref_r[k] + qy_i[b][k] * ref_i[k];
          xi[b] += qy_i[b][k] * ref_r[k] - qy_r[b][k] * ref_i[k];
        end
        xr[b] /= ns; xi[b] /= ns;
        for (int k = 0; k < K; k++) begin
          er[b][k] = qy_r[b][k] - (xr[b] * ref_r[k] - xi[b] * ref_i[k]);
          ei[b][k] = qy_i[b][k] - (xr[b] * ref_i[k] + xi[b] * ref_r[k]);
        end
        ur[b] = st[2*b] ? -1.0 : 1.0;
        ui[b] = st[2*b+1] ? -1.0 : 1.0;
      end
      for (int k = 0; k < K; k++) begin  // v = E^H u
        vr[k] = 0.0; vi[k] = 0.0;
        for (int b = 0; b < B; b++) begin
          vr[k] += er[b][k] * ur[b] + ei[b][k] * ui[b];
          vi[k] += er[b][k] * ui[b] - ei[b][k] * ur[b];
        end
      end
      nj = 0.0; jxr = 0.0; jxi = 0.0;
      for (int b = 0; b < B; b++) begin  // j = E v
        jjr[b] = 0.0; jji[b] = 0.0;
        for (int k = 0; k < K; k++) begin
          jjr[b] += er[b][k] * vr[k] - ei[b][k] * vi[k];
          jji[b] += er[b][k] * vi[k] + ei[b][k] * vr[k];
        end
        nj += jjr[b] * jjr[b] + jji[b] * jji[b];
        jxr += jjr[b] * xr[b] + jji[b] * xi[b];
        jxi += jjr[b] * xi[b] - jji[b] * xr[b];
      end
      tau = 1.0 / real'(1 << tau_shift[t]);
      for (int b = 0; b < B; b++) begin  // z = x - j (j^H x)/||j||^2
        zr[b] = tau * (xr[b] - (jjr[b] * jxr - jji[b] * jxi) / nj);
        zi[b] = tau * (xi[b] - (jjr[b] * jxi + jji[b] * jxr) / nj);
      end
      for (int k = T; k < K; k++) begin  // s <- prox(s + conj(E^H tau z))
        gr = 0.0; gi = 0.0;
        for (int b = 0; b < B; b++) begin
          gr += er[b][k] * zr[b] + ei[b][k] * zi[b];
          gi += er[b][k] * zi[b] - ei[b][k] * zr[b];
        end
        ref_r[k] = ref_r[k] + gr;
        ref_i[k] = ref_i[k] - gi;
        if (ref_r[k] > c) ref_r[k] = c;
        if (ref_r[k] < -c) ref_r[k] = -c;
        if (ref_i[k] > c) ref_i[k] = c;
        if (ref_i[k] < -c) ref_i[k] = -c;
      end
    end
  endtask

  function automatic logic signed [WY-1:0] qy(input real v);
    real q;
    q = v * 128.0;
    q = (q >= 0.0) ? q + 0.5 : q - 0.5;
    if (q > 32767.0) return 16'sh7fff;
    if (q < -32768.0) return 16'sh8000;
    return WY'($rtoi(q));
  endfunction

  task automatic make_block(input int jtype);
    real es, ej, sc, n0, nh, sigma;
    int nz;
    nh = 0.0;
    for (int b = 0; b < B; b++) begin
      hr[b] = gauss() / $sqrt(2.0); hi[b] = gauss() / $sqrt(2.0);
      jr[b] = gauss() / $sqrt(2.0); ji[b] = gauss() / $sqrt(2.0);
      nh += hr[b] * hr[b] + hi[b] * hi[b];
    end
    for (int k = 0; k < K; k++) begin
      sr[k] = (($urandom & 1) != 0) ? -0.7071067811865476 : 0.7071067811865476;
      si[k] = (($urandom & 1) != 0) ? -0.7071067811865476 : 0.7071067811865476;
      wr[k] = gauss() / $sqrt(2.0); wi[k] = gauss() / $sqrt(2.0);
      case (jtype)
        1: if (k < T)  begin wr[k] = 0.0; wi[k] = 0.0; end   // smart data jammer
        2: if (k >= T) begin wr[k] = 0.0; wi[k] = 0.0; end   // smart pilot jammer
        default: ;
      endcase
    end
    if (jtype == 3) begin  // sparse: exactly 4 active channel uses
      logic [K-1:0] act;
      act = '0; nz = 0;
      while (nz < 4) begin
        int p;
        p = int'($urandom % K);
        if (!act[p]) begin act[p] = 1'b1; nz++; end
      end
      for (int k = 0; k < K; k++) if (!act[k]) begin wr[k] = 0.0; wi[k] = 0.0; end
    end
    // scale jammer to the wanted jammer-to-signal ratio
    es = 0.0; ej = 0.0;
    for (int b = 0; b < B; b++) for (int k = 0; k < K; k++) begin
      es += (hr[b]*hr[b] + hi[b]*hi[b]) * (sr[k]*sr[k] + si[k]*si[k]);
      ej += (jr[b]*jr[b] + ji[b]*ji[b]) * (wr[k]*wr[k] + wi[k]*wi[k]);
    end
    sc = $sqrt(es * $pow(10.0, RHO_DB / 10.0) / ej);
    n0 = nh / (real'(B) * $pow(10.0, SNR_DB / 10.0));
    sigma = $sqrt(n0 / 2.0);
    for (int b = 0; b < B; b++) for (int k = 0; k < K; k++) begin
      yr[b][k] = hr[b]*sr[k] - hi[b]*si[k] + sc * (jr[b]*wr[k] - ji[b]*wi[k]) + sigma * gauss();
      yi[b][k] = hr[b]*si[k] + hi[b]*sr[k] + sc * (jr[b]*wi[k] + ji[b]*wr[k]) + sigma * gauss();
    end
    for (int k = 0; k < T; k++) begin
      pilots[k].re = (sr[k] < 0.0) ? -11'sd362 : 11'sd362;
      pilots[k].im = (si[k] < 0.0) ? -11'sd362 : 11'sd362;
    end
  endtask

  task automatic load_y();
    for (int b = 0; b < B; b++) for (int k = 0; k < K; k++) begin
      @(negedge clk);
      y_we = 1'b1; y_row = 3'(b); y_col = 5'(k);
      y_data = '{re: qy(yr[b][k]), im: qy(yi[b][k])};
    end
    @(negedge clk);
    y_we = 1'b0;
  endtask

  int n_clip = 0, tot_err = 0, tot_mis = 0, tot_ref_err = 0;
  initial begin
    for (int t = 0; t < TMAX; t++) tau_shift[t] = 4'd3;
    for (int k = 0; k < T; k++) pilots[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int jt = 0; jt < 4; jt++) begin
      for (int blk = 0; blk < NBLK; blk++) begin
        int t0, lat, err, mis;
        make_block(jt);
        load_y();
        @(negedge clk);
        start = 1'b1;
        t0 = cyc_count;
        @(negedge clk);
        start = 1'b0;
        while (!done) @(negedge clk);
        lat = cyc_count - t0;
        checks++;
        if (lat != 83 * TMAX + 1) begin
          failures++;
          $display("latency %0d, expected %0d", lat, 83 * TMAX + 1);
        end
        for (int k = 0; k < T; k++) begin
          checks++;
          if (s_out[k] != pilots[k]) begin failures++; $display("pilot %0d changed", k); end
        end
        ref_model();
        err = 0; mis = 0;
        for (int k = T; k < K; k++) begin
          if ((s_out[k].re < 0) != (sr[k] < 0.0)) err++;
          if ((s_out[k].im < 0) != (si[k] < 0.0)) err++;
          if ((s_out[k].re < 0) != (ref_r[k] < 0.0)) mis++;
          if ((s_out[k].im < 0) != (ref_i[k] < 0.0)) mis++;
          if ((ref_r[k] < 0.0) != (sr[k] < 0.0)) tot_ref_err++;
          if ((ref_i[k] < 0.0) != (si[k] < 0.0)) tot_ref_err++;
          if (s_out[k].re == 11'sd362 || s_out[k].re == -11'sd362) n_clip++;
        end
        tot_err += err; tot_mis += mis;
        $display("jammer %0d block %0d: bit errors %0d/56, mismatches to float model %0d",
                 jt, blk, err, mis);
        checks += 2;
        if (mis > MAX_REF_MISMATCH) failures++;
        if (err > MAX_BIT_ERR) failures++;
      end
    end
    $display("total bit errors %0d/%0d (float model %0d), total mismatches %0d", tot_err,
             4 * NBLK * 56, tot_ref_err, tot_mis);
    $display("mechanisms: iterations %0d, clip %0d, pseudonorm down %0d up %0d, inv scale %0d",
             n_iter, n_clip, n_pn_down, n_pn_up, n_inv_e);
    checks += 6;
    if (tot_err * 100 > 4 * NBLK * 56) failures++;
    if (n_iter != 4 * NBLK * TMAX) failures++;
    if (n_clip == 0) failures++;
    if (n_pn_down == 0) failures++;
    if (n_pn_up == 0) failures++;
    if (n_inv_e == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
