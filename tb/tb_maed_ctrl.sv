// tb_maed_ctrl: self-checking test of the MAED controller at TMAX = 10. After `start` it
// checks, cycle by cycle, that
//   - busy stays high for exactly 83 * TMAX = 830 cycles and done pulses once at the end
//     (83 cycles per iteration);
//   - every enable (PRNG, 1/||s||^2, x write, pseudonormalization, 1/||j||^2, c, tau z, s write)
//     fires exactly once per iteration, at its scheduled cycle;
//   - the broadcast source selection and the micro-operations follow the schedule: 8 Cannon
//     steps of line 4a with s rotating, 8 E writes of line 4b, 8 Hermitian steps each for lines
//     6a and 8a, one update with s_upd, and the scalar operations only in slice 0;
//   - `iter` counts the iterations; nothing is issued when idle.
// A watchdog ends the run if it hangs.
module tb_maed_ctrl;
  import maed_pkg::*;
  localparam int TMAX = 10;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  uop_t     uop [NSLICE];
  ext_sel_e ext_sel;
  logic s_load, inv_s2_en, x_we, pn_en, inv_j_en, c_en, tau_en, s_we, prng_en, busy, done;
  logic [$clog2(TMAX)-1:0] iter;
  logic [6:0] cyc;

  maed_ctrl #(.TMAX(TMAX)) dut (.clk, .rst_n, .start, .uop, .ext_sel, .s_load, .inv_s2_en,
    .x_we, .pn_en, .inv_j_en, .c_en, .tau_en, .s_we, .prng_en, .iter, .cyc, .busy, .done);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int n_busy, n_done, t, c;
    int cnt [8];
    int n_rot, n_ewe, n_herm, n_upd, n_other;
    int en_cyc [8];
    logic [7:0] ens;
    en_cyc = '{0, 7, 16, 52, 58, 66, 70, 82};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    // idle: nothing issued
    expect_eq("idle busy", int'(busy), 0);
    expect_eq("idle uop", int'(uop[0] == UOP_NOP && uop[3] == UOP_NOP), 1);
    start = 1'b1;
    #1;
    expect_eq("s_load with start", int'(s_load), 1);
    @(negedge clk);
    start = 1'b0;
    n_busy = 0; n_done = 0; t = 0;
    for (int i = 0; i < 8; i++) cnt[i] = 0;
    n_rot = 0; n_ewe = 0; n_herm = 0; n_upd = 0; n_other = 0;
    while (busy) begin
      c = n_busy % ITER_CYCLES;
      t = n_busy / ITER_CYCLES;
      if (c == 0) expect_eq("iter", int'(iter), t);
      ens = {s_we, tau_en, c_en, inv_j_en, pn_en, x_we, inv_s2_en, prng_en};
      for (int i = 0; i < 8; i++) begin
        if (ens[i]) begin
          cnt[i]++;
          expect_eq($sformatf("enable %0d cycle", i), c, en_cyc[i]);
        end
      end
      if (uop[0].rot_s) n_rot++;
      if (uop[2].e_we) n_ewe++;
      if (uop[1].q_sel == Q_NEIGH || (uop[1].a_conj && uop[1].a_sel == A_E)) n_herm++;
      if (uop[3].s_upd) n_upd++;
      if (uop[0].a_sel == A_EXT) begin
        if (uop[1] != UOP_NOP) n_other++;   // scalar steps only in slice 0
      end
      if (c >= 1 && c <= 8) expect_eq("4a uses Y", int'(uop[2].a_sel == A_Y && uop[2].rot_s), 1);
      if (c >= 29 && c <= 36) expect_eq("6a source u", int'(ext_sel == EXT_U), 1);
      if (c >= 71 && c <= 78) expect_eq("8a source tau z", int'(ext_sel == EXT_TZ), 1);
      if (c == 14) expect_eq("x source", int'(ext_sel == EXT_XMUL), 1);
      @(negedge clk);
      n_busy++;
      if (done) n_done++;
      if (n_busy > 2000) break;
    end
    @(negedge clk);
    if (done) n_done++;
    expect_eq("busy cycles", n_busy, ITER_CYCLES * TMAX);
    expect_eq("done pulses", n_done, 1);
    for (int i = 0; i < 8; i++) expect_eq($sformatf("enable %0d count", i), cnt[i], TMAX);
    expect_eq("rotations (4a + 4b)", n_rot, 16 * TMAX);
    expect_eq("E writes", n_ewe, 8 * TMAX);
    expect_eq("Hermitian steps (6a + 8a)", n_herm, 16 * TMAX);
    expect_eq("updates", n_upd, TMAX);
    expect_eq("scalar ops outside slice 0", n_other, 0);
    expect_eq("idle after done", int'(busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
