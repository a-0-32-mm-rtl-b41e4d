// tb_maed_slice: self-checking test of a slice of 8 PEs connected in a ring. It loads a random
// 8x8 block Y_0 and a random s~ block, then runs the two ring algorithms with the schedule the
// controller uses:
//   - Cannon's algorithm for Y s^* (line 4a): 8 issues, s rotating one PE per step; PE j must
//     end with sum_k Y[j][k] conj(s_k) (products shifted right by 9, rounded), read 2 cycles
//     after the last issue;
//     after the 8 rotations every s register must be back at its own entry;
//   - the Hermitian variant for Y^H b with a broadcast b (as in lines 6a/8a): 8 issues with
//     partial sums handed from PE j+1 to PE j; PE j must end with sum_b conj(Y[b][j]) b_b.
// Slice 0 holds the pilots in PEs 0..3; s_new of those PEs must equal their s register.
// A watchdog ends the run if it hangs.
module tb_maed_slice;
  import maed_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  uop_t uop;
  ca_t  a_ext [B];
  cb_t  b_ext [B], q_ext [B];
  logic s_load, y_we;
  cs_t  s_init [B];
  logic [2:0] y_row, y_idx;
  cy_t  y_data;
  cs_t  s_reg [B], s_new [B];
  cb_t  sum [B], prod [B];

  maed_slice #(.SLICE(0)) dut (.clk, .rst_n, .uop, .a_ext, .b_ext, .q_ext, .s_load, .s_init,
    .y_we, .y_row, .y_idx, .y_data, .s_reg, .sum, .prod, .s_new);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int yr [B][B], yi [B][B], sr [B], si [B], br [B], bi [B];
    longint er, ei;
    uop = UOP_NOP; s_load = 1'b0; y_we = 1'b0; y_row = '0; y_idx = '0; y_data = '0;
    for (int j = 0; j < B; j++) begin a_ext[j] = '0; b_ext[j] = '0; q_ext[j] = '0; s_init[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < B; r++)
      for (int c = 0; c < B; c++) begin
        yr[r][c] = $urandom_range(8000, 0) - 4000;
        yi[r][c] = $urandom_range(8000, 0) - 4000;
        y_we = 1'b1; y_row = 3'(r); y_idx = 3'(c); y_data = '{re: WY'(yr[r][c]), im: WY'(yi[r][c])};
        @(negedge clk);
      end
    y_we = 1'b0;
    for (int j = 0; j < B; j++) begin
      sr[j] = $urandom_range(724, 0) - 362; si[j] = $urandom_range(724, 0) - 362;
      s_init[j] = '{re: WS'(sr[j]), im: WS'(si[j])};
    end
    s_load = 1'b1;
    @(negedge clk);
    s_load = 1'b0;

    // Cannon: Y s^*
    for (int st = 0; st < B; st++) begin
      uop = UOP_NOP; uop.a_sel = A_Y; uop.idx_off = 3'(st); uop.b_sel = B_S; uop.b_conj = 1'b1;
      uop.rot_s = 1'b1; uop.shift = 5'd9; uop.acc_en = 1'b1; uop.q_sel = (st == 0) ? Q_ZERO : Q_SUM;
      @(negedge clk);
    end
    uop = UOP_NOP;
    repeat (2) @(negedge clk);
    for (int j = 0; j < B; j++) begin
      er = 0; ei = 0;
      for (int k = 0; k < B; k++) begin
        er += (longint'(yr[j][k]) * sr[k] + longint'(yi[j][k]) * si[k] + 256) >>> 9;
        ei += (longint'(yi[j][k]) * sr[k] - longint'(yr[j][k]) * si[k] + 256) >>> 9;
      end
      checks++;
      if (longint'(sum[j].re) != er || longint'(sum[j].im) != ei) begin
        failures++;
        $display("Cannon PE %0d: got (%0d,%0d) expected (%0d,%0d)", j, sum[j].re, sum[j].im, er, ei);
      end
      checks++;
      if (int'(s_reg[j].re) != sr[j] || int'(s_reg[j].im) != si[j]) failures++;
      if (j < T) begin
        checks++;
        if (s_new[j] != s_reg[j]) failures++;
      end
    end

    // Hermitian: Y^H b with broadcast b, partial sums rotating
    for (int b = 0; b < B; b++) begin
      br[b] = $urandom_range(2000, 0) - 1000; bi[b] = $urandom_range(2000, 0) - 1000;
    end
    for (int st = 0; st < B; st++) begin
      uop = UOP_NOP; uop.a_sel = A_Y; uop.a_conj = 1'b1; uop.idx_off = 3'(st + 1);
      uop.b_sel = B_EXT; uop.shift = 5'd4; uop.acc_en = 1'b1;
      uop.q_sel = (st == 0) ? Q_ZERO : Q_NEIGH;
      for (int j = 0; j < B; j++) b_ext[j] = '{re: WB'(br[j]), im: WB'(bi[j])};
      @(negedge clk);
    end
    uop = UOP_NOP;
    repeat (2) @(negedge clk);
    for (int j = 0; j < B; j++) begin
      er = 0; ei = 0;
      for (int b = 0; b < B; b++) begin
        er += (longint'(yr[b][j]) * br[b] + longint'(yi[b][j]) * bi[b] + 8) >>> 4;
        ei += (longint'(yr[b][j]) * bi[b] - longint'(yi[b][j]) * br[b] + 8) >>> 4;
      end
      checks++;
      if (longint'(sum[j].re) != er || longint'(sum[j].im) != ei) begin
        failures++;
        $display("Hermitian PE %0d: got (%0d,%0d) expected (%0d,%0d)", j, sum[j].re, sum[j].im, er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
