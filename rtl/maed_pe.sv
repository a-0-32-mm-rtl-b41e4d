// maed_pe: one processing element of the MAED detector. PE j of slice i holds row j of the
// 8x8 block Y_i (8 x 16b FF array, Q.7), the same row of the residual E = Y - x s^T
// (8 x 13b, Q.4), and s~ entry 8i+j in its s register (11b, Q.9). It performs one complex
// multiply-accumulate per cycle, steered by a micro-operation (maed_pkg::uop_t):
//
//   cycle t    issue:   operand A (16b) and B (21b) registers load from their muxes;
//                       the s register may rotate (takes the neighbour's s)
//   cycle t+1  multiply: complex A*B (optionally conjugated), arithmetic right shift by
//                       uop.shift with rounding (half an LSB added first), saturation to 21b,
//                       into the product register
//   cycle t+2  stage 3: the two 21b adder input registers load: P <- product (or
//                       conj(sum) for the update), Q <- 0 / own sum / neighbour's sum /
//                       Y entry / broadcast / s
//   cycle t+3  result:  sum = Q +- P (combinational); may be written to E (via one more
//                       register, rounded from Q.7 to Q.4, so E changes at the end of t+4) or,
//                       clipped, to s
//
// With Q <- own sum the PE accumulates (Cannon's algorithm, the s or B operand rotating around
// the ring); with Q <- neighbour's sum the partial sums rotate while operands stay put (the
// Hermitian variant that reads E in the same order yet computes E^H z). The register
// structure (16b and 21b operand registers, multiplier register, two 21b adder input registers,
// add/subtract, clip unit, E FF array 8x13b, s 11b) follows the published PE diagram; the
// pipeline timing, the number formats, the rounding and the mux encodings are this design's
// choices (truncating instead of rounding raised the end-to-end bit error rate from about 0.4 %
// to 2.5 % with a 30 dB jammer). Y has
// no reset: it must be written through y_we before use. E is written before it is read. The
// micro-operation is delayed by three registers (u1..u3) as a whole; only the fields each stage
// needs are read, so lint reports the others of u3 as unused.
module maed_pe
  import maed_pkg::*;
#(
  parameter int unsigned PE_IDX   = 0,     // position j inside the slice
  parameter bit          IS_PILOT = 1'b0   // entry 8i+j is a pilot: prox keeps it fixed
) (
  input  logic       clk,
  input  logic       rst_n,
  input  uop_t       uop,
  input  ca_t        a_ext,
  input  cb_t        b_ext,
  input  cb_t        q_ext,
  input  cs_t        s_in,     // s register of PE j+1
  input  cb_t        b_in,     // B operand register of PE j+1
  input  cb_t        sum_in,   // sum of PE j+1
  input  logic       s_load,   // load s_init into the s register
  input  cs_t        s_init,
  input  logic       y_we,
  input  logic [2:0] y_idx,
  input  cy_t        y_data,
  output cs_t        s_reg,
  output cb_t        b_reg,
  output cb_t        sum,
  output cb_t        prod,
  output cs_t        s_new
);
  cy_t yrow [B];
  ce_t erow [B];

  ca_t  a_r;
  uop_t u1, u2, u3;
  logic [2:0] i1, i2, i3;
  cb_t  p_r, q_r;
  logic sub_r;
  logic       ew_v;
  logic [2:0] ew_idx;
  ce_t        ew_d;
  cs_t        s_clip;

  logic [2:0] idx0;
  ca_t  a_mux;
  cb_t  b_mux;
  assign idx0 = 3'((PE_IDX + 32'(uop.idx_off)) % B);

  // ---- issue: operand muxes ----
  always_comb begin
    unique case (uop.a_sel)
      A_Y:     a_mux = '{re: WA'(yrow[idx0].re), im: WA'(yrow[idx0].im)};
      A_E:     a_mux = '{re: WA'(erow[idx0].re), im: WA'(erow[idx0].im)};
      A_S:     a_mux = '{re: WA'(s_reg.re), im: WA'(s_reg.im)};
      A_EXT:   a_mux = a_ext;
      default: a_mux = '0;
    endcase
    if (uop.a_conj) a_mux.im = -a_mux.im;
    unique case (uop.b_sel)
      B_S:     b_mux = '{re: WB'(s_reg.re), im: WB'(s_reg.im)};
      B_EXT:   b_mux = b_ext;
      B_ROT:   b_mux = b_in;
      B_SUM:   b_mux = sum;
      default: b_mux = '0;
    endcase
    if (uop.b_conj) b_mux.im = -b_mux.im;
  end

  // ---- stage 2: complex multiply ----
  logic signed [63:0] pre, pim;
  always_comb begin
    pre = 64'(a_r.re) * 64'(b_reg.re) - 64'(a_r.im) * 64'(b_reg.im);
    pim = 64'(a_r.re) * 64'(b_reg.im) + 64'(a_r.im) * 64'(b_reg.re);
    if (u1.shift != 0) begin
      pre = pre + (64'sd1 <<< (u1.shift - 1));
      pim = pim + (64'sd1 <<< (u1.shift - 1));
    end
    pre = sat(pre >>> u1.shift, WB);
    pim = sat(pim >>> u1.shift, WB);
  end

  // ---- stage 4: add / subtract ----
  always_comb begin
    logic signed [63:0] r, i;
    r = sub_r ? 64'(q_r.re) - 64'(p_r.re) : 64'(q_r.re) + 64'(p_r.re);
    i = sub_r ? 64'(q_r.im) - 64'(p_r.im) : 64'(q_r.im) + 64'(p_r.im);
    sum.re = WB'(sat(r, WB));
    sum.im = WB'(sat(i, WB));
  end

  maed_clip u_clip (.d(sum), .q(s_clip));
  assign s_new = IS_PILOT ? s_reg : s_clip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_r <= '0; b_reg <= '0; prod <= '0; p_r <= '0; q_r <= '0; sub_r <= 1'b0;
      u1 <= UOP_NOP; u2 <= UOP_NOP; u3 <= UOP_NOP;
      i1 <= '0; i2 <= '0; i3 <= '0;
      ew_v <= 1'b0; ew_idx <= '0; ew_d <= '0;
      s_reg <= '0;
    end else begin
      // issue
      a_r <= a_mux;
      b_reg <= b_mux;
      u1 <= uop; i1 <= idx0;
      // multiply
      prod <= '{re: WB'(pre), im: WB'(pim)};
      u2 <= u1; i2 <= i1;
      // stage 3
      u3 <= u2; i3 <= i2;
      if (u2.acc_en) begin
        p_r <= (u2.p_sel == P_SUMCONJ) ? '{re: sum.re, im: WB'(sat(-64'(sum.im), WB))} : prod;
        sub_r <= u2.sub;
        unique case (u2.q_sel)
          Q_SUM:   q_r <= sum;
          Q_NEIGH: q_r <= sum_in;
          Q_Y:     q_r <= '{re: WB'(yrow[i2].re), im: WB'(yrow[i2].im)};
          Q_EXT:   q_r <= q_ext;
          Q_S:     q_r <= '{re: WB'(s_reg.re), im: WB'(s_reg.im)};
          default: q_r <= '0;
        endcase
      end
      // result
      ew_v <= u3.e_we;
      ew_idx <= i3;
      ew_d <= '{re: WE'(sat((64'(sum.re) + 64'sd4) >>> 3, WE)), im: WE'(sat((64'(sum.im) + 64'sd4) >>> 3, WE))};
      if (s_load)            s_reg <= s_init;
      else if (u3.s_upd)     s_reg <= s_new;
      else if (uop.rot_s)    s_reg <= s_in;
      // a rotation and an update never coincide in a correct schedule
      assert (!(u3.s_upd && uop.rot_s)) else $error("s rotation during update");
    end
  end

  // FF arrays (no reset)
  always_ff @(posedge clk) begin
    if (y_we) yrow[y_idx] <= y_data;
    if (ew_v) erow[ew_idx] <= ew_d;
  end

endmodule
