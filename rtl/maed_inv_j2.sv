// maed_inv_j2: inversion of ||j~||^2 (line 7a of MAED). After pseudonormalization ||j~||^2 is
// at least 1 and below 64 (Q.14, 21 bits). A leading-one detector gives e = floor(log2 ||j||^2);
// shifting by e brings ||j||^2 into [1, 2), whose LUT_BITS=12 fraction bits address a table
// holding round(2^27 / (4096 + a + 0.5)) ~ 1/m in Q.15 (16 bits, below 2^15). The result is
// therefore 2^e/||j||^2. Rather than scaling the table output back by 2^-e, the same shift is
// applied to the 16 parts of x (the x16 shifters), so that j^H x is computed with x 2^-e and
// the product (j^H x 2^-e)(2^e/||j||^2) is the wanted j^H x/||j||^2 without widening the
// multiplier. The shifters write into the 21-bit B operand: x_out = (x << 4) >>> e in Q.12,
// which loses no bit for e <= 4. `inv` and `e` are registered when `en` is high (one cycle);
// x_out follows the registered e combinationally. Structure (LOD, shifter, LUT, x16 shifters)
// is the published one; table size and formats are this design's. The table is large because
// z = x - j (j^H x)/||j||^2 must cancel a jammer up to 30 dB stronger than the user: a relative
// error d in the table value leaves about d |c| |j| of jammer in z, so d must be of order 2^-13.
// Lint notes: the sign bit of nj is unused (a squared norm is never negative) and only the
// fraction bits of the shifted mantissa m address the table (its integer bit is the leading one).
module maed_inv_j2
  import maed_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [20:0]   nj,
  input  cx_t                  x_in  [B],
  output logic signed [WA-1:0] inv,
  output logic [2:0]           e,
  output cb_t                  x_out [B]
);
  localparam int unsigned FN = 14;  // fraction bits of ||j||^2

  localparam int unsigned LUT_BITS = 12;

  typedef logic [15:0] lut_t [1 << LUT_BITS];
  function automatic lut_t gen_lut();
    lut_t t;
    longint num, den;
    for (int a = 0; a < (1 << LUT_BITS); a++) begin
      den = 2 * ((longint'(1) << LUT_BITS) + longint'(a)) + 1;
      num = longint'(1) << (LUT_BITS + 16);
      t[a] = 16'((num + den / 2) / den);
    end
    return t;
  endfunction
  localparam lut_t LUT = gen_lut();

  logic [4:0] pl;
  logic [2:0] e_c;
  logic [LUT_BITS-1:0] addr;
  always_comb begin
    logic [31:0] m;
    pl = lod32(32'(nj[19:0]));
    if (pl < 5'(FN))          e_c = 3'd0;
    else if (pl > 5'(FN + 6)) e_c = 3'd6;
    else                      e_c = 3'(pl - 5'(FN));
    m = (32'(nj[19:0]) << LUT_BITS) >> (5'(FN) + 5'(e_c));  // mantissa 1.aaa..a
    addr = m[LUT_BITS-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      inv <= '0;
      e   <= '0;
    end else if (en) begin
      inv <= WA'(LUT[addr]);
      e   <= e_c;
    end

  always_comb
    for (int b = 0; b < B; b++) begin
      x_out[b].re = (WB'(x_in[b].re) <<< 4) >>> e;
      x_out[b].im = (WB'(x_in[b].im) <<< 4) >>> e;
    end
endmodule
