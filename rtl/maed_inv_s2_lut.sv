// maed_inv_s2_lut: reciprocal of ||s~||^2 by table look-up. Because every pilot has |s|^2 = 1
// and every clipped data entry |s|^2 <= 1, ||s~||^2 lies in [T, K] = [4, 32], so a small table
// suffices. The 21-bit input (Q.14) is rounded to a quarter, a = round(4 ||s||^2), clamped to
// 16..128, and the table returns round(2^18 / a), i.e. 1/||s||^2 in unsigned Q.16 (2048..16384).
// The table is computed at elaboration from that formula. Output is registered when `en` is
// high (one cycle latency). A look-up table is the published method; the address resolution
// and the formats are this design's.
module maed_inv_s2_lut
  import maed_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [20:0]   ns,
  output logic signed [WA-1:0] inv
);
  typedef logic [15:0] lut_t [129];

  function automatic lut_t gen_lut();
    lut_t t;
    for (int a = 0; a < 129; a++)
      t[a] = (a < 16) ? 16'd16384 : 16'(((1 << 18) + a / 2) / a);
    return t;
  endfunction

  localparam lut_t LUT = gen_lut();

  logic [7:0] addr;
  always_comb begin
    logic signed [21:0] r;
    r = (22'(ns) + 22'sd2048) >>> 12;
    if (r < 22'sd16)       addr = 8'd16;
    else if (r > 22'sd128) addr = 8'd128;
    else                   addr = 8'(r);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  inv <= '0;
    else if (en) inv <= WA'(LUT[addr]);
endmodule
