// maed_pseudonorm: pseudonormalization of the jammer estimate j~ (line 6b of MAED). Line 7a only
// needs the direction of j~, whose magnitude can span a huge range (it grows with the jammer
// power). The module takes |.| of each of the 16 real/imaginary parts, finds each part's
// leading one (LOD), selects the largest position p = floor(log2 jmax) with a comparator tree,
// and shifts all parts by p - FJ so that the largest part lands in [1, 2) in Q.14 (16 bits).
// Input: 8 complex raw entries, 23 bits per part (integer). Output registered when `en` is high
// (one cycle), together with p. The |.|-LOD-comparator tree-shifter structure and the scaling
// rule 2^-floor(log2 jmax) are the published ones; widths and latency are this design's.
module maed_pseudonorm
  import maed_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  cjr_t       j_in  [B],
  output cj_t        j_out [B],
  output logic [4:0] p_max
);
  logic [4:0] pos [2*B];
  logic [4:0] l1 [B], l2 [B/2], l3 [B/4];
  logic [4:0] p;

  always_comb begin
    for (int b = 0; b < B; b++) begin
      pos[2*b]   = lod32(32'(j_in[b].re < 0 ? -33'(j_in[b].re) : 33'(j_in[b].re)));
      pos[2*b+1] = lod32(32'(j_in[b].im < 0 ? -33'(j_in[b].im) : 33'(j_in[b].im)));
    end
    // comparator tree, 16 -> 1
    for (int k = 0; k < B; k++)   l1[k] = (pos[2*k] > pos[2*k+1]) ? pos[2*k] : pos[2*k+1];
    for (int k = 0; k < B/2; k++) l2[k] = (l1[2*k] > l1[2*k+1]) ? l1[2*k] : l1[2*k+1];
    for (int k = 0; k < B/4; k++) l3[k] = (l2[2*k] > l2[2*k+1]) ? l2[2*k] : l2[2*k+1];
    p = (l3[0] > l3[1]) ? l3[0] : l3[1];
  end

  function automatic logic signed [WJ-1:0] scale(input logic signed [WJR-1:0] v,
                                                 input logic [4:0] pm);
    logic signed [63:0] w;
    if (pm >= 5'(FJ)) w = 64'(v) >>> (pm - 5'(FJ));
    else              w = 64'(v) <<< (5'(FJ) - pm);
    return WJ'(sat(w, WJ));
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int b = 0; b < B; b++) j_out[b] <= '0;
      p_max <= '0;
    end else if (en) begin
      for (int b = 0; b < B; b++) begin
        j_out[b].re <= scale(j_in[b].re, p);
        j_out[b].im <= scale(j_in[b].im, p);
      end
      p_max <= p;
    end
endmodule
