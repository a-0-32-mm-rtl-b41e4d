// maed_clip: proximal operator of the QPSK detector for one entry of s~. It clips the real and
// the imaginary part independently to [-CLIP, +CLIP], which projects the entry onto the square
// that is the convex hull of the QPSK points (+-1 +- j)/sqrt(2). Input is the 21-bit sum
// s + conj(g) in Q.9, output an 11-bit entry in Q.9; CLIP = 362 = round(2^9/sqrt(2)).
// Purely combinational. The operation is the paper's prox; the number format is this design's.
module maed_clip
  import maed_pkg::*;
#(
  parameter int CLIP = int'(S_CLIP)
) (
  input  cb_t d,
  output cs_t q
);
  function automatic logic signed [WS-1:0] clip1(input logic signed [WB-1:0] v);
    if (v > WB'(CLIP))  return WS'(CLIP);
    if (v < -WB'(CLIP)) return WS'(-CLIP);
    return WS'(v);
  endfunction

  always_comb begin
    q.re = clip1(d.re);
    q.im = clip1(d.im);
  end
endmodule
