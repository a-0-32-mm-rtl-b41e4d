// maed_ff_array: a flip-flop array of N complex words, W bits per real and imaginary part,
// written all at once (we) and read in parallel. The MAED detector has two: x (8 x 17b), which
// every PE slice reads, and s (32 x 11b), which holds the iterate s~ and finally the detector
// output. The sizes are the published ones; the parallel write port is this design's choice.
// The array resets to zero; `clr` also clears it synchronously.
module maed_ff_array #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic                clr,
  input  logic signed [W-1:0] d_re [N],
  input  logic signed [W-1:0] d_im [N],
  output logic signed [W-1:0] q_re [N],
  output logic signed [W-1:0] q_im [N]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin q_re[k] <= '0; q_im[k] <= '0; end
    end else if (clr) begin
      for (int k = 0; k < N; k++) begin q_re[k] <= '0; q_im[k] <= '0; end
    end else if (we) begin
      q_re <= d_re;
      q_im <= d_im;
    end
endmodule
