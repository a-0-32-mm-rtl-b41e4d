// maed_tau_shift: step-size multiplier of the gradient step. The step sizes tau_t are powers of
// two, tau_t = 2^-tau_shift[t], so tau z is an arithmetic right shift of each of the B=8 complex
// entries of z (truncation toward minus infinity). The shift amount is picked by the iteration
// index `iter`; the result is registered when `en` is high and broadcast to all PE slices.
// Powers-of-two step sizes are the published choice; their values are not published and are
// inputs here.
module maed_tau_shift
  import maed_pkg::*;
#(
  parameter int unsigned TMAX = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [3:0] tau_shift [TMAX],
  input  logic [$clog2(TMAX)-1:0] iter,
  input  cb_t        z  [B],
  output cb_t        tz [B]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int b = 0; b < B; b++) tz[b] <= '0;
    end else if (en) begin
      for (int b = 0; b < B; b++) begin
        tz[b].re <= z[b].re >>> tau_shift[iter];
        tz[b].im <= z[b].im >>> tau_shift[iter];
      end
    end
endmodule
