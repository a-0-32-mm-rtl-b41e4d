// adder_tree: pipelined binary adder tree. N signed inputs of W_IN bits are sign-extended to
// W_OUT bits and summed pairwise, one register per level, so the sum of the inputs presented
// in cycle t appears at `out` after log2(N) clock edges, plus one more when OUT_REG is set.
// No handshake: the tree runs every cycle. The MAED detector uses it with N=32 (||s||^2, five
// stages as published), N=8 (the 8-dimensional inner products of line 7a) and N=4 with an
// output register (combining the four PE slices). The published chip builds these trees from
// the PEs' own adders; here it is a separate unit, which is this design's choice. N must be a
// power of two.
module adder_tree #(
  parameter int unsigned N       = 32,
  parameter int unsigned W_IN    = 21,
  parameter int unsigned W_OUT   = 26,
  parameter bit          OUT_REG = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [W_IN-1:0]  in  [N],
  output logic signed [W_OUT-1:0] out
);
  localparam int unsigned L = $clog2(N);

  logic signed [W_OUT-1:0] l0 [N];
  for (genvar k = 0; k < N; k++) begin : g_in
    assign l0[k] = W_OUT'(in[k]);
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    logic signed [W_OUT-1:0] v [N >> l];
    for (genvar k = 0; k < (N >> l); k++) begin : g_node
      if (l == 1) begin : g_first
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) v[k] <= '0;
          else        v[k] <= l0[2*k] + l0[2*k+1];
      end else begin : g_next
        always_ff @(posedge clk or negedge rst_n)
          if (!rst_n) v[k] <= '0;
          else        v[k] <= g_lvl[l-1].v[2*k] + g_lvl[l-1].v[2*k+1];
      end
    end
  end

  if (OUT_REG) begin : g_oreg
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) out <= '0;
      else        out <= g_lvl[L].v[0];
  end else begin : g_ocomb
    assign out = g_lvl[L].v[0];
  end
endmodule
