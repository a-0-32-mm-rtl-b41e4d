// maed_slice: one PE slice, eight maed_pe in a ring. PE j receives the s register, the B
// operand register and the adder output of PE (j+1) mod 8, so that one micro-operation
// broadcast to all eight PEs runs a step of Cannon's algorithm (s or B rotating, each PE
// accumulating) or of its Hermitian variant (partial sums rotating). Slice i's PE j owns
// column block i of row j of Y and E and s~ entry 8i+j; entries below T are pilots whose s is
// never updated. Ports are arrays over the eight PEs; timing is that of maed_pe. The ring
// itself follows the published slice diagram; the direction of flow is this design's choice.
module maed_slice
  import maed_pkg::*;
#(
  parameter int unsigned SLICE = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  uop_t       uop,
  input  ca_t        a_ext [B],
  input  cb_t        b_ext [B],
  input  cb_t        q_ext [B],
  input  logic       s_load,
  input  cs_t        s_init [B],
  input  logic       y_we,
  input  logic [2:0] y_row,    // PE that takes the write
  input  logic [2:0] y_idx,    // entry inside its row
  input  cy_t        y_data,
  output cs_t        s_reg [B],
  output cb_t        sum [B],
  output cb_t        prod [B],
  output cs_t        s_new [B]
);
  cb_t b_reg [B];

  for (genvar j = 0; j < B; j++) begin : g_pe
    maed_pe #(.PE_IDX(j), .IS_PILOT((SLICE * B + j) < T)) u_pe (
      .clk, .rst_n, .uop,
      .a_ext(a_ext[j]), .b_ext(b_ext[j]), .q_ext(q_ext[j]),
      .s_in(s_reg[(j + 1) % B]), .b_in(b_reg[(j + 1) % B]), .sum_in(sum[(j + 1) % B]),
      .s_load, .s_init(s_init[j]),
      .y_we(y_we && (y_row == 3'(j))), .y_idx, .y_data,
      .s_reg(s_reg[j]), .b_reg(b_reg[j]), .sum(sum[j]), .prod(prod[j]), .s_new(s_new[j]));
  end
endmodule
