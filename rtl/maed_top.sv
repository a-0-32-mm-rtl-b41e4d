// maed_top: jammer-resilient SIMO detector implementing MAED (simultaneous mitigation,
// estimation and detection) for B=8 receive antennas, a coherence block of K=32 channel uses
// with T=4 QPSK pilots and D=28 QPSK data symbols. It alternates power iterations that
// estimate the jammer's spatial signature j with projected gradient steps on the data vector s,
// TMAX times, and leaves the final s~ in the s FF array (the sign of each part is the detected
// bit pair).
//
// Structure: 4 PE slices of 8 PEs (maed_slice/maed_pe) hold Y and the residual E row-wise and
// run all matrix-vector products with Cannon's algorithm or its Hermitian variant; pipelined
// adder trees sum ||s||^2 (32 inputs), combine the four slices (4 inputs per antenna) and form
// the 8-dimensional inner products of line 7a; maed_prng draws u; maed_inv_s2_lut inverts
// ||s||^2; maed_pseudonorm rescales j; maed_inv_j2 inverts ||j||^2 and rescales x to match;
// maed_tau_shift forms tau z; x and s live in FF arrays; maed_ctrl sequences 83 cycles per
// iteration. Block list, array sizes and word widths follow the published architecture; the
// adder trees are separate adders here rather than reconfigured PE adders, and the I/O ports
// are this design's.
// Lint notes: the controller's cycle count, the PRNG state, the pseudonormalization exponent,
// the ||j||^2 exponent and the PE s registers are observation outputs of the submodules (used by
// the testbenches); the top itself reads s~ from the s FF array.
//
// Interface: while idle, write Y one entry per cycle (y_we, antenna y_row, channel use y_col,
// Q9.7 per part). Hold pilots (Q2.9) and tau_shift (tau_t = 2^-tau_shift[t]) stable while busy.
// Pulse `start`; `done` pulses 83*TMAX cycles later with s~(TMAX) on s_out (Q2.9). Y stays
// loaded and can be reused or overwritten between runs.
module maed_top
  import maed_pkg::*;
#(
  parameter int unsigned TMAX = 10,
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       y_we,
  input  logic [2:0] y_row,
  input  logic [4:0] y_col,
  input  cy_t        y_data,
  input  cs_t        pilots [T],
  input  logic [3:0] tau_shift [TMAX],
  input  logic       start,
  output logic       busy,
  output logic       done,
  output cs_t        s_out [K]
);
  localparam int unsigned IW = $clog2(TMAX);

  // ---- control ----
  uop_t     uop [NSLICE];
  ext_sel_e ext_sel;
  logic s_load, inv_s2_en, x_we, pn_en, inv_j_en, c_en, tau_en, s_we, prng_en;
  logic [IW-1:0] iter;
  logic [6:0] cyc;

  maed_ctrl #(.TMAX(TMAX)) u_ctrl (
    .clk, .rst_n, .start, .uop, .ext_sel, .s_load, .inv_s2_en, .x_we, .pn_en, .inv_j_en,
    .c_en, .tau_en, .s_we, .prng_en, .iter, .cyc, .busy, .done);

  // ---- PE slices ----
  ca_t a_ext [NSLICE][B];
  cb_t b_ext [NSLICE][B];
  cb_t q_ext [NSLICE][B];
  cs_t s_init [NSLICE][B];
  cs_t s_reg  [NSLICE][B];
  cb_t sum    [NSLICE][B];
  cb_t prod   [NSLICE][B];
  cs_t s_new  [NSLICE][B];

  for (genvar i = 0; i < NSLICE; i++) begin : g_slice
    for (genvar j = 0; j < B; j++) begin : g_init
      if (i * B + j < T) begin : g_pilot
        assign s_init[i][j] = pilots[i * B + j];
      end else begin : g_data
        assign s_init[i][j] = '0;
      end
    end
    maed_slice #(.SLICE(i)) u_slice (
      .clk, .rst_n, .uop(uop[i]),
      .a_ext(a_ext[i]), .b_ext(b_ext[i]), .q_ext(q_ext[i]),
      .s_load, .s_init(s_init[i]),
      .y_we(y_we && !busy && (y_col[4:3] == 2'(i))), .y_row, .y_idx(y_col[2:0]), .y_data,
      .s_reg(s_reg[i]), .sum(sum[i]), .prod(prod[i]), .s_new(s_new[i]));
  end

  // ---- ||s||^2: 32-input tree over the PE product registers ----
  logic signed [WB-1:0] ns_in [K];
  logic signed [25:0]   ns_sum;
  for (genvar k = 0; k < K; k++) begin : g_ns
    assign ns_in[k] = prod[k / B][k % B].re;
  end
  adder_tree #(.N(K), .W_IN(WB), .W_OUT(26)) u_ns_tree (.clk, .rst_n, .in(ns_in), .out(ns_sum));

  logic signed [WA-1:0] inv_s2;
  maed_inv_s2_lut u_inv_s2 (.clk, .rst_n, .en(inv_s2_en), .ns(21'(sat(64'(ns_sum), 21))),
                            .inv(inv_s2));

  // ---- slice combining: sum over the four slices per antenna ----
  cjr_t comb [B];
  for (genvar j = 0; j < B; j++) begin : g_comb
    logic signed [WB-1:0] cre [NSLICE], cim [NSLICE];
    for (genvar i = 0; i < NSLICE; i++) begin : g_in
      assign cre[i] = sum[i][j].re;
      assign cim[i] = sum[i][j].im;
    end
    adder_tree #(.N(NSLICE), .W_IN(WB), .W_OUT(WJR), .OUT_REG(1'b1)) u_re (.clk, .rst_n, .in(cre), .out(comb[j].re));
    adder_tree #(.N(NSLICE), .W_IN(WB), .W_OUT(WJR), .OUT_REG(1'b1)) u_im (.clk, .rst_n, .in(cim), .out(comb[j].im));
  end

  // ---- x FF array (8 x 17b) ----
  logic signed [WX-1:0] xd_re [B], xd_im [B], xq_re [B], xq_im [B];
  cx_t x [B];
  for (genvar j = 0; j < B; j++) begin : g_x
    assign xd_re[j] = WX'(sat(64'(prod[0][j].re), WX));
    assign xd_im[j] = WX'(sat(64'(prod[0][j].im), WX));
    assign x[j] = '{re: xq_re[j], im: xq_im[j]};
  end
  maed_ff_array #(.N(B), .W(WX)) u_x_arr (.clk, .rst_n, .we(x_we), .clr(1'b0),
    .d_re(xd_re), .d_im(xd_im), .q_re(xq_re), .q_im(xq_im));

  // ---- PRNG ----
  logic [63:0] prng_state;
  cb_t u [B];
  maed_prng #(.SEED(SEED)) u_prng (.clk, .rst_n, .en(prng_en), .state(prng_state), .u);

  // ---- pseudonormalization ----
  cj_t jn [B];
  logic [4:0] pn_p;
  maed_pseudonorm u_pn (.clk, .rst_n, .en(pn_en), .j_in(comb), .j_out(jn), .p_max(pn_p));

  // ---- 8-input tree for the inner products of line 7a (slice 0 products) ----
  logic signed [WB-1:0] ip_re_in [B], ip_im_in [B];
  logic signed [23:0]   ip_re, ip_im;
  for (genvar j = 0; j < B; j++) begin : g_ip
    assign ip_re_in[j] = prod[0][j].re;
    assign ip_im_in[j] = prod[0][j].im;
  end
  adder_tree #(.N(B), .W_IN(WB), .W_OUT(24)) u_ip_re (.clk, .rst_n, .in(ip_re_in), .out(ip_re));
  adder_tree #(.N(B), .W_IN(WB), .W_OUT(24)) u_ip_im (.clk, .rst_n, .in(ip_im_in), .out(ip_im));
  cb_t ip;
  assign ip = '{re: WB'(sat(64'(ip_re), WB)), im: WB'(sat(64'(ip_im), WB))};

  // ---- ||j||^2 inversion and x rescaling ----
  logic signed [WA-1:0] inv_j;
  logic [2:0] inv_e;
  cb_t x_s [B];
  maed_inv_j2 u_inv_j (.clk, .rst_n, .en(inv_j_en), .nj(ip.re), .x_in(x), .inv(inv_j),
                       .e(inv_e), .x_out(x_s));

  // ---- scalar c = j^H x / ||j||^2 from PE 0 of slice 0 ----
  cb_t c_r;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    c_r <= '0;
    else if (c_en) c_r <= prod[0][0];

  // ---- tau z ----
  cb_t tz [B];
  maed_tau_shift #(.TMAX(TMAX)) u_tau (.clk, .rst_n, .en(tau_en), .tau_shift, .iter,
                                       .z(sum[0]), .tz);

  // ---- broadcast operand muxes ----
  always_comb
    for (int i = 0; i < NSLICE; i++)
      for (int j = 0; j < B; j++) begin
        a_ext[i][j] = '0;
        b_ext[i][j] = '0;
        q_ext[i][j] = '{re: WB'(x[j].re) <<< (FZ - 8), im: WB'(x[j].im) <<< (FZ - 8)};
        unique case (ext_sel)
          EXT_XMUL: begin
            a_ext[i][j] = '{re: inv_s2, im: '0};
            b_ext[i][j] = '{re: WB'(sat(64'(comb[j].re), WB)), im: WB'(sat(64'(comb[j].im), WB))};
          end
          EXT_X:  b_ext[i][j] = '{re: WB'(x[j].re), im: WB'(x[j].im)};
          EXT_U:  b_ext[i][j] = u[j];
          EXT_NJ: begin
            a_ext[i][j] = '{re: WA'(jn[j].re), im: WA'(jn[j].im)};
            b_ext[i][j] = '{re: WB'(jn[j].re), im: WB'(jn[j].im)};
          end
          EXT_JX: begin
            a_ext[i][j] = '{re: WA'(jn[j].re), im: WA'(jn[j].im)};
            b_ext[i][j] = x_s[j];
          end
          EXT_C: begin
            a_ext[i][j] = '{re: inv_j, im: '0};
            b_ext[i][j] = ip;
          end
          EXT_Z: begin
            a_ext[i][j] = '{re: WA'(jn[j].re), im: WA'(jn[j].im)};
            b_ext[i][j] = c_r;
          end
          EXT_TZ:  b_ext[i][j] = tz[j];
          default: ;
        endcase
      end

  // ---- s FF array (32 x 11b): iterate and output ----
  logic signed [WS-1:0] sd_re [K], sd_im [K], sq_re [K], sq_im [K];
  for (genvar k = 0; k < K; k++) begin : g_s
    assign sd_re[k] = s_load ? s_init[k / B][k % B].re : s_new[k / B][k % B].re;
    assign sd_im[k] = s_load ? s_init[k / B][k % B].im : s_new[k / B][k % B].im;
    assign s_out[k] = '{re: sq_re[k], im: sq_im[k]};
  end
  maed_ff_array #(.N(K), .W(WS)) u_s_arr (.clk, .rst_n, .we(s_we || s_load), .clr(1'b0),
    .d_re(sd_re), .d_im(sd_im), .q_re(sq_re), .q_im(sq_im));

endmodule
