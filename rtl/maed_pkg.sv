// maed_pkg: sizes, fixed-point formats, complex types and the PE micro-operation shared by the
// MAED detector. The array sizes (B=8 antennas, K=32 channel uses, T=4 pilots, 4 slices of 8
// PEs) and the total bit widths per real/imaginary part (Y 16b, x 17b, s 11b, E 13b, PE
// operands 16b and 21b) follow the published architecture. How those bits split into integer
// and fraction bits is this design's choice and is listed with each type below.
// Each module uses only some of these constants, so lint run on a single module reports the
// others as unused.
package maed_pkg;

  // ---- array sizes ----
  localparam int unsigned B      = 8;   // receive antennas = PEs per slice
  localparam int unsigned K      = 32;  // channel uses per coherence block
  localparam int unsigned T      = 4;   // pilots
  localparam int unsigned NSLICE = K / B;
  localparam int unsigned ITER_CYCLES = 83;

  // ---- word widths per real/imaginary part ----
  localparam int unsigned WY  = 16;  // Y,    Q.7
  localparam int unsigned WX  = 17;  // x,    Q.8
  localparam int unsigned WS  = 11;  // s,    Q.9
  localparam int unsigned WE  = 13;  // E,    Q.4
  localparam int unsigned WA  = 16;  // PE operand A
  localparam int unsigned WB  = 21;  // PE operand B, products and accumulators
  localparam int unsigned WJ  = 16;  // normalized jammer estimate, Q.14
  localparam int unsigned WJR = 23;  // raw jammer estimate after slice combining, Q.0

  localparam int unsigned FJ  = 14;  // fraction bits of normalized j
  localparam int unsigned FZ  = 11;  // fraction bits of z and tau z

  // QPSK point 1/sqrt(2) in Q.9, the clipping bound of the prox operator
  localparam logic signed [WS-1:0] S_CLIP = 11'sd362;

  typedef struct packed { logic signed [WY-1:0] re, im; } cy_t;
  typedef struct packed { logic signed [WX-1:0] re, im; } cx_t;
  typedef struct packed { logic signed [WS-1:0] re, im; } cs_t;
  typedef struct packed { logic signed [WE-1:0] re, im; } ce_t;
  typedef struct packed { logic signed [WA-1:0] re, im; } ca_t;
  typedef struct packed { logic signed [WB-1:0] re, im; } cb_t;
  typedef struct packed { logic signed [WJ-1:0] re, im; } cj_t;
  typedef struct packed { logic signed [WJR-1:0] re, im; } cjr_t;

  // ---- PE micro-operation ----
  typedef enum logic [2:0] {A_ZERO, A_Y, A_E, A_S, A_EXT} a_sel_e;
  typedef enum logic [2:0] {B_ZERO, B_S, B_EXT, B_ROT, B_SUM} b_sel_e;
  typedef enum logic [2:0] {Q_ZERO, Q_SUM, Q_NEIGH, Q_Y, Q_EXT, Q_S} q_sel_e;
  typedef enum logic       {P_PROD, P_SUMCONJ} p_sel_e;

  typedef struct packed {
    logic       acc_en;   // load the adder input registers in stage 3
    a_sel_e     a_sel;
    logic       a_conj;
    b_sel_e     b_sel;
    logic       b_conj;
    logic [2:0] idx_off;  // row entry read = (PE index + idx_off) mod 8
    logic       rot_s;    // s register takes the neighbour's s after this cycle
    logic [4:0] shift;    // product right shift into the 21b format
    p_sel_e     p_sel;
    q_sel_e     q_sel;
    logic       sub;      // sum = Q - P instead of Q + P
    logic       e_we;     // write sum (Q.7 -> Q.4) to E[idx]
    logic       s_upd;    // s register <- prox(sum)
  } uop_t;

  localparam uop_t UOP_NOP = '{acc_en: 1'b0, a_sel: A_ZERO, a_conj: 1'b0, b_sel: B_ZERO,
                               b_conj: 1'b0, idx_off: 3'd0, rot_s: 1'b0, shift: 5'd0,
                               p_sel: P_PROD, q_sel: Q_ZERO, sub: 1'b0, e_we: 1'b0,
                               s_upd: 1'b0};

  // Source of the broadcast operands, chosen by the controller per issue cycle.
  typedef enum logic [3:0] {EXT_NONE, EXT_XMUL, EXT_X, EXT_U, EXT_NJ, EXT_JX, EXT_C, EXT_Z,
                            EXT_TZ} ext_sel_e;
  // B_EXT values by ext_sel: XMUL slice-combined Y s*, X x_j, U u_j, NJ j_j, JX x_j*2^-e,
  // C j^H x, Z the scalar c = j^H x/||j||^2, TZ tau z_j (the 8a broadcast).
  // A_EXT values: XMUL 1/||s||^2, NJ/JX/Z j_j, C 2^e/||j||^2. Q_EXT is always x_j.

  // Saturate a wide signed value to w bits (result still 64 bits wide).
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Position of the leading one of a 32-bit unsigned value; 0 when v is 0 or 1.
  function automatic logic [4:0] lod32(input logic [31:0] v);
    logic [4:0] p;
    p = '0;
    for (int i = 0; i < 32; i++) if (v[i]) p = 5'(i);
    return p;
  endfunction

endpackage
