// maed_ctrl: control unit of the MAED detector. A cycle counter (0..82) and an iteration counter
// (0..TMAX-1) select, every cycle, the micro-operation issued to each PE slice, the source of
// the broadcast operands and the enables of the auxiliary units. One iteration of the
// rearranged algorithm takes 83 cycles; the PE pipeline (issue, multiply, adder inputs, result)
// is 3 cycles deep, the slice-combining tree 3 and the inner-product tree 3. Schedule (cycle of
// issue within an iteration):
//
//    0      ||s||^2: s s* in all 32 PEs, 5-stage tree, LUT at 7           (line 4a)
//    1-13   Y_i s_i^* by Cannon in every slice, s rotating; slices combined -> Y s* at 14
//   14-16   x = (Y s*)/||s||^2 in slice 0, written to the x FF array at 16
//   17-28   E = Y - x s^T, s rotating, E written back (12 cycles)         (line 4b)
//   29-38   v = E^H u, Hermitian Cannon, partial sums rotating (10)       (lines 5, 6a)
//   39-51   j = E v, Cannon with v rotating, slices combined (13)         (line 6b)
//   52      pseudonormalization of j
//   53-57   ||j||^2 in slice 0 and the 8-input tree (5); 58 inversion     (line 7a)
//   59-63   j^H (x 2^-e) in slice 0 and the tree (5)
//   64-66   c = (j^H x 2^-e)(2^e/||j||^2) in PE 0 of slice 0
//   67-70   z = x - j c in slice 0; tau z registered at 70
//   71-80   E^H (tau z), Hermitian Cannon (10)                             (line 8a)
//   79-82   s <- prox(s + conj(E^H tau z)), written to the s FF array at 82 (line 9)
//
// The per-phase cycle counts of lines 4a/6b (13), 4b (12), 6a/8a (10), the inner products (5)
// and the 83-cycle total are the published figures; the detailed schedule is this design's.
// Interface: `start` (in IDLE) loads the initial s~ = [s_T; 0] and starts; `busy` is high while
// running; `done` pulses one cycle after the last write of s~, 83*TMAX cycles after start.
module maed_ctrl
  import maed_pkg::*;
#(
  parameter int unsigned TMAX = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output uop_t        uop [NSLICE],
  output ext_sel_e    ext_sel,
  output logic        s_load,
  output logic        inv_s2_en,
  output logic        x_we,
  output logic        pn_en,
  output logic        inv_j_en,
  output logic        c_en,
  output logic        tau_en,
  output logic        s_we,
  output logic        prng_en,
  output logic [$clog2(TMAX)-1:0] iter,
  output logic [6:0]  cyc,
  output logic        busy,
  output logic        done
);
  typedef enum logic {IDLE, RUN} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; cyc <= '0; iter <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= RUN; cyc <= '0; iter <= '0;
        end
        RUN: if (cyc == 7'(ITER_CYCLES - 1)) begin
          cyc <= '0;
          if (iter == ($clog2(TMAX))'(TMAX - 1)) begin
            state <= IDLE;
            done  <= 1'b1;
          end else begin
            iter <= iter + 1'b1;
          end
        end else begin
          cyc <= cyc + 1'b1;
        end
      endcase
    end

  assign busy   = (state == RUN);
  assign s_load = (state == IDLE) && start;

  // micro-operation of one cycle; `first_slice` marks slice 0
  function automatic uop_t sched(input logic [6:0] c, input bit first_slice);
    uop_t u;
    logic [2:0] st;
    u = UOP_NOP;
    if (c == 7'd0) begin                             // |s_k|^2
      u.a_sel = A_S; u.b_sel = B_S; u.b_conj = 1'b1; u.shift = 5'd4;
    end else if (c >= 7'd1 && c <= 7'd8) begin       // line 4a, Cannon
      st = 3'(c - 7'd1);
      u.a_sel = A_Y; u.idx_off = st; u.b_sel = B_S; u.b_conj = 1'b1; u.rot_s = 1'b1;
      u.shift = 5'd9; u.acc_en = 1'b1; u.q_sel = (st == 3'd0) ? Q_ZERO : Q_SUM;
    end else if (c == 7'd14 && first_slice) begin    // x = (Y s*) / ||s||^2
      u.a_sel = A_EXT; u.b_sel = B_EXT; u.shift = 5'd15;
    end else if (c >= 7'd17 && c <= 7'd24) begin     // line 4b
      st = 3'(c - 7'd17);
      u.a_sel = A_S; u.idx_off = st; u.b_sel = B_EXT; u.rot_s = 1'b1; u.shift = 5'd10;
      u.acc_en = 1'b1; u.q_sel = Q_Y; u.sub = 1'b1; u.e_we = 1'b1;
    end else if (c >= 7'd29 && c <= 7'd36) begin     // line 6a, Hermitian Cannon
      st = 3'(c - 7'd29);
      u.a_sel = A_E; u.a_conj = 1'b1; u.idx_off = st + 3'd1; u.b_sel = B_EXT; u.shift = 5'd0;
      u.acc_en = 1'b1; u.q_sel = (st == 3'd0) ? Q_ZERO : Q_NEIGH;
    end else if (c >= 7'd39 && c <= 7'd46) begin     // line 6b, Cannon with v rotating
      st = 3'(c - 7'd39);
      u.a_sel = A_E; u.idx_off = st; u.b_sel = (st == 3'd0) ? B_SUM : B_ROT; u.shift = 5'd8;
      u.acc_en = 1'b1; u.q_sel = (st == 3'd0) ? Q_ZERO : Q_SUM;
    end else if (c == 7'd53 && first_slice) begin    // |j_b|^2
      u.a_sel = A_EXT; u.b_sel = B_EXT; u.b_conj = 1'b1; u.shift = 5'd14;
    end else if (c == 7'd59 && first_slice) begin    // j_b^* (x_b 2^-e)
      u.a_sel = A_EXT; u.a_conj = 1'b1; u.b_sel = B_EXT; u.shift = 5'd17;
    end else if (c == 7'd64 && first_slice) begin    // c = (j^H x 2^-e)(2^e/||j||^2)
      u.a_sel = A_EXT; u.b_sel = B_EXT; u.shift = 5'd14;
    end else if (c == 7'd67 && first_slice) begin    // z = x - j c
      u.a_sel = A_EXT; u.b_sel = B_EXT; u.shift = 5'd13; u.acc_en = 1'b1; u.q_sel = Q_EXT;
      u.sub = 1'b1;
    end else if (c >= 7'd71 && c <= 7'd78) begin     // line 8a, Hermitian Cannon
      st = 3'(c - 7'd71);
      u.a_sel = A_E; u.a_conj = 1'b1; u.idx_off = st + 3'd1; u.b_sel = B_EXT; u.shift = 5'd6;
      u.acc_en = 1'b1; u.q_sel = (st == 3'd0) ? Q_ZERO : Q_NEIGH;
    end else if (c == 7'd79) begin                   // line 9: s + conj(g), then prox
      u.acc_en = 1'b1; u.p_sel = P_SUMCONJ; u.q_sel = Q_S; u.s_upd = 1'b1;
    end
    return u;
  endfunction

  always_comb begin
    for (int i = 0; i < NSLICE; i++) uop[i] = busy ? sched(cyc, i == 0) : UOP_NOP;
    ext_sel = EXT_NONE;
    if (busy) begin
      unique case (cyc)
        7'd14:   ext_sel = EXT_XMUL;
        7'd53:   ext_sel = EXT_NJ;
        7'd59:   ext_sel = EXT_JX;
        7'd64:   ext_sel = EXT_C;
        7'd67:   ext_sel = EXT_Z;
        default: begin
          if (cyc >= 7'd17 && cyc <= 7'd24) ext_sel = EXT_X;
          if (cyc >= 7'd29 && cyc <= 7'd36) ext_sel = EXT_U;
          if (cyc >= 7'd71 && cyc <= 7'd78) ext_sel = EXT_TZ;
        end
      endcase
    end
  end

  assign inv_s2_en = busy && (cyc == 7'd7);
  assign x_we      = busy && (cyc == 7'd16);
  assign pn_en     = busy && (cyc == 7'd52);
  assign inv_j_en  = busy && (cyc == 7'd58);
  assign c_en      = busy && (cyc == 7'd66);
  assign tau_en    = busy && (cyc == 7'd70);
  assign s_we      = busy && (cyc == 7'd82);
  assign prng_en   = busy && (cyc == 7'd0);
endmodule
