// cell_update: one FPU set with the fixed schedule that updates one cell.
//
// An FPU set holds 3 multipliers, 2 adders, 2 exponential units, 1
// logarithm, 1 divider and 1 comparator (the unit counts are the paper's).
// This module drives them from a small register file, one schedule step per
// clock, in one of two modes:
//
//  * MODE_CELL: lazy-evaluation update of a synaptic cell ij, from the
//    values stored at its last update (Zi0, Zj0, Eij, Pij), the elapsed time
//    pdt = t_now - Tij and the current Pi, Pj:
//      Zi  = Zi0*exp(-kzi*pdt)             Zj = Zj0*exp(-kzj*pdt)
//      Eij = (Eij + Zi0*Zj0*kn)*exp(-kE*pdt) - Zi0*Zj0*kn*exp(-kf*pdt)
//      Pij = (Pij + Eij*k1 + Zi0*Zj0*(k2-k3))*exp(-kp*pdt)
//            - ((Eij*k1 + Zi0*Zj0*k2)*exp(-ke*pdt) - Zi0*Zj0*k3*exp(-k4*pdt))
//      Wij = wgain*log((Pij+eps^2) / ((Pi+eps)*(Pj+eps)))
//    then adds the spike increments (inc_i, inc_j) to Zi, Zj and adds Wij to
//    the support accumulator epsc. The right-hand sides use the stored
//    values (closed-form solution over pdt). The log of a quotient uses the
//    one divider and the one log unit instead of two logs. The same mode
//    updates an i-vector entry when called with Zj0 = 1 and kzj = 0.
//    15 steps.
//  * MODE_JVEC: periodic 1 ms update of a j-vector entry (forward Euler):
//      Zj' = Zj*dz, Ej' = Ej + (Zj-Ej)*ae, Pj' = Pj + (Ej-Pj)*ap,
//      bj = log(Pj'+eps), support = bj + epsc, fire = support > thr,
//    and Zj'+1 for the case the MCU wins. 7 steps.
//
// The step schedule (which unit does what in which step) is this design's
// own; the paper gives only the unit counts and the equations.
//
// Interface: inputs are sampled when `start` is high and the unit is idle;
// `done` pulses one cycle after the last step and the outputs hold until
// the next start. Constants must stay stable while busy.
// Timing: CELL = 15 cycles, JVEC = 7 cycles from start to done.
module cell_update
  import ebrain_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        mode_jvec,   // 0: MODE_CELL, 1: MODE_JVEC
  input  ms_t         t_now,
  // MODE_CELL operands
  input  cell_t       cell_in,
  input  fp_t         pi,
  input  fp_t         pj,
  input  fp_t         inc_i,
  input  fp_t         inc_j,
  input  fp_t         epsc_in,
  input  cell_const_t cc,
  // MODE_JVEC operands
  input  jentry_t     jin,
  input  jvec_const_t jc,
  output logic        busy,
  output logic        done,
  output cell_t       cell_out,
  output fp_t         epsc_out,
  output jentry_t     jout,
  output fp_t         zj_plus,
  output fp_t         support,
  output logic        fire
);
  localparam int unsigned CELL_STEPS = 15;
  localparam int unsigned JVEC_STEPS = 7;

  // register file indices
  typedef enum logic [4:0] {
    R_ZI0, R_ZJ0, R_E0, R_P0, R_PDT, R_PI, R_PJ, R_INCI, R_INCJ, R_EPSC,
    R_A1, R_A2, R_A3, R_A4, R_A5, R_A6, R_A7,
    R_E1, R_E2, R_E3, R_E4, R_E5, R_E6, R_E7,
    R_S1, R_S2, R_ZZ, R_PP, R_T1, R_T2, R_T3, R_T4
  } reg_e;
  // second-phase aliases (registers reused once their first value is dead)
  localparam reg_e R_ZI   = R_A1,  R_ZJ   = R_A2,  R_ZZKN = R_A3,  R_ZZK2 = R_A4;
  localparam reg_e R_ZZK3 = R_A5,  R_EK1  = R_A6,  R_T5   = R_A7,  R_E    = R_S1;
  localparam reg_e R_T6   = R_S2,  R_T7   = R_T3,  R_T8   = R_T4,  R_T9   = R_E1;
  localparam reg_e R_T10  = R_E2,  R_T11  = R_E3,  R_P    = R_E4,  R_PE   = R_E6;
  localparam reg_e R_Q    = R_E7,  R_L    = R_E5,  R_W    = R_T1,  R_ZIN  = R_T2;
  localparam reg_e R_ZJN  = R_ZZ,  R_EPO  = R_ZZKN;
  // JVEC mode aliases
  localparam reg_e J_ZJ = R_ZI0, J_EJ = R_ZJ0, J_PJ = R_E0, J_EPSC = R_P0;
  localparam reg_e J_D1 = R_A1, J_D2 = R_A2, J_ZJN = R_A3, J_M1 = R_A4, J_M2 = R_A5;
  localparam reg_e J_EJN = R_A6, J_PJN = R_A7, J_PE = R_E1, J_ZP = R_E2, J_BJ = R_E3;
  localparam reg_e J_SUP = R_E4;

  fp_t rf [32];

  // unit operands: 0..2 mul, 3..4 add, 5..6 exp, 7 log, 8 div, 9 cmp
  localparam int unsigned NU = 10;
  logic [2:0] u_op [NU];
  fp_t        u_a  [NU], u_b [NU], u_y [NU];
  reg_e       u_d  [NU];
  logic       u_en [NU];

  logic       run, jmode;
  logic [3:0] step;
  ms_t        t_hold;
  logic       fire_q;

  for (genvar u = 0; u < NU; u++) begin : g_unit
    fpu_op i_fpu (.op(u_op[u]), .a(u_a[u]), .b(u_b[u]), .y(u_y[u]));
  end

  always_comb begin
    for (int u = 0; u < NU; u++) begin
      u_a[u] = FP_ZERO; u_b[u] = FP_ZERO; u_d[u] = R_ZI0; u_en[u] = 1'b0;
    end
    u_op[0] = 3'd0; u_op[1] = 3'd0; u_op[2] = 3'd0;
    u_op[3] = 3'd1; u_op[4] = 3'd1;
    u_op[5] = 3'd3; u_op[6] = 3'd3;
    u_op[7] = 3'd4; u_op[8] = 3'd5; u_op[9] = 3'd6;
    if (run && !jmode) begin
      unique case (step)
        4'd0: begin
          u_a[0] = cc.nkzi;  u_b[0] = rf[R_PDT]; u_d[0] = R_A1; u_en[0] = 1;
          u_a[1] = cc.nkzj;  u_b[1] = rf[R_PDT]; u_d[1] = R_A2; u_en[1] = 1;
          u_a[2] = cc.nke;   u_b[2] = rf[R_PDT]; u_d[2] = R_A3; u_en[2] = 1;
          u_a[3] = rf[R_PI]; u_b[3] = cc.eps;    u_d[3] = R_S1; u_en[3] = 1;
          u_a[4] = rf[R_PJ]; u_b[4] = cc.eps;    u_d[4] = R_S2; u_en[4] = 1;
        end
        4'd1: begin
          u_a[0] = cc.nkf;   u_b[0] = rf[R_PDT]; u_d[0] = R_A4; u_en[0] = 1;
          u_a[1] = cc.nkp;   u_b[1] = rf[R_PDT]; u_d[1] = R_A5; u_en[1] = 1;
          u_a[2] = cc.nke2;  u_b[2] = rf[R_PDT]; u_d[2] = R_A6; u_en[2] = 1;
          u_a[5] = rf[R_A1];                     u_d[5] = R_E1; u_en[5] = 1;
          u_a[6] = rf[R_A2];                     u_d[6] = R_E2; u_en[6] = 1;
        end
        4'd2: begin
          u_a[0] = cc.nk4;    u_b[0] = rf[R_PDT]; u_d[0] = R_A7; u_en[0] = 1;
          u_a[1] = rf[R_ZI0]; u_b[1] = rf[R_ZJ0]; u_d[1] = R_ZZ; u_en[1] = 1;
          u_a[2] = rf[R_S1];  u_b[2] = rf[R_S2];  u_d[2] = R_PP; u_en[2] = 1;
          u_a[5] = rf[R_A3];                      u_d[5] = R_E3; u_en[5] = 1;
          u_a[6] = rf[R_A4];                      u_d[6] = R_E4; u_en[6] = 1;
        end
        4'd3: begin
          u_a[0] = rf[R_ZI0]; u_b[0] = rf[R_E1]; u_d[0] = R_ZI;   u_en[0] = 1;
          u_a[1] = rf[R_ZJ0]; u_b[1] = rf[R_E2]; u_d[1] = R_ZJ;   u_en[1] = 1;
          u_a[2] = rf[R_ZZ];  u_b[2] = cc.kn;    u_d[2] = R_ZZKN; u_en[2] = 1;
          u_a[5] = rf[R_A5];                     u_d[5] = R_E5;   u_en[5] = 1;
          u_a[6] = rf[R_A6];                     u_d[6] = R_E6;   u_en[6] = 1;
        end
        4'd4: begin
          u_a[0] = rf[R_ZZ]; u_b[0] = cc.k2;      u_d[0] = R_ZZK2; u_en[0] = 1;
          u_a[1] = rf[R_ZZ]; u_b[1] = cc.k3;      u_d[1] = R_ZZK3; u_en[1] = 1;
          u_a[2] = rf[R_E0]; u_b[2] = cc.k1;      u_d[2] = R_EK1;  u_en[2] = 1;
          u_a[5] = rf[R_A7];                      u_d[5] = R_E7;   u_en[5] = 1;
          u_a[3] = rf[R_E0]; u_b[3] = rf[R_ZZKN]; u_d[3] = R_T1;   u_en[3] = 1;
        end
        4'd5: begin
          u_a[0] = rf[R_T1];   u_b[0] = rf[R_E3];   u_d[0] = R_T2; u_en[0] = 1;
          u_a[1] = rf[R_ZZKN]; u_b[1] = rf[R_E4];   u_d[1] = R_T3; u_en[1] = 1;
          u_a[3] = rf[R_EK1];  u_b[3] = rf[R_ZZK2]; u_d[3] = R_T4; u_en[3] = 1;
          u_a[4] = rf[R_P0];   u_b[4] = rf[R_EK1];  u_d[4] = R_T5; u_en[4] = 1;
        end
        4'd6: begin
          u_op[3] = 3'd2;
          u_a[3] = rf[R_T2];   u_b[3] = rf[R_T3];   u_d[3] = R_E;  u_en[3] = 1;
          u_a[4] = rf[R_T5];   u_b[4] = rf[R_ZZK2]; u_d[4] = R_T6; u_en[4] = 1;
          u_a[0] = rf[R_T4];   u_b[0] = rf[R_E6];   u_d[0] = R_T7; u_en[0] = 1;
          u_a[1] = rf[R_ZZK3]; u_b[1] = rf[R_E7];   u_d[1] = R_T8; u_en[1] = 1;
        end
        4'd7: begin
          u_op[3] = 3'd2; u_op[4] = 3'd2;
          u_a[3] = rf[R_T6]; u_b[3] = rf[R_ZZK3]; u_d[3] = R_T9;  u_en[3] = 1;
          u_a[4] = rf[R_T7]; u_b[4] = rf[R_T8];   u_d[4] = R_T10; u_en[4] = 1;
        end
        4'd8: begin
          u_a[0] = rf[R_T9]; u_b[0] = rf[R_E5]; u_d[0] = R_T11; u_en[0] = 1;
        end
        4'd9: begin
          u_op[3] = 3'd2;
          u_a[3] = rf[R_T11]; u_b[3] = rf[R_T10]; u_d[3] = R_P; u_en[3] = 1;
        end
        4'd10: begin
          u_a[3] = rf[R_P]; u_b[3] = cc.eps2; u_d[3] = R_PE; u_en[3] = 1;
        end
        4'd11: begin
          u_a[8] = rf[R_PE]; u_b[8] = rf[R_PP]; u_d[8] = R_Q; u_en[8] = 1;
        end
        4'd12: begin
          u_a[7] = rf[R_Q]; u_d[7] = R_L; u_en[7] = 1;
        end
        4'd13: begin
          u_a[0] = cc.wgain;  u_b[0] = rf[R_L];    u_d[0] = R_W;   u_en[0] = 1;
          u_a[3] = rf[R_ZI];  u_b[3] = rf[R_INCI]; u_d[3] = R_ZIN; u_en[3] = 1;
          u_a[4] = rf[R_ZJ];  u_b[4] = rf[R_INCJ]; u_d[4] = R_ZJN; u_en[4] = 1;
        end
        4'd14: begin
          u_a[3] = rf[R_EPSC]; u_b[3] = rf[R_W]; u_d[3] = R_EPO; u_en[3] = 1;
        end
        default: ;
      endcase
    end else if (run && jmode) begin
      unique case (step)
        4'd0: begin
          u_op[3] = 3'd2; u_op[4] = 3'd2;
          u_a[3] = rf[J_ZJ]; u_b[3] = rf[J_EJ]; u_d[3] = J_D1; u_en[3] = 1;
          u_a[4] = rf[J_EJ]; u_b[4] = rf[J_PJ]; u_d[4] = J_D2; u_en[4] = 1;
        end
        4'd1: begin
          u_a[0] = rf[J_ZJ]; u_b[0] = jc.dz; u_d[0] = J_ZJN; u_en[0] = 1;
          u_a[1] = rf[J_D1]; u_b[1] = jc.ae; u_d[1] = J_M1;  u_en[1] = 1;
          u_a[2] = rf[J_D2]; u_b[2] = jc.ap; u_d[2] = J_M2;  u_en[2] = 1;
        end
        4'd2: begin
          u_a[3] = rf[J_EJ]; u_b[3] = rf[J_M1]; u_d[3] = J_EJN; u_en[3] = 1;
          u_a[4] = rf[J_PJ]; u_b[4] = rf[J_M2]; u_d[4] = J_PJN; u_en[4] = 1;
        end
        4'd3: begin
          u_a[3] = rf[J_PJN]; u_b[3] = jc.eps; u_d[3] = J_PE; u_en[3] = 1;
          u_a[4] = rf[J_ZJN]; u_b[4] = FP_ONE; u_d[4] = J_ZP; u_en[4] = 1;
        end
        4'd4: begin
          u_a[7] = rf[J_PE]; u_d[7] = J_BJ; u_en[7] = 1;
        end
        4'd5: begin
          u_a[3] = rf[J_BJ]; u_b[3] = rf[J_EPSC]; u_d[3] = J_SUP; u_en[3] = 1;
        end
        4'd6: begin
          u_a[9] = rf[J_SUP]; u_b[9] = jc.thr;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      jmode  <= 1'b0;
      step   <= '0;
      done   <= 1'b0;
      t_hold <= '0;
      fire_q <= 1'b0;
      for (int r = 0; r < 32; r++) rf[r] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run    <= 1'b1;
        jmode  <= mode_jvec;
        step   <= '0;
        t_hold <= t_now;
        if (!mode_jvec) begin
          rf[R_ZI0]  <= cell_in.zi2;
          rf[R_ZJ0]  <= cell_in.zj2;
          rf[R_E0]   <= cell_in.eij;
          rf[R_P0]   <= cell_in.pij;
          rf[R_PDT]  <= int_to_fp(t_now - cell_in.tij);
          rf[R_PI]   <= pi;
          rf[R_PJ]   <= pj;
          rf[R_INCI] <= inc_i;
          rf[R_INCJ] <= inc_j;
          rf[R_EPSC] <= epsc_in;
        end else begin
          rf[J_ZJ]   <= jin.zj;
          rf[J_EJ]   <= jin.ej;
          rf[J_PJ]   <= jin.pj;
          rf[J_EPSC] <= jin.epsc;
        end
      end else if (run) begin
        for (int u = 0; u < 9; u++) if (u_en[u]) rf[u_d[u]] <= u_y[u];
        if (jmode && step == 4'(JVEC_STEPS - 1)) fire_q <= u_y[9][0];
        if (step == 4'(jmode ? JVEC_STEPS - 1 : CELL_STEPS - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        step <= step + 4'd1;
      end
    end
  end

  assign busy = run;

  always_comb begin
    cell_out.zi2 = rf[R_ZIN];
    cell_out.zj2 = rf[R_ZJN];
    cell_out.eij = rf[R_E];
    cell_out.pij = rf[R_P];
    cell_out.tij = t_hold;
    cell_out.wij = rf[R_W];
    epsc_out     = rf[R_EPO];
    jout.zj      = rf[J_ZJN];
    jout.ej      = rf[J_EJN];
    jout.pj      = rf[J_PJN];
    jout.bj      = rf[J_BJ];
    jout.epsc    = FP_ZERO;
    zj_plus      = rf[J_ZP];
    support      = rf[J_SUP];
    fire         = fire_q;
  end
endmodule
