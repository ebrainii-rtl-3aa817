// update_fsm: the update FSM, register file and the two FPU sets of an HCU
// partition.
//
// The control FSM hands this block one job at a time:
//  * JOB_PER  - periodic (every ms) update of the 100 j-vector entries held
//    in the periodic-update SRAM, followed by a winner-take-all: among the
//    MCUs whose support exceeds the threshold, the one with the largest
//    support fires (lowest index on a tie). The winner's Zj gets +1 and
//    `fired`/`fire_mcu` report it.
//  * JOB_ROW  - row update of the ping-pong buffer chosen by `buf_sel`
//    (words 0..99: cells of row i, word 100: the i-vector entry). The
//    i-entry is brought up to date first (Zi += 1, new Pi); then the 100
//    cells are updated with inc_i = 1, and each new weight Wij is added to
//    the support accumulator epsc_j in the j-vector.
//  * JOB_COL  - column-fragment update (words 0..99: cells (100f+k, j),
//    words 100..199: the i-entries of those rows), with inc_j = 1.
//  * JOB_INIT - writes the initial j-vector after reset.
// Cells are handled two at a time, one per FPU set (cell-level parallelism
// 2, the paper's choice). Because each SRAM has one read and one write port
// the register file is filled sequentially before both sets start (the
// paper's T_init), and the results are written back to the buffer they
// came from.
//
// The load/compute/write-back sequence and the winner-take-all rule are
// this design's; the paper gives the structure (Fig. 12 of the paper's
// HCU partition: Update-FSM, register file, Mux/DeMux, two FPU sets) and
// the soft winner-take-all only by name.
//
// Timing per pair of cells: ROW 3 load + 1 start + 16 compute + 2 write =
// 22 cycles, COL 5 + 1 + 16 + 2 = 24 cycles, PER 3 + 1 + 8 + 2 = 14 cycles.
// A whole job (done pulse counted): ROW 1121, COL 1204, PER 702 cycles.
module update_fsm
  import ebrain_pkg::*;
#(
  parameter int unsigned NCELL = 100   // cells per row / column fragment
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  job_e        job,
  input  logic [6:0]  col,        // column j for JOB_COL
  input  ms_t         t_now,
  input  cell_const_t cc,         // constants for cells
  input  cell_const_t icc,        // constants for i-vector entries
  input  jvec_const_t jc,
  output logic        busy,
  output logic        done,
  output logic        fired,
  output logic [6:0]  fire_mcu,
  // selected ping-pong buffer
  output logic              b_re,
  output logic [BUF_AW-1:0] b_raddr,
  input  logic [CELL_W-1:0] b_rdata,
  output logic              b_we,
  output logic [BUF_AW-1:0] b_waddr,
  output logic [CELL_W-1:0] b_wdata,
  // periodic-update SRAM (j-vector)
  output logic              p_re,
  output logic [6:0]        p_raddr,
  input  jentry_t           p_rdata,
  output logic              p_we,
  output logic [6:0]        p_waddr,
  output jentry_t           p_wdata
);
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_PJ_RD, S_PJ_CAP, S_I_RD, S_I_CAP, S_I_WAIT, S_I_WB,
    S_LOAD, S_GO, S_WAIT, S_WB, S_FIN
  } state_e;

  state_e      st;
  job_e        jb;
  logic [6:0]  idx;      // first cell of the current pair
  logic [2:0]  lc;       // load / write-back step
  logic [6:0]  jcol;
  cell_t       cell_r [2];
  ientry_t     ient_r [2];
  jentry_t     jv_r   [2];
  fp_t         pj_col, pi_row;
  ientry_t     ient_new, ient_rd;
  // winner-take-all
  logic        any_fire;
  logic [6:0]  best_mcu;
  fp_t         best_sup;
  jentry_t     best_entry;

  // engines
  logic        e_start, e_jmode, e_ientry;
  cell_t       e_cell_in [2], e_cell_out [2];
  fp_t         e_pi [2], e_pj [2], e_epsc_in [2], e_epsc_out [2], e_zjp [2], e_sup [2];
  jentry_t     e_jout [2];
  logic        e_done [2], e_busy [2], e_fire [2];
  fp_t         inc_i, inc_j;

  assign inc_i = (jb == JOB_ROW) ? FP_ONE : FP_ZERO;
  assign inc_j = (jb == JOB_COL) ? FP_ONE : FP_ZERO;

  for (genvar g = 0; g < 2; g++) begin : g_set
    cell_update i_set (
      .clk(clk), .rst_n(rst_n),
      .start(e_start && (g == 0 || !e_ientry)), .mode_jvec(e_jmode), .t_now(t_now),
      .cell_in(e_cell_in[g]), .pi(e_pi[g]), .pj(e_pj[g]),
      .inc_i(inc_i), .inc_j(e_ientry ? FP_ZERO : inc_j), .epsc_in(e_epsc_in[g]),
      .cc(e_ientry ? icc : cc), .jin(jv_r[g]), .jc(jc),
      .busy(e_busy[g]), .done(e_done[g]), .cell_out(e_cell_out[g]), .epsc_out(e_epsc_out[g]),
      .jout(e_jout[g]), .zj_plus(e_zjp[g]), .support(e_sup[g]), .fire(e_fire[g])
    );
  end

  // engine operands (register file -> FPU set multiplexers)
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      e_cell_in[g] = cell_r[g];
      e_pi[g]      = (jb == JOB_COL) ? ient_r[g].pi : pi_row;
      e_pj[g]      = (jb == JOB_COL) ? pj_col : jv_r[g].pj;
      e_epsc_in[g] = jv_r[g].epsc;
    end
    if (e_ientry) begin
      e_cell_in[0] = '{zi2: ient_rd.zi, zj2: FP_ONE, eij: ient_rd.ei, pij: ient_rd.pi,
                       tij: ient_rd.ti, wij: FP_ZERO};
      e_pi[0] = FP_ONE;
      e_pj[0] = FP_ONE;
    end
  end

  assign ient_rd  = b_rdata;   // i-entry arriving from the buffer (S_I_CAP)
  assign e_jmode  = (jb == JOB_PER);
  assign e_ientry = (st == S_I_CAP) || (st == S_I_WAIT);
  assign e_start  = (st == S_GO) || (st == S_I_CAP);

  // number of reads per pair
  logic [2:0] nrd;
  assign nrd = (jb == JOB_COL) ? 3'd4 : 3'd2;

  // read address generation
  always_comb begin
    b_re = 1'b0; b_raddr = '0; p_re = 1'b0; p_raddr = '0;
    unique case (st)
      S_PJ_RD: begin p_re = 1'b1; p_raddr = jcol; end
      S_I_RD:  begin b_re = 1'b1; b_raddr = BUF_AW'(NCELL); end
      S_LOAD: if (lc < nrd) begin
        unique case (jb)
          JOB_ROW: begin
            b_re = 1'b1; b_raddr = BUF_AW'(idx) + BUF_AW'(lc);
            p_re = 1'b1; p_raddr = idx + 7'(lc);
          end
          JOB_COL: begin
            b_re = 1'b1;
            b_raddr = BUF_AW'(idx) + BUF_AW'(lc[1]) + (lc[0] ? BUF_AW'(NCELL) : '0);
          end
          JOB_PER: begin p_re = 1'b1; p_raddr = idx + 7'(lc); end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

  // write-back
  always_comb begin
    b_we = 1'b0; b_waddr = '0; b_wdata = '0;
    p_we = 1'b0; p_waddr = '0; p_wdata = '0;
    unique case (st)
      S_INIT: begin
        p_we = 1'b1; p_waddr = idx;
        p_wdata = '{zj: FP_ZERO, ej: FP_ZERO, pj: jc.pinit, bj: FP_ZERO, epsc: FP_ZERO};
      end
      S_I_WB: begin
        b_we = 1'b1; b_waddr = BUF_AW'(NCELL); b_wdata = ient_new;
      end
      S_WB: begin
        unique case (jb)
          JOB_ROW: begin
            b_we = 1'b1; b_waddr = BUF_AW'(idx) + BUF_AW'(lc[0]); b_wdata = e_cell_out[lc[0]];
            p_we = 1'b1; p_waddr = idx + 7'(lc[0]);
            p_wdata = jv_r[lc[0]];
            p_wdata.epsc = e_epsc_out[lc[0]];
          end
          JOB_COL: begin
            b_we = 1'b1; b_waddr = BUF_AW'(idx) + BUF_AW'(lc[0]); b_wdata = e_cell_out[lc[0]];
          end
          JOB_PER: begin
            p_we = 1'b1; p_waddr = idx + 7'(lc[0]); p_wdata = e_jout[lc[0]];
          end
          default: ;
        endcase
      end
      S_FIN: if (jb == JOB_PER && any_fire) begin
        p_we = 1'b1; p_waddr = best_mcu; p_wdata = best_entry;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; jb <= JOB_INIT; idx <= '0; lc <= '0; jcol <= '0;
      for (int g = 0; g < 2; g++) begin cell_r[g] <= '0; ient_r[g] <= '0; jv_r[g] <= '0; end
      pj_col <= FP_ZERO; pi_row <= FP_ZERO; ient_new <= '0;
      any_fire <= 1'b0; best_mcu <= '0; best_sup <= FP_ZERO; best_entry <= '0;
      done <= 1'b0; fired <= 1'b0; fire_mcu <= '0;
    end else begin
      done  <= 1'b0;
      fired <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          jb <= job; jcol <= col; idx <= '0; lc <= '0; any_fire <= 1'b0;
          unique case (job)
            JOB_INIT: st <= S_INIT;
            JOB_PER:  st <= S_LOAD;
            JOB_ROW:  st <= S_I_RD;
            JOB_COL:  st <= S_PJ_RD;
          endcase
        end
        S_INIT: begin
          if (idx == 7'(NCELL - 1)) begin st <= S_IDLE; done <= 1'b1; end
          idx <= idx + 7'd1;
        end
        S_PJ_RD:  st <= S_PJ_CAP;
        S_PJ_CAP: begin pj_col <= p_rdata.pj; st <= S_LOAD; end
        S_I_RD:   st <= S_I_CAP;
        S_I_CAP:  st <= S_I_WAIT;
        S_I_WAIT: if (e_done[0]) begin
          ient_new <= '{zi: e_cell_out[0].zi2, ei: e_cell_out[0].eij, pi: e_cell_out[0].pij,
                        ti: t_now, pad: '0};
          pi_row   <= e_cell_out[0].pij;
          st       <= S_I_WB;
        end
        S_I_WB: st <= S_LOAD;
        S_LOAD: begin
          if (lc != 0) begin
            unique case (jb)
              JOB_ROW: begin cell_r[lc[0] ^ 1'b1] <= b_rdata; jv_r[lc[0] ^ 1'b1] <= p_rdata; end
              JOB_COL: if (lc[0]) cell_r[lc[1]] <= b_rdata; else ient_r[lc[1] ^ 1'b1] <= b_rdata;
              JOB_PER: jv_r[lc[0] ^ 1'b1] <= p_rdata;
              default: ;
            endcase
          end
          if (lc == nrd) begin st <= S_GO; lc <= '0; end
          else lc <= lc + 3'd1;
        end
        S_GO:   st <= S_WAIT;
        S_WAIT: if (e_done[0]) begin st <= S_WB; lc <= '0; end
        S_WB: begin
          if (jb == JOB_PER && e_fire[lc[0]] && (!any_fire || fp_gt(e_sup[lc[0]], best_sup))) begin
            any_fire   <= 1'b1;
            best_sup   <= e_sup[lc[0]];
            best_mcu   <= idx + 7'(lc[0]);
            best_entry <= e_jout[lc[0]];
            best_entry.zj <= e_zjp[lc[0]];
          end
          if (lc[0]) begin
            lc <= '0;
            if (idx == 7'(NCELL - 2)) st <= S_FIN;
            else begin idx <= idx + 7'd2; st <= S_LOAD; end
          end else lc <= 3'd1;
        end
        S_FIN: begin
          st   <= S_IDLE;
          done <= 1'b1;
          if (jb == JOB_PER && any_fire) begin fired <= 1'b1; fire_mcu <= best_mcu; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
