// control_fsm: the per-millisecond sequencer of an HCU partition.
//
// At every ms tick it runs, in order, the three BCPNN sub-threads as atomic
// jobs (the paper's worst-case budget EQ2: 36 row updates + 1 column update
// + the periodic update must fit in 1 ms):
//  1. the periodic support update and winner-take-all (data local, no DRAM);
//  2. if an MCU fired: the fan-out request and the column update of that
//     MCU, as NFRAG fragments of NCELL cells;
//  3. one row update per spike waiting in the active queue, until it is
//     empty.
// Rows and column fragments go through the two ping-pong buffers so that
// the DRAM transfer of one job overlaps the computation of the other (the
// paper's k = 2 choice in EQ3). Each buffer cycles EMPTY -> FETCH -> FULL ->
// COMP -> DONE -> WB -> EMPTY; jobs alternate between the buffers, the DRAM
// port is shared between fetch and write-back (write-back first), and a
// row is not fetched while the other buffer still holds the same row
// unwritten. The column phase is written back completely before the first
// row is fetched, so row and column updates never interleave on a cell.
// After reset the j-vector is initialised once.
//
// A DRAM job is one request on req_*: held until req_ready, then finished
// by req_done. A row fetch is two requests (the 100 cells, then the
// i-entry); a column fetch is two (the fragment, then its 100 i-entries);
// a row write-back is two, a column write-back one (i-entries unchanged).
//
// A tick that arrives while the previous millisecond's work is still
// running is held and counted in `overruns`; `last_ms_cycles` reports how
// many cycles the last completed millisecond took. The buffer state
// machine, the hazard rule and these counters are this design's own.
module control_fsm
  import ebrain_pkg::*;
#(
  parameter int unsigned NFRAG = 100   // fragments per column update
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ms_tick,
  // active queue
  input  logic        aq_empty,
  input  logic [13:0] aq_row,
  output logic        aq_pop,
  // update FSM
  output logic        uf_start,
  output job_e        uf_job,
  output logic        uf_buf,
  output logic [6:0]  uf_col,
  input  logic        uf_done,
  input  logic        uf_fired,
  input  logic [6:0]  uf_fire_mcu,
  // fan-out unit
  output logic        fo_fire,
  output logic [6:0]  fo_mcu,
  // DRAM request port
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        req_done,
  // status
  output logic        busy,
  output logic [31:0] overruns,
  output logic [31:0] last_ms_cycles,
  output logic [31:0] n_row_jobs,
  output logic [31:0] n_col_frags
);
  typedef enum logic [2:0] { B_EMPTY, B_FETCH, B_FULL, B_COMP, B_DONE, B_WB } bstate_e;
  typedef enum logic [2:0] { P_INIT, P_IDLE, P_PER, P_COL, P_ROW } phase_e;

  phase_e      ph;
  bstate_e     bs   [2];
  logic [13:0] bidx [2];     // row i or fragment f held by each buffer
  logic        fetch_sel, comp_sel;
  logic [6:0]  col_j;
  logic [13:0] next_frag;
  logic        tick_pend;
  logic [31:0] ms_cyc;
  logic        started;

  // DRAM port sequencing
  logic        d_busy, d_sent, d_second;
  logic        d_buf;
  logic        d_we;

  // one DRAM request word for (buffer, write?, second part?)
  function automatic mem_req_t mk_req(logic b, logic we, logic second, phase_e p, logic [13:0] ix, logic [6:0] j);
    mem_req_t r;
    r.we      = we;
    r.buf_sel = b;
    r.index   = ix;
    r.col     = j;
    if (p == P_COL) r.kind = second ? REQ_IFRAG : REQ_COLFRG;
    else            r.kind = second ? REQ_IENTRY : REQ_ROW;
    return r;
  endfunction

  logic have_job, hazard, can_wb, can_fetch, wb_sel;
  always_comb begin
    have_job = (ph == P_COL) ? (next_frag < 14'(NFRAG)) : (ph == P_ROW) && !aq_empty;
    hazard   = (ph == P_ROW) && (bs[!fetch_sel] != B_EMPTY) && (bidx[!fetch_sel] == aq_row);
    can_wb   = (bs[0] == B_DONE) || (bs[1] == B_DONE);
    wb_sel   = (bs[0] == B_DONE) ? 1'b0 : 1'b1;
    can_fetch = have_job && !hazard && (bs[fetch_sel] == B_EMPTY);
  end

  assign req_valid = d_busy && !d_sent;
  assign req       = mk_req(d_buf, d_we, d_second, ph, bidx[d_buf], col_j);
  assign aq_pop    = (ph == P_ROW) && !d_busy && !can_wb && can_fetch;
  assign busy      = (ph != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_INIT; started <= 1'b0;
      bs[0] <= B_EMPTY; bs[1] <= B_EMPTY; bidx[0] <= '0; bidx[1] <= '0;
      fetch_sel <= 1'b0; comp_sel <= 1'b0; col_j <= '0; next_frag <= '0;
      tick_pend <= 1'b0; ms_cyc <= '0;
      d_busy <= 1'b0; d_sent <= 1'b0; d_second <= 1'b0; d_buf <= 1'b0; d_we <= 1'b0;
      uf_start <= 1'b0; uf_job <= JOB_INIT; uf_buf <= 1'b0; uf_col <= '0;
      fo_fire <= 1'b0; fo_mcu <= '0;
      overruns <= '0; last_ms_cycles <= '0; n_row_jobs <= '0; n_col_frags <= '0;
    end else begin
      uf_start <= 1'b0;
      fo_fire  <= 1'b0;
      if (ph != P_IDLE) ms_cyc <= ms_cyc + 32'd1;
      if (ms_tick) begin
        if (ph != P_IDLE || tick_pend) overruns <= overruns + 32'd1;
        tick_pend <= 1'b1;
      end

      // ---------------- DRAM port ----------------
      if (d_busy) begin
        if (req_ready) d_sent <= 1'b1;
        if (req_done) begin
          d_sent <= 1'b0;
          // second request of the pair (column write-back has only one)
          if (!d_second && !(d_we && ph == P_COL)) d_second <= 1'b1;
          else begin
            d_busy   <= 1'b0;
            d_second <= 1'b0;
            bs[d_buf] <= d_we ? B_EMPTY : B_FULL;
          end
        end
      end else if (ph == P_COL || ph == P_ROW) begin
        if (can_wb) begin
          d_busy <= 1'b1; d_sent <= 1'b0; d_second <= 1'b0; d_buf <= wb_sel; d_we <= 1'b1;
          bs[wb_sel] <= B_WB;
        end else if (can_fetch) begin
          d_busy <= 1'b1; d_sent <= 1'b0; d_second <= 1'b0; d_buf <= fetch_sel; d_we <= 1'b0;
          bs[fetch_sel]   <= B_FETCH;
          bidx[fetch_sel] <= (ph == P_COL) ? next_frag : aq_row;
          fetch_sel       <= !fetch_sel;
          if (ph == P_COL) begin next_frag <= next_frag + 14'd1; n_col_frags <= n_col_frags + 32'd1; end
          else n_row_jobs <= n_row_jobs + 32'd1;
        end
      end

      // ---------------- computation ----------------
      if ((ph == P_COL || ph == P_ROW) && bs[comp_sel] == B_FULL && !uf_start &&
          !(bs[!comp_sel] == B_COMP)) begin
        uf_start     <= 1'b1;
        uf_job       <= (ph == P_COL) ? JOB_COL : JOB_ROW;
        uf_buf       <= comp_sel;
        uf_col       <= col_j;
        bs[comp_sel] <= B_COMP;
      end
      if ((ph == P_COL || ph == P_ROW) && uf_done && bs[uf_buf] == B_COMP) begin
        bs[uf_buf] <= B_DONE;
        comp_sel   <= !comp_sel;
      end

      // ---------------- phases ----------------
      unique case (ph)
        P_INIT: begin
          if (!started) begin
            uf_start <= 1'b1; uf_job <= JOB_INIT; started <= 1'b1;
          end else if (uf_done) ph <= P_IDLE;
        end
        P_IDLE: if (tick_pend || ms_tick) begin
          tick_pend <= 1'b0;
          ms_cyc    <= '0;
          uf_start  <= 1'b1;
          uf_job    <= JOB_PER;
          ph        <= P_PER;
        end
        P_PER: if (uf_done) begin
          if (uf_fired) begin
            fo_fire   <= 1'b1;
            fo_mcu    <= uf_fire_mcu;
            col_j     <= uf_fire_mcu;
            next_frag <= '0;
            ph        <= P_COL;
          end else ph <= P_ROW;
        end
        P_COL: if (next_frag == 14'(NFRAG) && bs[0] == B_EMPTY && bs[1] == B_EMPTY && !d_busy) begin
          ph <= P_ROW;
          fetch_sel <= 1'b0; comp_sel <= 1'b0;
        end
        P_ROW: if (aq_empty && bs[0] == B_EMPTY && bs[1] == B_EMPTY && !d_busy) begin
          ph <= P_IDLE;
          fetch_sel <= 1'b0; comp_sel <= 1'b0;
          last_ms_cycles <= ms_cyc + 32'd1;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

  // a buffer is never fetched into while it is being computed on
  assert property (@(posedge clk) disable iff (!rst_n)
                   (d_busy && !d_we) |-> bs[d_buf] == B_FETCH);
endmodule
