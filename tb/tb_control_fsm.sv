// tb_control_fsm: the per-millisecond sequencer with models of the active
// queue, the update FSM (fixed job latency) and the DRAM port (random
// accept and finish delays). Over several milliseconds it checks: one
// INIT job after reset; a PER job at each tick; after a firing, the
// fan-out request with the winner's number and NFRAG column fragments
// (COLFRG + IFRAG read, COL compute, COLFRG write-back); then one row job
// per queued spike (ROW + IENTRY read, ROW compute, ROW + IENTRY write);
// a buffer is computed only when fully fetched and written back only after
// its computation; a row is never fetched while the other buffer holds it
// unwritten; a tick during work is counted as an overrun.
module tb_control_fsm;
  import ebrain_pkg::*;
  localparam int NFRAG = 4, ULAT = 30;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic        ms_tick = 0;
  logic        aq_empty, aq_pop;
  logic [13:0] aq_row;
  logic        uf_start, uf_buf, uf_done = 0, uf_fired = 0;
  job_e        uf_job;
  logic [6:0]  uf_col, uf_fire_mcu = 0;
  logic        fo_fire;
  logic [6:0]  fo_mcu;
  logic        req_valid, req_ready = 0, req_done = 0;
  mem_req_t    req;
  logic        busy;
  logic [31:0] overruns, last_ms_cycles, n_row_jobs, n_col_frags;
  int checks = 0, failures = 0;

  control_fsm #(.NFRAG(NFRAG)) dut (.*);

  // active queue model
  int unsigned q[$];
  assign aq_empty = (q.size() == 0);
  assign aq_row   = (q.size() > 0) ? 14'(q[0]) : 14'd0;
  logic pop_q = 0;
  always @(posedge clk) pop_q <= aq_pop;
  always @(negedge clk) if (pop_q && q.size() > 0) void'(q.pop_front());

  // buffer bookkeeping: what each buffer holds and how far it got
  // 0 empty, 1 cells read, 2 complete, 3 computed
  int bstate [2];
  int bindex [2];
  logic bcol [2];
  int n_init = 0, n_per = 0, n_rowc = 0, n_colc = 0, n_fo = 0;
  int k_rd [4], k_wr [4];
  logic fire_next = 0;
  logic [6:0] fire_mcu_next = 0;

  // update FSM model
  initial begin
    forever begin
      @(posedge clk);
      if (uf_start) begin
        job_e j; logic b;
        j = uf_job; b = uf_buf;
        checks++;
        case (j)
          JOB_INIT: n_init++;
          JOB_PER:  n_per++;
          JOB_ROW, JOB_COL: begin
            if (bstate[b] != 2 || bcol[b] != (j == JOB_COL)) begin
              failures++; $display("FAIL compute on buffer %0d in state %0d", b, bstate[b]);
            end
            if (j == JOB_COL && uf_col != fire_mcu_next) begin failures++; $display("FAIL column %0d", uf_col); end
            if (j == JOB_ROW) n_rowc++; else n_colc++;
          end
        endcase
        repeat (ULAT) @(posedge clk);
        @(negedge clk);
        uf_done = 1;
        uf_fired = (j == JOB_PER) && fire_next;
        uf_fire_mcu = fire_mcu_next;
        if (j == JOB_ROW || j == JOB_COL) bstate[b] = 3;
        @(negedge clk);
        uf_done = 0; uf_fired = 0;
      end
    end
  end

  always @(posedge clk) if (fo_fire) begin
    n_fo++;
    checks++;
    if (fo_mcu != fire_mcu_next) begin failures++; $display("FAIL fan-out mcu %0d", fo_mcu); end
  end

  // DRAM port model
  initial begin
    forever begin
      @(negedge clk);
      if (req_valid) begin
        mem_req_t r;
        int b;
        r = req; b = int'(r.buf_sel);
        repeat ($urandom_range(0, 4)) @(negedge clk);
        req_ready = 1; @(negedge clk); req_ready = 0;
        repeat ($urandom_range(5, 40)) @(negedge clk);
        checks++;
        if (!r.we) begin
          k_rd[r.kind]++;
          if (r.kind == REQ_ROW || r.kind == REQ_COLFRG) begin
            if (bstate[b] != 0) begin failures++; $display("FAIL fetch into busy buffer %0d", b); end
            if (r.kind == REQ_ROW && bstate[1-b] != 0 && !bcol[1-b] && bindex[1-b] == int'(r.index)) begin
              failures++; $display("FAIL row %0d fetched while still held unwritten", r.index);
            end
            bstate[b] = 1; bindex[b] = int'(r.index); bcol[b] = (r.kind == REQ_COLFRG);
          end else begin
            if (bstate[b] != 1 || bindex[b] != int'(r.index)) begin failures++; $display("FAIL second fetch part"); end
            bstate[b] = 2;
          end
        end else begin
          k_wr[r.kind]++;
          if (bstate[b] != 3 || bindex[b] != int'(r.index)) begin
            failures++; $display("FAIL write-back of buffer %0d in state %0d", b, bstate[b]);
          end
          if (r.kind == REQ_COLFRG || r.kind == REQ_IENTRY) bstate[b] = 0;
        end
        req_done = 1; @(negedge clk); req_done = 0;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(negedge clk); ms_tick = 1; @(negedge clk); ms_tick = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: %0d, want %0d", what, got, want); end
  endtask

  initial begin
    for (int b = 0; b < 2; b++) begin bstate[b] = 0; bindex[b] = -1; bcol[b] = 0; end
    for (int k = 0; k < 4; k++) begin k_rd[k] = 0; k_wr[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_idle();
    expect_eq("init jobs", n_init, 1);
    // ms 1: three spikes, no firing
    q.push_back(17); q.push_back(4242); q.push_back(9999);
    tick();
    wait_idle();
    expect_eq("per jobs", n_per, 1);
    expect_eq("row computations", n_rowc, 3);
    expect_eq("row jobs", int'(n_row_jobs), 3);
    expect_eq("ROW reads", k_rd[REQ_ROW], 3);
    expect_eq("IENTRY reads", k_rd[REQ_IENTRY], 3);
    expect_eq("ROW writes", k_wr[REQ_ROW], 3);
    expect_eq("IENTRY writes", k_wr[REQ_IENTRY], 3);
    // ms 2: MCU 57 fires; the same row twice (hazard) plus others
    fire_next = 1; fire_mcu_next = 7'd57;
    q.push_back(300); q.push_back(300); q.push_back(301); q.push_back(300);
    tick();
    wait_idle();
    fire_next = 0;
    expect_eq("fan-out requests", n_fo, 1);
    expect_eq("column computations", n_colc, NFRAG);
    expect_eq("column fragments", int'(n_col_frags), NFRAG);
    expect_eq("COLFRG reads", k_rd[REQ_COLFRG], NFRAG);
    expect_eq("IFRAG reads", k_rd[REQ_IFRAG], NFRAG);
    expect_eq("COLFRG writes", k_wr[REQ_COLFRG], NFRAG);
    expect_eq("IFRAG writes", k_wr[REQ_IFRAG], 0);
    expect_eq("row computations", n_rowc, 7);
    expect_eq("overruns", int'(overruns), 0);
    checks++;
    if (last_ms_cycles < 32'(NFRAG * ULAT) || last_ms_cycles > 32'd20000) begin
      failures++; $display("FAIL last_ms_cycles %0d", last_ms_cycles);
    end
    // ms 3: many spikes and a tick in the middle of the work -> overrun
    for (int n = 0; n < 30; n++) q.push_back($urandom_range(0, 9999));
    tick();
    repeat (200) @(negedge clk);
    tick();
    wait_idle();       // the held tick starts ms 4 at once
    wait_idle();
    expect_eq("overruns", int'(overruns), 1);
    expect_eq("per jobs", n_per, 4);
    expect_eq("row computations", n_rowc, 37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
