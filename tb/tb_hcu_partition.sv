// tb_hcu_partition: one HCU partition with the memory controller and the
// behavioural vault, the millisecond tick driven by the testbench.
// Checked:
//  * spikes enter the delay queue and become row updates in the
//    millisecond their delay expires (n_row_jobs per ms);
//  * an updated row is written back to the row-merge DRAM addresses with
//    the time stamp Tij of that millisecond, and its i-entry with Ti;
//  * with the firing threshold below every support, the winner fires once
//    per ms: FAN output spikes carry the source HCU/MCU and the destination
//    rule, and the column update writes back the NFRAG fragments of that
//    column (Tij of rows 0..100*NFRAG-1, column j);
//  * ticks faster than the work are counted as overruns;
//  * more spikes than the active queue holds are dropped and counted;
//  * the vault saw no protocol violation.
module tb_hcu_partition;
  import ebrain_pkg::*;
  localparam int NFRAG = 3, FAN = 5;
  localparam logic [20:0] OWN = 21'd777;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic        ms_tick = 0;
  ms_t         t_ms = 0;
  cell_const_t cc, icc;
  jvec_const_t jc;
  logic        in_valid = 0;
  spike_t      in_spike = '0;
  logic        out_valid, out_ready = 1;
  spike_t      out_spike;
  logic        req_valid, req_ready, req_done;
  mem_req_t    req;
  logic              bw_valid, bw_sel, br_en, br_sel;
  logic [1:0]        bw_hcu, br_hcu;
  logic [BUF_AW-1:0] bw_addr, br_addr;
  logic [CELL_W-1:0] bw_data, br_data;
  logic        busy;
  logic [31:0] overruns, last_ms_cycles, dq_drops, aq_drops, n_row_jobs, n_col_frags, n_fires;
  dram_cmd_e         d_cmd;
  logic [2:0]        d_bank;
  logic [12:0]       d_row;
  logic [6:0]        d_col;
  logic [CELL_W-1:0] d_wdata, d_rdata;
  logic              d_rvalid;
  logic [31:0]       n_act, n_data;
  int                errors, n_reads, n_writes;
  int checks = 0, failures = 0;

  hcu_partition #(.FAN(FAN), .TOTAL_HCU(2000000), .NFRAG(NFRAG)) dut (
    .clk, .rst_n, .ms_tick, .t_ms, .own_hcu(OWN), .cc, .icc, .jc,
    .in_valid, .in_spike, .out_valid, .out_spike, .out_ready,
    .req_valid, .req, .req_ready, .req_done,
    .bw_valid, .bw_sel, .bw_addr, .bw_data, .br_en, .br_sel, .br_addr, .br_data,
    .busy, .overruns, .last_ms_cycles, .dq_drops, .aq_drops, .n_row_jobs, .n_col_frags, .n_fires
  );
  asmc i_mc (
    .clk, .rst_n, .m_valid(req_valid), .m_hcu(2'd0), .m_req(req), .m_ready(req_ready), .m_done(req_done),
    .bw_valid, .bw_hcu, .bw_sel, .bw_addr, .bw_data, .br_en, .br_hcu, .br_sel, .br_addr, .br_data,
    .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid, .n_act, .n_data
  );
  dram_vault_model vault (.clk, .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
                          .errors, .n_reads, .n_writes);

  function automatic fp_t F(real r); return real_to_fp(r); endfunction

  // row-merge addresses of HCU 0 of the vault (independent of the RTL)
  function automatic longint cell_key(int i, int j);
    int m;
    m = (i / 10) * 10 + j / 10;
    return longint'({3'(m % 4), 13'(m / 4), 7'((i % 10) * 10 + j % 10)});
  endfunction
  function automatic longint ient_key(int i);
    return longint'({3'(4 + (i / 100) % 2), 13'(5000 + i / 200), 7'(i % 100)});
  endfunction

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: %0d, want %0d", what, got, want); end
  endtask

  task automatic send(int row, int delay);
    @(negedge clk);
    in_valid = 1; in_spike = '0; in_spike.dst_row = 14'(row); in_spike.delay = 10'(delay); in_spike.dst_hcu = OWN;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic tick_and_wait(int gap);
    @(negedge clk); t_ms = t_ms + 1; ms_tick = 1; @(negedge clk); ms_tick = 0;
    repeat (gap) @(negedge clk);
  endtask

  function automatic int cell_t_of(int i, int j);
    cell_t c;
    if (!vault.mem.exists(cell_key(i, j))) return -1;
    c = vault.mem[cell_key(i, j)];
    return int'(c.tij);
  endfunction

  // output spikes
  int nout = 0;
  logic [6:0] last_fire_mcu;
  always @(posedge clk) if (out_valid && out_ready) begin
    checks++;
    if (out_spike.src_hcu != OWN || out_spike.dst_hcu != OWN + 21'(nout % FAN + 1) ||
        int'(out_spike.dst_row) != (int'(OWN) * 100 + int'(out_spike.src_mcu)) % 10000 ||
        int'(out_spike.delay) != 1 + (nout % FAN) % 7) begin
      failures++; $display("FAIL output spike %0d: dst %0d row %0d", nout, out_spike.dst_hcu, out_spike.dst_row);
    end
    last_fire_mcu = 7'(out_spike.src_mcu);
    nout++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cc = '{nkzi: F(-0.2), nkzj: F(-0.25), nke: F(-0.05), nkf: F(-0.45), nkp: F(-0.001), nke2: F(-0.04),
           nk4: F(-0.3), kn: F(1.3), k1: F(0.02), k2: F(0.7), k3: F(0.9), wgain: F(1.0), eps: F(0.01),
           eps2: F(0.0001)};
    icc = cc; icc.nkzj = F(0.0); icc.nkf = F(-0.2);
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(0.01), thr: F(50.0), pinit: F(0.05)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(negedge clk);               // j-vector initialisation
    // ---- ms 1..3: spikes with delays 1, 2, 3 ----
    send(1234, 1); send(42, 2); send(43, 2); send(9876, 3);
    tick_and_wait(8000);
    expect_eq("row jobs after ms 1", int'(n_row_jobs), 1);
    tick_and_wait(8000);
    expect_eq("row jobs after ms 2", int'(n_row_jobs), 3);
    tick_and_wait(8000);
    expect_eq("row jobs after ms 3", int'(n_row_jobs), 4);
    expect_eq("fires without threshold", int'(n_fires), 0);
    for (int j = 0; j < N_MCU; j += 11) begin
      expect_eq("Tij row 1234", cell_t_of(1234, j), 1);
      expect_eq("Tij row 42", cell_t_of(42, j), 2);
      expect_eq("Tij row 9876", cell_t_of(9876, j), 3);
    end
    checks++;
    if (!vault.mem.exists(ient_key(1234))) begin failures++; $display("FAIL i-entry of row 1234 missing"); end
    else begin
      ientry_t ie;
      ie = vault.mem[ient_key(1234)];
      if (ie.ti != 32'd1) begin failures++; $display("FAIL i-entry of row 1234 Ti %0d", ie.ti); end
    end
    // ---- ms 4: the threshold lets the winner fire ----
    jc.thr = F(-3.0);
    tick_and_wait(12000);
    expect_eq("fires", int'(n_fires), 1);
    expect_eq("output spikes", nout, FAN);
    expect_eq("column fragments", int'(n_col_frags), NFRAG);
    for (int i = 0; i < 100 * NFRAG; i += 7)
      expect_eq("Tij of the fired column", cell_t_of(i, int'(last_fire_mcu)), 4);
    expect_eq("untouched column stays fresh", cell_t_of(5, (int'(last_fire_mcu) + 1) % 100), -1);
    // ---- ms 5..: ticks faster than the work -> overruns ----
    expect_eq("overruns before", int'(overruns), 0);
    tick_and_wait(500);
    tick_and_wait(500);
    tick_and_wait(12000);
    checks++;
    if (overruns == 0) begin failures++; $display("FAIL no overrun counted"); end
    // ---- active-queue overflow: 50 spikes due in the same ms ----
    jc.thr = F(50.0);
    for (int n = 0; n < 50; n++) send(2000 + n, 1);
    tick_and_wait(200);
    checks++;
    if (aq_drops == 0) begin failures++; $display("FAIL no active-queue drop"); end
    else $display("active-queue drops %0d", aq_drops);
    repeat (60000) @(negedge clk);
    expect_eq("rows processed + dropped", int'(n_row_jobs) + int'(aq_drops), 4 + 50);
    expect_eq("DRAM protocol errors", errors, 0);
    $display("last ms took %0d cycles", last_ms_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
