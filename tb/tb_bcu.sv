// tb_bcu: end-to-end run of a reduced BCU (2 H-Cubes of 4 HCUs, short
// millisecond, fan-out 4, column updates of 2 fragments) with one
// behavioural vault per H-Cube. The BCU's output is fed back to its input,
// so fired spikes travel out through the collecting tree, come back through
// the distributing tree, wait in the delay queues and become row updates
// of other HCUs. The run counts how often each mechanism of the design
// happened and fails if one never did:
//   input-tree delivery, delay-queue maturing, row update, periodic update
//   with firing, fan-out, column update, output-tree arbitration stall,
//   round-robin wait for the vault, active-queue overflow drop, overrun of
//   the millisecond budget.
// It also checks that every delivered spike reaches the HCU it names, that
// fired spikes come back as row updates, and that no vault saw a protocol
// violation.
module tb_bcu;
  import ebrain_pkg::*;
  localparam int M = 2, P = 4, NH = M * P, CYC = 30000, FAN = 4, NFRAG = 2;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  cell_const_t cc, icc;
  jvec_const_t jc;
  logic        in_valid, out_valid, out_ready;
  spike_t      in_spike, out_spike;
  logic        ext_valid = 0;
  spike_t      ext_spike = '0;
  dram_cmd_e         d_cmd    [M];
  logic [2:0]        d_bank   [M];
  logic [12:0]       d_row    [M];
  logic [6:0]        d_col    [M];
  logic [CELL_W-1:0] d_wdata  [M];
  logic [CELL_W-1:0] d_rdata  [M];
  logic              d_rvalid [M];
  ms_t               t_ms;
  logic [31:0] overruns [NH], last_ms_cycles [NH], drops [NH], n_row_jobs [NH], n_col_frags [NH], n_fires [NH];
  logic [31:0] n_act [M], n_data [M];
  int errors [M], n_reads [M], n_writes [M];
  int checks = 0, failures = 0;

  bcu #(.M(M), .P(P), .CYC_PER_MS(CYC), .FAN(FAN), .TOTAL_HCU(NH), .NFRAG(NFRAG)) dut (
    .clk, .rst_n, .bcu_base(21'd0), .cc, .icc, .jc,
    .in_valid, .in_spike, .out_valid, .out_spike, .out_ready,
    .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
    .t_ms, .overruns, .last_ms_cycles, .drops, .n_row_jobs, .n_col_frags, .n_fires, .n_act, .n_data
  );

  for (genvar m = 0; m < M; m++) begin : g_vault
    dram_vault_model vault (.clk, .d_cmd(d_cmd[m]), .d_bank(d_bank[m]), .d_row(d_row[m]), .d_col(d_col[m]),
                            .d_wdata(d_wdata[m]), .d_rdata(d_rdata[m]), .d_rvalid(d_rvalid[m]),
                            .errors(errors[m]), .n_reads(n_reads[m]), .n_writes(n_writes[m]));
  end

  // loop-back: the testbench's own spikes take priority, the BCU output waits
  assign in_valid  = ext_valid || out_valid;
  assign in_spike  = ext_valid ? ext_spike : out_spike;
  assign out_ready = !ext_valid;

  // ---------------- mechanism counters ----------------
  int c_deliver = 0, c_mature = 0, c_tree_stall = 0, c_rr_wait = 0, c_looped = 0, c_misroute = 0;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NH; k++) begin
      if (dut.li_valid[k]) begin
        c_deliver++;
        if (int'(dut.li_spike[k].dst_hcu) != k) c_misroute++;
      end
      if (dut.lo_valid[k] && !dut.lo_ready[k]) c_tree_stall++;
    end
    if (out_valid && out_ready) c_looped++;
  end
  for (genvar m = 0; m < M; m++) begin : g_mon
    for (genvar p = 0; p < P; p++) begin : g_h
      always @(posedge clk) if (rst_n) begin
        if (dut.g_cube[m].i_cube.g_hcu[p].i_hcu.i_dq.out_valid) c_mature++;
        if (dut.g_cube[m].i_cube.i_sched.active && dut.g_cube[m].i_cube.req_valid[p] &&
            int'(dut.g_cube[m].i_cube.i_sched.grant) != p) c_rr_wait++;
      end
    end
  end

  function automatic int sum(logic [31:0] v [NH]);
    int s = 0;
    for (int k = 0; k < NH; k++) s += int'(v[k]);
    return s;
  endfunction
  function automatic fp_t F(real r); return real_to_fp(r); endfunction
  task automatic count(string what, int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (12 * CYC) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic inject(int hcu, int row, int delay);
    @(negedge clk);
    ext_valid = 1; ext_spike = '0;
    ext_spike.dst_hcu = 21'(hcu); ext_spike.dst_row = 14'(row); ext_spike.delay = 10'(delay);
    ext_spike.src_hcu = 21'h1fffff;
    @(negedge clk);
    ext_valid = 0;
  endtask

  initial begin
    int n_inj;
    cc = '{nkzi: F(-0.2), nkzj: F(-0.25), nke: F(-0.05), nkf: F(-0.45), nkp: F(-0.001), nke2: F(-0.04),
           nk4: F(-0.3), kn: F(1.3), k1: F(0.02), k2: F(0.7), k3: F(0.9), wgain: F(1.0), eps: F(0.01),
           eps2: F(0.0001)};
    icc = cc; icc.nkzj = F(0.0); icc.nkf = F(-0.2);
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(0.01), thr: F(-3.0), pinit: F(0.05)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ms 0: a few spikes to every HCU
    n_inj = 0;
    for (int h = 0; h < NH; h++) for (int n = 0; n < 3; n++) begin inject(h, 100 * h + n, 1 + n); n_inj++; end
    wait (t_ms == 3);
    // ms 3: a burst of 50 spikes for HCU 5, all due in the same ms:
    // the active queue overflows and the row updates overrun the budget
    jc.thr = F(50.0);
    for (int n = 0; n < 50; n++) begin inject(5, 5000 + n, 1); n_inj++; end
    wait (t_ms == 8);
    repeat (100) @(posedge clk);
    $display("mechanisms:");
    count("input-tree deliveries", c_deliver);
    count("delay-queue spikes matured", c_mature);
    count("row updates", sum(n_row_jobs));
    count("firings (periodic update + WTA)", sum(n_fires));
    count("fan-out spikes looped back", c_looped);
    count("column-update fragments", sum(n_col_frags));
    count("output-tree arbitration stalls", c_tree_stall);
    count("round-robin vault waits", c_rr_wait);
    count("active-queue drops", sum(drops));
    count("millisecond overruns", sum(overruns));
    checks++;
    if (c_misroute != 0) begin failures++; $display("FAIL %0d spikes delivered to the wrong HCU", c_misroute); end
    checks++;
    if (c_deliver != n_inj + c_looped) begin failures++; $display("FAIL deliveries %0d, sent %0d", c_deliver, n_inj + c_looped); end
    checks++;
    if (c_looped != FAN * sum(n_fires)) begin failures++; $display("FAIL looped %0d for %0d fires", c_looped, sum(n_fires)); end
    checks++;
    if (sum(n_row_jobs) + sum(drops) < n_inj) begin failures++; $display("FAIL row jobs %0d + drops %0d < %0d", sum(n_row_jobs), sum(drops), n_inj); end
    checks++;
    if (sum(n_col_frags) != NFRAG * sum(n_fires)) begin failures++; $display("FAIL column fragments"); end
    for (int m = 0; m < M; m++) begin
      checks++;
      if (errors[m] != 0) begin failures++; $display("FAIL vault %0d: %0d protocol errors", m, errors[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
