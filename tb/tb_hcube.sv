// tb_hcube: one H-Cube (four HCU partitions, scheduler, controller, timer)
// against the behavioural vault, with a short millisecond (CYC_PER_MS
// reduced) and small fan-out and column sizes. Spikes go to all four HCUs
// at once so that their DRAM jobs contend for the vault. Checked: row jobs
// per HCU, the row-merge placement of each HCU's rows (bank group by HCU
// pair, bank-row half by HCU parity), firing and fan-out spikes with each
// HCU's own number, that all four HCUs were granted the channel while
// others waited (round-robin contention), and a protocol-clean vault.
module tb_hcube;
  import ebrain_pkg::*;
  localparam int P = 4, CYC = 30000, FAN = 4, NFRAG = 2;
  localparam logic [20:0] BASE = 21'd4096;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  cell_const_t cc, icc;
  jvec_const_t jc;
  logic        in_valid [P], out_valid [P], out_ready [P];
  spike_t      in_spike [P], out_spike [P];
  dram_cmd_e         d_cmd;
  logic [2:0]        d_bank;
  logic [12:0]       d_row;
  logic [6:0]        d_col;
  logic [CELL_W-1:0] d_wdata, d_rdata;
  logic              d_rvalid;
  ms_t               t_ms;
  logic [31:0] overruns [P], last_ms_cycles [P], drops [P], n_row_jobs [P], n_col_frags [P], n_fires [P];
  logic [31:0] n_act, n_data;
  int errors, n_reads, n_writes;
  int checks = 0, failures = 0;

  hcube #(.P(P), .CYC_PER_MS(CYC), .FAN(FAN), .TOTAL_HCU(2000000), .NFRAG(NFRAG)) dut (
    .clk, .rst_n, .base_hcu(BASE), .cc, .icc, .jc,
    .in_valid, .in_spike, .out_valid, .out_spike, .out_ready,
    .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
    .t_ms, .overruns, .last_ms_cycles, .drops, .n_row_jobs, .n_col_frags, .n_fires, .n_act, .n_data
  );
  dram_vault_model vault (.clk, .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
                          .errors, .n_reads, .n_writes);

  function automatic fp_t F(real r); return real_to_fp(r); endfunction
  function automatic longint cell_key(int h, int i, int j);
    int m;
    m = (i / 10) * 10 + j / 10;
    return longint'({3'((h / 2) * 4 + m % 4), 13'((h % 2) * 2500 + m / 4), 7'((i % 10) * 10 + j % 10)});
  endfunction
  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; $display("FAIL %s: %0d, want %0d", what, got, want); end
  endtask

  // contention monitor: a partition waits while another one holds the channel
  int waited [P];
  int nout [P];
  always @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      if (dut.req_valid[p] && dut.i_sched.active && int'(dut.i_sched.grant) != p) waited[p]++;
      if (out_valid[p] && out_ready[p]) begin
        nout[p]++;
        checks++;
        if (out_spike[p].src_hcu != BASE + 21'(p)) begin failures++; $display("FAIL src hcu of HCU %0d", p); end
      end
    end
  end

  initial begin
    repeat (20 * CYC) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin
      in_valid[p] = 0; in_spike[p] = '0; out_ready[p] = 1; waited[p] = 0; nout[p] = 0;
    end
    cc = '{nkzi: F(-0.2), nkzj: F(-0.25), nke: F(-0.05), nkf: F(-0.45), nkp: F(-0.001), nke2: F(-0.04),
           nk4: F(-0.3), kn: F(1.3), k1: F(0.02), k2: F(0.7), k3: F(0.9), wgain: F(1.0), eps: F(0.01),
           eps2: F(0.0001)};
    icc = cc; icc.nkzj = F(0.0); icc.nkf = F(-0.2);
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(0.01), thr: F(50.0), pinit: F(0.05)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // five spikes per HCU, delay 1, all four HCUs at once
    for (int n = 0; n < 5; n++) begin
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        in_valid[p] = 1; in_spike[p] = '0;
        in_spike[p].dst_hcu = BASE + 21'(p); in_spike[p].delay = 10'd1;
        in_spike[p].dst_row = 14'(1000 * p + 37 * n);
      end
    end
    @(negedge clk);
    for (int p = 0; p < P; p++) in_valid[p] = 0;
    wait (t_ms == 2);
    for (int p = 0; p < P; p++) expect_eq($sformatf("row jobs HCU %0d", p), int'(n_row_jobs[p]), 5);
    for (int p = 0; p < P; p++)
      for (int n = 0; n < 5; n++)
        for (int j = 0; j < N_MCU; j += 33) begin
          cell_t c;
          checks++;
          if (!vault.mem.exists(cell_key(p, 1000 * p + 37 * n, j))) begin
            failures++; $display("FAIL HCU %0d row %0d not at its address", p, 1000 * p + 37 * n);
          end else begin
            c = vault.mem[cell_key(p, 1000 * p + 37 * n, j)];
            if (c.tij != 32'd1) begin failures++; $display("FAIL Tij %0d", c.tij); end
          end
        end
    // firing: every HCU fires once per ms
    jc.thr = F(-3.0);
    wait (t_ms == 4);
    for (int p = 0; p < P; p++) begin
      checks++;
      if (n_fires[p] < 1 || nout[p] != FAN * int'(n_fires[p])) begin
        failures++; $display("FAIL HCU %0d fires %0d spikes %0d", p, n_fires[p], nout[p]);
      end
      checks++;
      if (waited[p] == 0) begin failures++; $display("FAIL HCU %0d never waited for the vault", p); end
      expect_eq($sformatf("overruns HCU %0d", p), int'(overruns[p]), 0);
    end
    expect_eq("DRAM protocol errors", errors, 0);
    $display("ms cycles per HCU: %0d %0d %0d %0d, activations %0d, words %0d",
             last_ms_cycles[0], last_ms_cycles[1], last_ms_cycles[2], last_ms_cycles[3], n_act, n_data);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
