// tb_bcu_full: the BCU at its full size and with every parameter at its
// default: 32 H-Cubes of 4 HCUs, 10,000 x 100 cells per HCU, fan-out 100,
// 200,000 clock cycles per millisecond, one behavioural vault per H-Cube.
// One complete millisecond of the worst case the design is sized for:
// HCU 0 receives 36 spikes (the active-queue size) and every other HCU
// two, all due in millisecond 1, and the firing threshold makes every HCU
// fire in that millisecond, so each HCU runs the periodic update, a full
// column update (100 fragments of 100 cells) and its row updates, and
// emits 100 spikes. Checked: row and column jobs per HCU, 12,800 output
// spikes with the right source HCU, no overrun (the millisecond's work
// fits in 200,000 cycles), no vault protocol error. The cycles each HCU
// needed are printed.
module tb_bcu_full;
  import ebrain_pkg::*;
  localparam int M = 32, P = 4, NH = 128;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  cell_const_t cc, icc;
  jvec_const_t jc;
  logic        in_valid = 0, out_valid, out_ready = 1;
  spike_t      in_spike = '0, out_spike;
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

  bcu dut (
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

  int nout [NH];
  int bad_src = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    if (int'(out_spike.src_hcu) < NH) nout[out_spike.src_hcu]++;
    else bad_src++;
  end

  function automatic fp_t F(real r); return real_to_fp(r); endfunction
  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; if (failures < 20) $display("FAIL %s: %0d, want %0d", what, got, want); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int worst;
    for (int k = 0; k < NH; k++) nout[k] = 0;
    cc = '{nkzi: F(-0.2), nkzj: F(-0.25), nke: F(-0.05), nkf: F(-0.45), nkp: F(-0.001), nke2: F(-0.04),
           nk4: F(-0.3), kn: F(1.3), k1: F(0.02), k2: F(0.7), k3: F(0.9), wgain: F(1.0), eps: F(0.01),
           eps2: F(0.0001)};
    icc = cc; icc.nkzj = F(0.0); icc.nkf = F(-0.2);
    jc = '{dz: F(0.8), ae: F(0.1), ap: F(0.01), eps: F(0.01), thr: F(-3.0), pinit: F(0.05)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < NH; h++)
      for (int n = 0; n < ((h == 0) ? 36 : 2); n++) begin
        @(negedge clk);
        in_valid = 1; in_spike = '0;
        in_spike.dst_hcu = 21'(h); in_spike.dst_row = 14'(97 * n + h); in_spike.delay = 10'd1;
      end
    @(negedge clk);
    in_valid = 0;
    wait (t_ms == 1);
    repeat (5000) @(posedge clk);   // the periodic update (702 cycles) has run
    jc.thr = F(50.0);               // only millisecond 1 fires
    wait (t_ms == 2);
    repeat (10) @(posedge clk);
    worst = 0;
    for (int h = 0; h < NH; h++) begin
      expect_eq($sformatf("row jobs of HCU %0d", h), int'(n_row_jobs[h]), (h == 0) ? 36 : 2);
      expect_eq($sformatf("column fragments of HCU %0d", h), int'(n_col_frags[h]), 100);
      expect_eq($sformatf("fires of HCU %0d", h), int'(n_fires[h]), 1);
      expect_eq($sformatf("output spikes of HCU %0d", h), nout[h], 100);
      expect_eq($sformatf("overruns of HCU %0d", h), int'(overruns[h]), 0);
      if (int'(last_ms_cycles[h]) > worst) worst = int'(last_ms_cycles[h]);
    end
    for (int m = 0; m < M; m++) expect_eq($sformatf("protocol errors of vault %0d", m), errors[m], 0);
    expect_eq("spikes with a foreign source", bad_src, 0);
    $display("cycles for millisecond 1: HCU 0 (36 spikes) %0d, HCU 1 %0d, worst %0d of %0d",
             last_ms_cycles[0], last_ms_cycles[1], worst, 200000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
