// tb_asmc: the memory controller against the behavioural vault model.
// Writes matrix rows and i-vector entries of several HCUs from a buffer,
// then reads them back as column fragments and i-vector fragments, and
// checks (1) that every word lands at the DRAM address the row-merge
// formulas give, computed here independently, (2) that the read-back
// column fragment holds cell (i, j) at buffer word i mod 100, (3) the
// number of activations (10 per row or column fragment, one per i-vector
// row) and data transfers, (4) the job durations, (5) that the vault model
// saw no protocol violation.
module tb_asmc;
  import ebrain_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic              m_valid = 0, m_ready, m_done;
  logic [1:0]        m_hcu = 0;
  mem_req_t          m_req = '0;
  logic              bw_valid, bw_sel, br_en, br_sel;
  logic [1:0]        bw_hcu, br_hcu;
  logic [BUF_AW-1:0] bw_addr, br_addr;
  logic [CELL_W-1:0] bw_data, br_data;
  dram_cmd_e         d_cmd;
  logic [2:0]        d_bank;
  logic [12:0]       d_row;
  logic [6:0]        d_col;
  logic [CELL_W-1:0] d_wdata, d_rdata;
  logic              d_rvalid;
  logic [31:0]       n_act, n_data;
  int                errors, n_reads, n_writes;
  int checks = 0, failures = 0;

  logic [CELL_W-1:0] bufm [4][2][BUF_DEPTH];

  asmc dut (.*);
  dram_vault_model vault (.clk, .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
                          .errors, .n_reads, .n_writes);

  always_ff @(posedge clk) begin
    if (bw_valid) bufm[bw_hcu][bw_sel][bw_addr] <= bw_data;
    br_data <= br_en ? bufm[br_hcu][br_sel][br_addr] : '0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CELL_W-1:0] pat(int h, int i, int j);
    return {32'(h), 32'(i), 32'(j), 32'hc0ffee00 ^ 32'(i * 131 + j), 32'(i + j), 32'(h * 7 + 1)};
  endfunction

  task automatic job(input int h, input logic we, input logic sel, input req_kind_e kind,
                     input int index, input int col, output int cycles);
    int t0;
    @(negedge clk);
    m_valid = 1; m_hcu = 2'(h);
    m_req = '{we: we, buf_sel: sel, kind: kind, index: 14'(index), col: 7'(col)};
    t0 = 0;
    do begin @(posedge clk); t0++; end while (!m_ready);
    @(negedge clk); m_valid = 0;
    do begin @(posedge clk); t0++; end while (!m_done);
    cycles = t0;
  endtask

  // the paper's row-merge mapping, written independently of the controller
  function automatic longint cell_key(int h, int i, int j);
    int m, bank, brow, col;
    m    = (i / 10) * 10 + j / 10;
    col  = (i % 10) * 10 + j % 10;
    bank = (h / 2) * 4 + m % 4;
    brow = (h % 2) * 2500 + m / 4;
    return longint'({3'(bank), 13'(brow), 7'(col)});
  endfunction
  function automatic longint ient_key(int h, int i);
    int r, bank, brow;
    r    = i / 100;
    bank = ((h / 2) ^ 1) * 4 + (h % 2) * 2 + r % 2;
    brow = 5000 + r / 2;
    return longint'({3'(bank), 13'(brow), 7'(i % 100)});
  endfunction

  initial begin
    int cyc, a0, d0;
    int rows [4];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rows 4210..4213 of HCUs 0..3 (the same column fragment 42)
    for (int h = 0; h < 4; h++) begin
      int i;
      i = 4210 + h * 3 + (h == 3 ? 86 : 0);   // 4210 4213 4216 4299
      rows[h] = i;
      for (int j = 0; j < N_MCU; j++) bufm[h][h % 2][j] = pat(h, i, j);
      bufm[h][h % 2][N_MCU] = pat(h, i, 999);
      a0 = int'(n_act); d0 = int'(n_data);
      job(h, 1, 1'(h % 2), REQ_ROW, i, 0, cyc);
      checks++;
      if (cyc != 10 * 19 + 3) begin failures++; $display("FAIL row write took %0d cycles", cyc); end
      job(h, 1, 1'(h % 2), REQ_IENTRY, i, 0, cyc);
      checks++;
      if (int'(n_act) - a0 != 11 || int'(n_data) - d0 != 101) begin
        failures++; $display("FAIL act %0d data %0d", int'(n_act) - a0, int'(n_data) - d0);
      end
      // placement
      for (int j = 0; j < N_MCU; j++) begin
        checks++;
        if (!vault.mem.exists(cell_key(h, i, j)) || vault.mem[cell_key(h, i, j)] != pat(h, i, j)) begin
          failures++; if (failures < 10) $display("FAIL cell h%0d i%0d j%0d not at its row-merge address", h, i, j);
        end
      end
      checks++;
      if (!vault.mem.exists(ient_key(h, i)) || vault.mem[ient_key(h, i)] != pat(h, i, 999)) begin
        failures++; $display("FAIL i-entry h%0d i%0d misplaced", h, i);
      end
    end
    // read back column fragments and i-vector fragments
    for (int h = 0; h < 4; h++) begin
      int i, j;
      i = rows[h];
      j = (h * 37 + 5) % N_MCU;
      for (int w = 0; w < BUF_DEPTH; w++) bufm[h][0][w] = '0;
      a0 = int'(n_act); d0 = int'(n_data);
      job(h, 0, 0, REQ_COLFRG, i / 100, j, cyc);
      checks++;
      if (cyc != 10 * 16 + 4) begin failures++; $display("FAIL column read took %0d cycles", cyc); end
      job(h, 0, 0, REQ_IFRAG, i / 100, 0, cyc);
      checks++;
      if (int'(n_act) - a0 != 11 || int'(n_data) - d0 != 200) begin
        failures++; $display("FAIL col act %0d data %0d", int'(n_act) - a0, int'(n_data) - d0);
      end
      for (int k = 0; k < 100; k++) begin
        logic [CELL_W-1:0] want;
        int ii;
        ii = (i / 100) * 100 + k;
        want = (ii == i) ? pat(h, i, j) : {32'd0, 32'd0, 32'd0, 32'h3c23d70a, 32'd0, 32'd0};
        checks++;
        if (bufm[h][0][k] != want) begin failures++; if (failures < 10) $display("FAIL colfrag h%0d word %0d", h, k); end
        want = (ii == i) ? pat(h, i, 999) : {32'd0, 32'd0, 32'h3c23d70a, 32'd0, 64'd0};
        checks++;
        if (bufm[h][0][N_MCU + k] != want) begin failures++; if (failures < 10) $display("FAIL ifrag h%0d word %0d", h, k); end
      end
    end
    checks++;
    if (errors != 0) begin failures++; $display("FAIL %0d DRAM protocol errors", errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
