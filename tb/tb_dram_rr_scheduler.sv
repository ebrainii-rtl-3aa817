// tb_dram_rr_scheduler: four partitions raise DRAM jobs at random; the
// testbench plays the memory controller with random accept and finish
// delays. Checked: a granted job is the one the partition presents; grants
// follow round-robin order (the first waiting partition after the last one
// served); ready and done reach only the granted partition; data streams
// are steered by partition number, with br_data one cycle after br_en.
module tb_dram_rr_scheduler;
  import ebrain_pkg::*;
  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic              req_valid [P], req_ready [P], req_done [P];
  mem_req_t          req [P];
  logic              p_bw_valid [P], p_br_en [P];
  logic              p_bw_sel, p_br_sel;
  logic [BUF_AW-1:0] p_bw_addr, p_br_addr;
  logic [CELL_W-1:0] p_bw_data;
  logic [CELL_W-1:0] p_br_data [P];
  logic              m_valid, m_ready = 0, m_done = 0;
  logic [1:0]        m_hcu;
  mem_req_t          m_req;
  logic              bw_valid = 0, bw_sel = 0, br_en = 0, br_sel = 0;
  logic [1:0]        bw_hcu = 0, br_hcu = 0;
  logic [BUF_AW-1:0] bw_addr = 0, br_addr = 0;
  logic [CELL_W-1:0] bw_data = 0, br_data;
  int checks = 0, failures = 0;
  int served [P];
  int last = P - 1;

  dram_rr_scheduler #(.P(P)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // partitions: each holds a request until done, then waits a little
  for (genvar p = 0; p < P; p++) begin : g_part
    int gap;
    logic [13:0] idx;
    initial begin
      req_valid[p] = 0; req[p] = '0; idx = 0; gap = 0;
      p_br_data[p] = {8'(p), 184'd0};
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        if (req_valid[p] && req_done[p]) begin req_valid[p] = 0; gap = $urandom_range(0, 30); end
        else if (!req_valid[p]) begin
          if (gap == 0) begin
            idx = idx + 1;
            req_valid[p] = 1;
            req[p] = '{we: 1'($urandom_range(0, 1)), buf_sel: 1'(p % 2), kind: REQ_ROW, index: idx, col: 7'(p)};
          end else gap--;
        end
      end
    end
  end

  // controller model
  initial begin
    for (int p = 0; p < P; p++) served[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (400) begin
      int w, exp_p;
      @(negedge clk);
      while (!m_valid) @(negedge clk);
      // expected round-robin choice among the waiting partitions
      exp_p = -1;
      for (int k = 1; k <= P; k++) if (exp_p < 0 && req_valid[(last + k) % P]) exp_p = (last + k) % P;
      checks++;
      if (int'(m_hcu) != exp_p || m_req != req[m_hcu]) begin
        failures++; $display("FAIL grant %0d want %0d", m_hcu, exp_p);
      end
      w = $urandom_range(0, 3);
      repeat (w) @(negedge clk);
      m_ready = 1;
      @(negedge clk);
      m_ready = 0;
      // stream some data to / from the granted partition
      repeat ($urandom_range(1, 6)) begin
        bw_valid = 1; bw_hcu = m_hcu; bw_sel = 1'($urandom_range(0, 1)); bw_addr = 8'($urandom_range(0, 199));
        br_en = 1; br_hcu = m_hcu; br_sel = bw_sel; br_addr = bw_addr;
        #0.1;
        for (int p = 0; p < P; p++) begin
          checks++;
          if (p_bw_valid[p] != (p == int'(m_hcu)) || p_br_en[p] != (p == int'(m_hcu)) ||
              p_bw_addr != bw_addr || p_br_addr != br_addr) begin
            failures++; $display("FAIL steering to %0d", p);
          end
        end
        @(negedge clk);
        checks++;
        if (br_data[191:184] != 8'(br_hcu)) begin failures++; $display("FAIL br_data from %0d", br_data[191:184]); end
      end
      bw_valid = 0; br_en = 0;
      m_done = 1;
      #0.1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (req_done[p] != (p == int'(m_hcu))) begin failures++; $display("FAIL done to %0d", p); end
      end
      served[m_hcu]++;
      last = int'(m_hcu);
      @(negedge clk);
      m_done = 0;
    end
    for (int p = 0; p < P; p++) begin
      checks++;
      if (served[p] < 50) begin failures++; $display("FAIL partition %0d served only %0d times", p, served[p]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
