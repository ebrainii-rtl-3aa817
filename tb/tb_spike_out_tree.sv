// tb_spike_out_tree: 128 sources offer numbered spikes under a random
// out_ready. Every spike must leave the root exactly once, in order per
// source; with all sources busy the root must carry at least one spike per
// two cycles, and every source must get through (no starvation).
module tb_spike_out_tree;
  import ebrain_pkg::*;
  localparam int LEAVES = 128, PER_SRC = 20;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic   in_valid [LEAVES];
  spike_t in_spike [LEAVES];
  logic   in_ready [LEAVES];
  logic   out_valid, out_ready = 0;
  spike_t out_spike;
  int checks = 0, failures = 0;
  int sent [LEAVES], got [LEAVES];
  int total = 0, cyc = 0, first_out = -1, last_out = 0;

  spike_out_tree #(.LEAVES(LEAVES)) dut (.*);

  function automatic spike_t mk(int src, int seq);
    spike_t s;
    s = '0;
    s.src_hcu = 21'(src);
    s.dst_row = 14'(seq);
    s.prj     = 6'(src);
    return s;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: valid stays up until accepted
  always_ff @(posedge clk) begin
    if (rst_n) for (int p = 0; p < LEAVES; p++) if (in_valid[p] && in_ready[p]) begin
      sent[p]++;
    end
  end
  always_comb for (int p = 0; p < LEAVES; p++) begin
    in_valid[p] = rst_n && sent[p] < PER_SRC;
    in_spike[p] = mk(p, sent[p]);
  end

  // sink
  always_ff @(posedge clk) begin
    if (rst_n) begin
      cyc <= cyc + 1;
      if (out_valid && out_ready) begin
        int s;
        s = int'(out_spike.src_hcu);
        checks++;
        if (s >= LEAVES || int'(out_spike.dst_row) != got[s] || int'(out_spike.prj) != s % 64) begin
          failures++; $display("FAIL src %0d seq %0d want %0d", s, out_spike.dst_row, got[s]);
        end
        if (s < LEAVES) got[s]++;
        total++;
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
      end
    end
  end

  initial begin
    for (int p = 0; p < LEAVES; p++) begin sent[p] = 0; got[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: random back-pressure
    repeat (3000) begin @(negedge clk); out_ready = 1'($urandom_range(0, 1)); end
    // phase 2: always ready, measure throughput
    @(negedge clk); out_ready = 1;
    begin
      int t0, c0;
      t0 = cyc; c0 = total;
      repeat (1000) @(posedge clk);
      checks++;
      if (total - c0 < 480) begin failures++; $display("FAIL throughput %0d in 1000 cycles", total - c0); end
      else $display("throughput %0d spikes in 1000 cycles", total - c0);
    end
    wait (total == LEAVES * PER_SRC);
    repeat (20) @(posedge clk);
    for (int p = 0; p < LEAVES; p++) begin
      checks++;
      if (got[p] != PER_SRC || sent[p] != PER_SRC) begin failures++; $display("FAIL src %0d got %0d", p, got[p]); end
    end
    checks++;
    // seven node registers from leaf to root, counted from the cycle in
    // which reset is released (cyc = 0) and the sources raise valid (cyc = 1)
    if (first_out != 9) begin failures++; $display("FAIL first spike after %0d cycles, want 9", first_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
