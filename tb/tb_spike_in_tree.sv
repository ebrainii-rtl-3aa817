// tb_spike_in_tree: random spikes, one per cycle at most, must appear at
// the output of HCU (dst_hcu mod 128) exactly 8 cycles later and nowhere
// else.
module tb_spike_in_tree;
  import ebrain_pkg::*;
  localparam int LEAVES = 128, LAT = 8;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic   in_valid = 0;
  spike_t in_spike = '0;
  logic   out_valid [LEAVES];
  spike_t out_spike [LEAVES];
  int checks = 0, failures = 0;
  logic   hv [LAT+1];
  spike_t hs [LAT+1];

  spike_in_tree #(.LEAVES(LEAVES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k <= LAT; k++) begin hv[k] = 0; hs[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // history: hv[k] is what was driven k cycles before this edge
      for (int k = LAT; k > 0; k--) begin hv[k] = hv[k-1]; hs[k] = hs[k-1]; end
      if (n >= LAT) begin
        for (int p = 0; p < LEAVES; p++) begin
          logic want;
          want = hv[LAT] && (int'(hs[LAT].dst_hcu) % LEAVES == p);
          checks++;
          if (out_valid[p] != want || (want && out_spike[p] != hs[LAT])) begin
            failures++;
            if (failures < 10) $display("FAIL cycle %0d leaf %0d valid %0b want %0b", n, p, out_valid[p], want);
          end
        end
      end
      in_valid = 1'($urandom_range(0, 3) != 0);
      in_spike = {$urandom, $urandom, 16'($urandom)};
      hv[0] = in_valid; hs[0] = in_spike;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
