// tb_fanout_unit: fires MCUs of an HCU near the end of the HCU range and
// checks all 100 emitted spikes (destination, row, delay, source fields)
// against the connectivity rule, under random back-pressure, and the
// 100-cycle emission time without back-pressure.
module tb_fanout_unit;
  import ebrain_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic [20:0] own_hcu;
  logic fire = 0, busy, out_valid, out_ready = 1;
  logic [6:0] fire_mcu;
  spike_t out_spike;
  logic [31:0] dropped_fires;
  int checks = 0, failures = 0;
  int got;
  int exp_k;
  int own, mcu;
  bit stall;

  fanout_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int ed;
    ed = (own + exp_k + 1) % 2000000;
    checks++;
    if (int'(out_spike.dst_hcu) != ed || int'(out_spike.dst_row) != (own * 100 + mcu) % 10000 ||
        int'(out_spike.delay) != 1 + exp_k % 7 || int'(out_spike.src_mcu) != mcu ||
        int'(out_spike.src_hcu) != own) begin
      failures++;
      $display("FAIL k=%0d dst %0d/%0d row %0d delay %0d", exp_k, out_spike.dst_hcu, ed, out_spike.dst_row, out_spike.delay);
    end
    exp_k++;
  end

  always @(negedge clk) out_ready = stall ? 1'($urandom_range(0, 1)) : 1'b1;

  initial begin
    int t0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      own = (n < 3) ? 1999950 + n * 20 : $urandom_range(0, 1999999);
      mcu = $urandom_range(0, 99);
      stall = (n % 2 == 1);
      own_hcu = 21'(own); fire_mcu = 7'(mcu); exp_k = 0;
      @(negedge clk); fire = 1;
      @(negedge clk); fire = 0; t0 = $time;
      while (busy) @(negedge clk);
      checks++;
      if (exp_k != 100) begin failures++; $display("FAIL count %0d", exp_k); end
      if (!stall) begin
        checks++;
        if (($time - t0) / 5 != 100) begin failures++; $display("FAIL time %0d cycles", ($time - t0) / 5); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
