// tb_delay_queue: sends spikes with random delays and checks that each one
// leaves the queue in the millisecond its delay gives (never earlier or
// later), then overfills the queue to check drops.
module tb_delay_queue;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic ms_tick = 0, in_valid = 0, out_valid, out_ready = 1;
  logic [9:0] in_delay = 0;
  logic [13:0] in_row = 0, out_row;
  logic [7:0] occupancy;
  logic [31:0] drops;
  int checks = 0, failures = 0;
  int due [int];     // row -> ms in which it must come out
  int now_ms = 0;
  int outs = 0;

  delay_queue dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++; outs++;
    if (!due.exists(int'(out_row))) begin failures++; $display("FAIL unknown row %0d", out_row); end
    else begin
      if (due[int'(out_row)] != now_ms) begin
        failures++; $display("FAIL row %0d out in ms %0d, due %0d", out_row, now_ms, due[int'(out_row)]);
      end
      due.delete(int'(out_row));
    end
  end

  task automatic tick();
    @(negedge clk); ms_tick = 1;
    @(negedge clk); ms_tick = 0;
    now_ms++;
  endtask

  initial begin
    int row = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ms = 0; ms < 30; ms++) begin
      for (int s = 0; s < 10; s++) begin
        int d;
        d = $urandom_range(0, 7);
        @(negedge clk); in_valid = 1; in_delay = 10'(d); in_row = 14'(row);
        due[row] = now_ms + ((d < 1) ? 1 : d);
        row++;
        @(negedge clk); in_valid = 0;
      end
      // stall the consumer now and then
      out_ready = 1'($urandom_range(0, 3) != 0);
      repeat (200) @(negedge clk);
      out_ready = 1;
      repeat (200) @(negedge clk);
      tick();
    end
    for (int ms = 0; ms < 10; ms++) begin repeat (200) @(negedge clk); tick(); end
    repeat (200) @(negedge clk);
    checks++; if (due.size() != 0 || outs != 300) begin failures++; $display("FAIL %0d left", due.size()); end
    // overfill: 150 spikes with long delay into 144 slots
    for (int s = 0; s < 150; s++) begin
      @(negedge clk); in_valid = 1; in_delay = 10'd500; in_row = 14'(9000 + s);
    end
    @(negedge clk); in_valid = 0;
    checks++; if (drops != 6 || occupancy != 144) begin failures++; $display("FAIL drops %0d occ %0d", drops, occupancy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
