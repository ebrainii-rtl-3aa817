// tb_ms_timer: checks the tick period (exactly CYC_PER_MS cycles) and the
// millisecond count, at the real 200,000-cycle period.
module tb_ms_timer;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic tick;
  logic [31:0] t_ms;
  int checks = 0, failures = 0;
  int cyc = 0, last = 1, nticks = 0;

  ms_timer dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (tick) begin
      nticks++;
      checks++;
      if (cyc - last != 200000) begin failures++; $display("FAIL period %0d", cyc - last); end
      checks++;
      if (t_ms != 32'(nticks)) begin failures++; $display("FAIL t_ms %0d", t_ms); end
      last = cyc;
      if (nticks == 3) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
  end
endmodule
