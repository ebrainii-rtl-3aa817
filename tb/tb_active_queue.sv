// tb_active_queue: random push/pop against a queue model; fills the queue
// past 36 entries to check that the overflow is dropped and counted.
module tb_active_queue;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  logic push = 0, pop = 0;
  logic [13:0] push_row = 0, head_row;
  logic empty, full;
  logic [5:0] count;
  logic [31:0] drops;
  int checks = 0, failures = 0;
  int unsigned model[$];
  int exp_drops = 0;

  active_queue dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(input logic pu, input logic po);
    @(negedge clk);
    push = pu; pop = po; push_row = 14'($urandom_range(0, 9999));
    checks++;
    if (empty != (model.size() == 0) || int'(count) != model.size()) begin
      failures++; $display("FAIL count %0d vs %0d", count, model.size());
    end
    if (po && model.size() > 0) begin
      checks++;
      if (int'(head_row) != model[0]) begin failures++; $display("FAIL head %0d vs %0d", head_row, model[0]); end
    end
    @(posedge clk);
    #0.1;
    begin
      bit popped;
      popped = po && model.size() > 0;
      if (popped) void'(model.pop_front());
      if (pu) begin
        if (model.size() < 36 || popped) model.push_back(int'(push_row));
        else exp_drops++;
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) cycle(1, 0);          // overflow by 14
    checks++; if (!full) begin failures++; $display("FAIL not full"); end
    for (int n = 0; n < 3000; n++) cycle(1'($urandom_range(0, 1)), 1'($urandom_range(0, 1)));
    for (int n = 0; n < 40; n++) cycle(0, 1);
    @(negedge clk);
    checks++;
    if (int'(drops) != exp_drops || exp_drops < 14) begin failures++; $display("FAIL drops %0d vs %0d", drops, exp_drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
