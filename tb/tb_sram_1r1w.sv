// tb_sram_1r1w: writes random words, reads them back with the one-cycle
// latency, checks read-during-write returns the old word.
module tb_sram_1r1w;
  localparam int D = 200, W = 192;
  logic clk = 0;
  always #2.5 clk = ~clk;
  logic re = 0, we = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [W-1:0] rdata, wdata = '0;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_1r1w #(.DEPTH(D), .WIDTH(W)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rndw();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = rndw(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      int a;
      a = $urandom_range(0, D - 1);
      @(negedge clk); re = 1; raddr = 8'(a);
      // overwrite the same address in the same cycle: old data must come out
      we = (n % 3 == 0); waddr = 8'(a); wdata = rndw();
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      if (n % 3 == 0) model[a] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
