// tb_fpu_op: checks every operation of the behavioural FPU model against
// hand-worked single-precision bit patterns.
module tb_fpu_op;
  import ebrain_pkg::*;
  logic [2:0] op;
  fp_t a, b, y;
  int checks = 0, failures = 0;

  fpu_op dut (.op(op), .a(a), .b(b), .y(y));

  task automatic chk(input logic [2:0] o, input fp_t x1, input fp_t x2, input fp_t exp_y, input fp_t tol);
    logic [31:0] d;
    op = o; a = x1; b = x2;
    #1;
    d = (y > exp_y) ? y - exp_y : exp_y - y;
    checks++;
    if (d > tol) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h expected %h", o, x1, x2, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(3'd0, 32'h40000000, 32'h40400000, 32'h40c00000, 0);  // 2*3 = 6
    chk(3'd0, 32'hbf800000, 32'h3f000000, 32'hbf000000, 0);  // -1*0.5
    chk(3'd1, 32'h3fc00000, 32'h40100000, 32'h40700000, 0);  // 1.5+2.25 = 3.75
    chk(3'd2, 32'h3f800000, 32'h40000000, 32'hbf800000, 0);  // 1-2 = -1
    chk(3'd3, 32'h00000000, 32'h0,        32'h3f800000, 0);  // exp(0) = 1
    chk(3'd3, 32'h3f800000, 32'h0,        32'h402df854, 1);  // exp(1) = e
    chk(3'd4, 32'h402df854, 32'h0,        32'h3f800000, 1);  // ln(e) = 1
    chk(3'd4, 32'h3f800000, 32'h0,        32'h00000000, 0);  // ln(1) = 0
    chk(3'd5, 32'h3f800000, 32'h40800000, 32'h3e800000, 0);  // 1/4
    chk(3'd5, 32'h40e00000, 32'h40000000, 32'h40600000, 0);  // 7/2 = 3.5
    chk(3'd6, 32'h40000000, 32'h3f800000, 32'h00000001, 0);  // 2 > 1
    chk(3'd6, 32'hc0000000, 32'hbf800000, 32'h00000000, 0);  // -2 > -1 false
    chk(3'd6, 32'h3f800000, 32'hbf800000, 32'h00000001, 0);  // 1 > -1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
