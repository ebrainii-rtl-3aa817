// ms_timer: the millisecond time base of an H-Cube.
//
// BCPNN advances in 1 ms simulation steps. This counter divides the 200 MHz
// logic clock by CYC_PER_MS and pulses `tick` for one cycle at every
// millisecond boundary; `t_ms` counts elapsed milliseconds and is the time
// stamp written into every updated cell (lazy evaluation). The paper names
// the timer and gives the clock frequency; the counter itself is the
// obvious construction.
//
// Timing: the first tick comes CYC_PER_MS cycles after reset; t_ms
// increments in the same cycle that tick is high.
module ms_timer #(
  parameter int unsigned CYC_PER_MS = 200000
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        tick,
  output logic [31:0] t_ms
);
  localparam int unsigned CW = $clog2(CYC_PER_MS + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
      t_ms <= '0;
    end else begin
      tick <= 1'b0;
      if (cnt == CW'(CYC_PER_MS - 1)) begin
        cnt  <= '0;
        tick <= 1'b1;
        t_ms <= t_ms + 32'd1;
      end else begin
        cnt <= cnt + CW'(1);
      end
    end
  end
endmodule
