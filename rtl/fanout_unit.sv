// fanout_unit: expands one output spike of an HCU into FANOUT spikes.
//
// When an MCU of this HCU wins and fires, its spike must reach 100 other
// HCUs (the paper's fan-out). The unit latches the firing MCU and emits
// one 80-bit spike per cycle, k = 0..FANOUT-1, on a valid/ready port. The
// paper gives the fan-out count and the spike format but not the
// connectivity, so the destinations follow a fixed rule chosen here:
//   dst_hcu = (own_hcu + k + 1) mod TOTAL_HCU
//   dst_row = (own_hcu * N_MCU + mcu) mod N_ROWS
//   delay   = 1 + (k mod 7)                 (mean 4 ms, the paper's average)
// With this rule every HCU receives from exactly N_ROWS source MCUs, each
// on its own row. PRJ is 0 (structural plasticity is out of scope).
//
// Interface: fire/fire_mcu is accepted when !busy (an HCU fires at most
// once per ms, and emission takes FANOUT cycles); spikes leave on
// out_valid/out_spike/out_ready.
module fanout_unit
  import ebrain_pkg::*;
#(
  parameter int unsigned FAN       = 100,
  parameter int unsigned TOTAL_HCU = 2000000,
  parameter int unsigned NROWS     = 10000,
  parameter int unsigned NMCU      = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [20:0] own_hcu,
  input  logic        fire,
  input  logic [6:0]  fire_mcu,
  output logic        busy,
  output logic        out_valid,
  output spike_t      out_spike,
  input  logic        out_ready,
  output logic [31:0] dropped_fires
);
  logic [6:0]  mcu;
  logic [7:0]  k;
  logic [20:0] dst;
  logic [2:0]  dly;
  logic [13:0] row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; mcu <= '0; k <= '0; dst <= '0; dly <= '0; row <= '0;
      dropped_fires <= '0;
    end else begin
      if (fire && !busy) begin
        busy <= 1'b1;
        mcu  <= fire_mcu;
        k    <= '0;
        dly  <= '0;
        dst  <= (32'(own_hcu) + 1 >= TOTAL_HCU) ? 21'(32'(own_hcu) + 1 - TOTAL_HCU) : own_hcu + 21'd1;
        row  <= 14'((64'(own_hcu) * NMCU + 64'(fire_mcu)) % NROWS);
      end else if (fire && busy) begin
        dropped_fires <= dropped_fires + 32'd1;
      end
      if (busy && out_ready) begin
        if (k == 8'(FAN - 1)) busy <= 1'b0;
        k   <= k + 8'd1;
        dly <= (dly == 3'd6) ? 3'd0 : dly + 3'd1;
        dst <= (32'(dst) + 1 >= TOTAL_HCU) ? '0 : dst + 21'd1;
      end
    end
  end

  assign out_valid = busy;
  always_comb begin
    out_spike         = '0;
    out_spike.src_mcu = {1'b0, mcu};
    out_spike.src_hcu = own_hcu;
    out_spike.delay   = 10'(dly) + 10'd1;
    out_spike.dst_row = row;
    out_spike.dst_hcu = dst;
  end
endmodule
