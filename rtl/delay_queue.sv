// delay_queue: holds input spikes while their biological axonal delay
// elapses.
//
// Spikes travel between HCUs in nanoseconds, but BCPNN models a delay of
// some milliseconds (10-bit delay field, 4 ms on average). An arriving
// spike is written into a free slot together with its delay and
// destination row. At every ms tick each waiting entry counts its delay
// down by one; an entry whose delay has run out becomes ready, and ready
// entries are handed to the active queue one per cycle, lowest slot first.
// A spike with delay 0 or 1 becomes ready at the first tick after it
// arrives, so it is processed in the next millisecond. The depth of 144 is
// four times the active queue (the paper's sizing rule: the average delay
// is 4 ms). A spike that finds no free slot is dropped and counted.
// Slots are flip-flops, as in the paper.
//
// Interface: in_valid/in_delay/in_row (always accepted); out_valid/out_row
// with out_ready from the active queue.
module delay_queue #(
  parameter int unsigned DEPTH = 144,
  parameter int unsigned ROW_W = 14,
  parameter int unsigned DLY_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ms_tick,
  input  logic             in_valid,
  input  logic [DLY_W-1:0] in_delay,
  input  logic [ROW_W-1:0] in_row,
  output logic             out_valid,
  output logic [ROW_W-1:0] out_row,
  input  logic             out_ready,
  output logic [$clog2(DEPTH+1)-1:0] occupancy,
  output logic [31:0]      drops
);
  localparam int unsigned IW = $clog2(DEPTH);

  typedef struct packed {
    logic             valid;
    logic             ready;
    logic [DLY_W-1:0] delay;
    logic [ROW_W-1:0] row;
  } slot_t;

  slot_t slots [DEPTH];
  logic          free_found, rdy_found;
  logic [IW-1:0] free_idx, rdy_idx;

  // lowest free slot and lowest ready slot
  always_comb begin
    free_found = 1'b0; free_idx = '0;
    rdy_found  = 1'b0; rdy_idx  = '0;
    for (int k = DEPTH - 1; k >= 0; k--) begin
      if (!slots[k].valid) begin free_found = 1'b1; free_idx = IW'(k); end
      if (slots[k].valid && slots[k].ready) begin rdy_found = 1'b1; rdy_idx = IW'(k); end
    end
  end

  assign out_valid = rdy_found;
  assign out_row   = slots[rdy_idx].row;

  always_comb begin
    occupancy = '0;
    for (int k = 0; k < DEPTH; k++) occupancy += ($clog2(DEPTH+1))'(slots[k].valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) slots[k] <= '0;
      drops <= '0;
    end else begin
      if (ms_tick) begin
        for (int k = 0; k < DEPTH; k++) begin
          if (slots[k].valid && !slots[k].ready) begin
            if (slots[k].delay <= DLY_W'(1)) slots[k].ready <= 1'b1;
            else                             slots[k].delay <= slots[k].delay - DLY_W'(1);
          end
        end
      end
      if (out_valid && out_ready) slots[rdy_idx].valid <= 1'b0;
      if (in_valid) begin
        if (free_found) slots[free_idx] <= '{valid: 1'b1, ready: 1'b0, delay: in_delay, row: in_row};
        else            drops <= drops + 32'd1;
      end
    end
  end
endmodule
