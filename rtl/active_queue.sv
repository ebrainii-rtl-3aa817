// active_queue: FIFO of input spikes whose biological delay has elapsed.
//
// Each entry is the destination row of one spike; the control FSM pops
// entries and runs one row update per entry. The depth of 36 is the
// paper's worst-case number of input spikes per ms (Poisson arrivals with
// mean 10 per ms and an accepted drop rate of about one spike per month).
// The queue is built from flip-flops, as the paper reports. A push to a
// full queue drops the spike and counts it in `drops`.
//
// Interface: push/push_row write at the clock edge; pop removes the head,
// which is always visible on head_row while !empty. Push and pop in the
// same cycle are both honoured (also when full).
module active_queue #(
  parameter int unsigned DEPTH = 36,
  parameter int unsigned ROW_W = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [ROW_W-1:0] push_row,
  input  logic             pop,
  output logic [ROW_W-1:0] head_row,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [31:0]      drops
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [ROW_W-1:0] q [DEPTH];
  logic [PW-1:0] rd, wr;
  logic do_push, do_pop;

  assign empty    = (count == 0);
  assign full     = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop   = pop && !empty;
  assign do_push  = push && (!full || do_pop);
  assign head_row = q[rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
      drops <= '0;
      for (int k = 0; k < DEPTH; k++) q[k] <= '0;
    end else begin
      if (do_push) begin
        q[wr] <= push_row;
        wr    <= (wr == PW'(DEPTH - 1)) ? '0 : wr + PW'(1);
      end
      if (do_pop) rd <= (rd == PW'(DEPTH - 1)) ? '0 : rd + PW'(1);
      if (push && !do_push) drops <= drops + 32'd1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
