// spike_in_tree: distributes input spikes to the HCUs of a BCU.
//
// A pipelined binary tree with a register at every node, as the paper
// describes for the BCU level: each node looks at one bit of the
// destination HCU number (most significant first) and passes the spike to
// its left or right child in the next cycle. Spikes arrive at a rate of a
// few per microsecond at most, so the tree needs no flow control: every node
// moves its spike on every cycle, and the tree doubles as a distributed
// queue over the long wires of the die. The destination HCU within the BCU
// is the low log2(LEAVES) bits of the spike's destination HCU (BCUs are
// assumed to hold aligned blocks of HCU numbers).
//
// Nodes are numbered as a heap: node k has children 2k+1 and 2k+2; the
// LEAVES last nodes are the output registers. Latency: log2(LEAVES) + 1
// cycles, one spike per cycle.
module spike_in_tree
  import ebrain_pkg::*;
#(
  parameter int unsigned LEAVES = 128,
  localparam int unsigned L = $clog2(LEAVES)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  spike_t in_spike,
  output logic   out_valid [LEAVES],
  output spike_t out_spike [LEAVES]
);
  localparam int unsigned NN = 2 * LEAVES - 1;
  logic   v [NN];
  spike_t d [NN];

  for (genvar k = 0; k < NN; k++) begin : g_node
    if (k == 0) begin : g_root
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin v[0] <= 1'b0; d[0] <= '0; end
        else begin v[0] <= in_valid; d[0] <= in_spike; end
      end
    end else begin : g_inner
      localparam int unsigned PAR   = (k - 1) / 2;
      localparam int unsigned PDEP  = $clog2(PAR + 2) - 1;   // depth of the parent
      localparam logic        RIGHT = (k % 2 == 0);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin v[k] <= 1'b0; d[k] <= '0; end
        else begin
          v[k] <= v[PAR] && (d[PAR].dst_hcu[L-1-PDEP] == RIGHT);
          d[k] <= d[PAR];
        end
      end
    end
  end

  for (genvar p = 0; p < LEAVES; p++) begin : g_out
    assign out_valid[p] = v[LEAVES - 1 + p];
    assign out_spike[p] = d[LEAVES - 1 + p];
  end
endmodule
