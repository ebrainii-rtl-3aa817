// spike_out_tree: collects the output spikes of all HCUs of a BCU.
//
// The reverse of spike_in_tree: a binary tree of one-entry registers from
// the LEAVES HCU output ports to a single BCU output. An empty node takes a
// spike from one of its two children, alternating between them when both
// have one (round robin), so no HCU can starve another. A node only takes a
// spike when it is empty, which keeps every ready signal local to one level
// at the cost of one free cycle between spikes at a node; the whole tree
// still carries one spike every two cycles, far more than the 100 spikes
// per ms per HCU it has to carry. The paper gives the tree shape and its
// pipelining; the arbitration rule is this design's.
//
// Interface: in_valid/in_spike/in_ready per HCU, out_valid/out_spike/
// out_ready at the root. Latency from a leaf to the root is at least
// log2(LEAVES) cycles.
module spike_out_tree
  import ebrain_pkg::*;
#(
  parameter int unsigned LEAVES = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid  [LEAVES],
  input  spike_t in_spike  [LEAVES],
  output logic   in_ready  [LEAVES],
  output logic   out_valid,
  output spike_t out_spike,
  input  logic   out_ready
);
  localparam int unsigned NI = LEAVES - 1;     // internal (registered) nodes
  localparam int unsigned NN = 2 * LEAVES - 1;

  logic   cv [NN];     // child view: node or leaf has a spike
  spike_t cd [NN];
  logic   tk [NN];     // taken by the parent this cycle
  logic   v  [NI];
  spike_t d  [NI];
  logic   pri [NI];

  for (genvar k = 0; k < NN; k++) begin : g_view
    if (k < NI) begin : g_int
      assign cv[k] = v[k];
      assign cd[k] = d[k];
    end else begin : g_leaf
      assign cv[k] = in_valid[k - NI];
      assign cd[k] = in_spike[k - NI];
      assign in_ready[k - NI] = tk[k];
    end
  end
  assign tk[0] = 1'b0;

  for (genvar k = 0; k < NI; k++) begin : g_node
    localparam int unsigned CL = 2 * k + 1;
    localparam int unsigned CR = 2 * k + 2;
    logic take_l, take_r, drain;
    assign drain  = (k == 0) ? (v[0] && out_ready) : tk[k];
    assign take_l = !v[k] && cv[CL] && (!cv[CR] || !pri[k]);
    assign take_r = !v[k] && cv[CR] && (!cv[CL] ||  pri[k]);
    assign tk[CL] = take_l;
    assign tk[CR] = take_r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin v[k] <= 1'b0; d[k] <= '0; pri[k] <= 1'b0; end
      else begin
        if (take_l)      begin v[k] <= 1'b1; d[k] <= cd[CL]; pri[k] <= 1'b1; end
        else if (take_r) begin v[k] <= 1'b1; d[k] <= cd[CR]; pri[k] <= 1'b0; end
        else if (drain)  v[k] <= 1'b0;
      end
    end
  end

  assign out_valid = v[0];
  assign out_spike = d[0];
endmodule
