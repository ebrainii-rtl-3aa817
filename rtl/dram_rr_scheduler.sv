// dram_rr_scheduler: shares the vault channel of an H-Cube among its HCU
// partitions.
//
// The P = 4 HCUs of an H-Cube share one DRAM vault and one memory
// controller. Each partition raises one DRAM job at a time; the scheduler
// grants jobs in round-robin order, starting after the partition served
// last, and holds the grant until the controller reports the job done.
// It also steers the controller's data streams: words read from DRAM go to
// the granted partition's buffer, and buffer reads for DRAM writes are
// sent to, and answered by, that partition. The paper names the block and
// its round-robin policy; the job-level granularity is this design's.
//
// Interface: per partition req_valid/req/req_ready/req_done (see
// control_fsm); m_* towards the controller with m_hcu naming the partition;
// bw_*/br_* as in hcu_partition, indexed by partition. br_data is routed
// from the partition named by the previous cycle's br_hcu.
module dram_rr_scheduler
  import ebrain_pkg::*;
#(
  parameter int unsigned P = 4,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // partitions
  input  logic              req_valid [P],
  input  mem_req_t          req       [P],
  output logic              req_ready [P],
  output logic              req_done  [P],
  output logic              p_bw_valid [P],
  output logic              p_bw_sel,
  output logic [BUF_AW-1:0] p_bw_addr,
  output logic [CELL_W-1:0] p_bw_data,
  output logic              p_br_en [P],
  output logic              p_br_sel,
  output logic [BUF_AW-1:0] p_br_addr,
  input  logic [CELL_W-1:0] p_br_data [P],
  // memory controller
  output logic              m_valid,
  output logic [PW-1:0]     m_hcu,
  output mem_req_t          m_req,
  input  logic              m_ready,
  input  logic              m_done,
  input  logic              bw_valid,
  input  logic [PW-1:0]     bw_hcu,
  input  logic              bw_sel,
  input  logic [BUF_AW-1:0] bw_addr,
  input  logic [CELL_W-1:0] bw_data,
  input  logic              br_en,
  input  logic [PW-1:0]     br_hcu,
  input  logic              br_sel,
  input  logic [BUF_AW-1:0] br_addr,
  output logic [CELL_W-1:0] br_data
);
  logic          active, sent;
  logic [PW-1:0] grant, last;
  logic [PW-1:0] br_hcu_q;
  logic          pick_found;
  logic [PW-1:0] pick;

  // round robin: first requester after `last`
  always_comb begin
    pick_found = 1'b0;
    pick       = '0;
    for (int k = P; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last) + k) % P;
      if (req_valid[c]) begin pick_found = 1'b1; pick = PW'(c); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; sent <= 1'b0; grant <= '0; last <= PW'(P - 1); br_hcu_q <= '0;
    end else begin
      br_hcu_q <= br_hcu;
      if (!active) begin
        if (pick_found) begin active <= 1'b1; sent <= 1'b0; grant <= pick; end
      end else begin
        if (m_ready) sent <= 1'b1;
        if (m_done) begin active <= 1'b0; last <= grant; end
      end
    end
  end

  assign m_valid = active && !sent;
  assign m_hcu   = grant;
  assign m_req   = req[grant];

  always_comb begin
    for (int p = 0; p < P; p++) begin
      req_ready[p]  = active && (grant == PW'(p)) && m_ready;
      req_done[p]   = active && (grant == PW'(p)) && m_done;
      p_bw_valid[p] = bw_valid && (bw_hcu == PW'(p));
      p_br_en[p]    = br_en && (br_hcu == PW'(p));
    end
  end
  assign p_bw_sel  = bw_sel;
  assign p_bw_addr = bw_addr;
  assign p_bw_data = bw_data;
  assign p_br_sel  = br_sel;
  assign p_br_addr = br_addr;
  assign br_data   = p_br_data[br_hcu_q];

  // one job at a time on the channel
  assert property (@(posedge clk) disable iff (!rst_n) m_done |-> active);
endmodule
