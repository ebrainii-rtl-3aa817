// hcube: the logic of one H-Cube, the vertical slice of a BCU that owns one
// DRAM vault.
//
// Four HCU partitions (P = 4) share the vault above them through the
// round-robin scheduler and the application-specific memory controller
// (asmc), and share the H-Cube's millisecond timer. Spikes enter and leave
// point to point: one input and one output port per HCU, as the paper
// describes for the H-Cube level. HCU p of the H-Cube has the global
// number base_hcu + p.
//
// Interface: in_valid[p]/in_spike[p] deliver spikes to HCU p;
// out_valid[p]/out_spike[p]/out_ready[p] carry its fan-out spikes; d_* is
// the vault channel (TSV micro-channel side); cc/icc/jc are the model
// constants; the status vectors are per HCU.
module hcube
  import ebrain_pkg::*;
#(
  parameter int unsigned P          = 4,
  parameter int unsigned CYC_PER_MS = 200000,
  parameter int unsigned FAN        = 100,
  parameter int unsigned TOTAL_HCU  = 2000000,
  parameter int unsigned NFRAG      = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [20:0] base_hcu,
  input  cell_const_t cc,
  input  cell_const_t icc,
  input  jvec_const_t jc,
  input  logic        in_valid  [P],
  input  spike_t      in_spike  [P],
  output logic        out_valid [P],
  output spike_t      out_spike [P],
  input  logic        out_ready [P],
  // vault channel
  output dram_cmd_e   d_cmd,
  output logic [2:0]  d_bank,
  output logic [12:0] d_row,
  output logic [6:0]  d_col,
  output logic [CELL_W-1:0] d_wdata,
  input  logic [CELL_W-1:0] d_rdata,
  input  logic        d_rvalid,
  // status
  output ms_t         t_ms,
  output logic [31:0] overruns       [P],
  output logic [31:0] last_ms_cycles [P],
  output logic [31:0] drops          [P],
  output logic [31:0] n_row_jobs     [P],
  output logic [31:0] n_col_frags    [P],
  output logic [31:0] n_fires        [P],
  output logic [31:0] n_act,
  output logic [31:0] n_data
);
  logic ms_tick;
  ms_timer #(.CYC_PER_MS(CYC_PER_MS)) i_timer (.clk, .rst_n, .tick(ms_tick), .t_ms);

  logic              req_valid [P], req_ready [P], req_done [P];
  mem_req_t          req [P];
  logic              p_bw_valid [P], p_br_en [P];
  logic              p_bw_sel, p_br_sel;
  logic [BUF_AW-1:0] p_bw_addr, p_br_addr;
  logic [CELL_W-1:0] p_bw_data;
  logic [CELL_W-1:0] p_br_data [P];
  logic [31:0]       dq_drops [P], aq_drops [P];
  logic              hbusy [P];

  for (genvar p = 0; p < P; p++) begin : g_hcu
    hcu_partition #(.FAN(FAN), .TOTAL_HCU(TOTAL_HCU), .NFRAG(NFRAG)) i_hcu (
      .clk, .rst_n, .ms_tick, .t_ms, .own_hcu(base_hcu + 21'(p)),
      .cc, .icc, .jc,
      .in_valid(in_valid[p]), .in_spike(in_spike[p]),
      .out_valid(out_valid[p]), .out_spike(out_spike[p]), .out_ready(out_ready[p]),
      .req_valid(req_valid[p]), .req(req[p]), .req_ready(req_ready[p]), .req_done(req_done[p]),
      .bw_valid(p_bw_valid[p]), .bw_sel(p_bw_sel), .bw_addr(p_bw_addr), .bw_data(p_bw_data),
      .br_en(p_br_en[p]), .br_sel(p_br_sel), .br_addr(p_br_addr), .br_data(p_br_data[p]),
      .busy(hbusy[p]), .overruns(overruns[p]), .last_ms_cycles(last_ms_cycles[p]),
      .dq_drops(dq_drops[p]), .aq_drops(aq_drops[p]),
      .n_row_jobs(n_row_jobs[p]), .n_col_frags(n_col_frags[p]), .n_fires(n_fires[p])
    );
    assign drops[p] = dq_drops[p] + aq_drops[p];
  end

  logic              m_valid, m_ready, m_done;
  logic [1:0]        m_hcu;
  mem_req_t          m_req;
  logic              bw_valid, bw_sel, br_en, br_sel;
  logic [1:0]        bw_hcu, br_hcu;
  logic [BUF_AW-1:0] bw_addr, br_addr;
  logic [CELL_W-1:0] bw_data, br_data;

  dram_rr_scheduler #(.P(P)) i_sched (
    .clk, .rst_n,
    .req_valid, .req, .req_ready, .req_done,
    .p_bw_valid, .p_bw_sel, .p_bw_addr, .p_bw_data,
    .p_br_en, .p_br_sel, .p_br_addr, .p_br_data,
    .m_valid, .m_hcu, .m_req, .m_ready, .m_done,
    .bw_valid, .bw_hcu, .bw_sel, .bw_addr, .bw_data,
    .br_en, .br_hcu, .br_sel, .br_addr, .br_data
  );

  asmc i_asmc (
    .clk, .rst_n,
    .m_valid, .m_hcu, .m_req, .m_ready, .m_done,
    .bw_valid, .bw_hcu, .bw_sel, .bw_addr, .bw_data,
    .br_en, .br_hcu, .br_sel, .br_addr, .br_data,
    .d_cmd, .d_bank, .d_row, .d_col, .d_wdata, .d_rdata, .d_rvalid,
    .n_act, .n_data
  );
endmodule
