// bcu: one Brain Computation Unit, the top of the design.
//
// A BCU is a 3D stack: a logic die under eight DRAM layers, cut into
// M = 32 vertical H-Cubes, each a DRAM vault with the logic that serves it
// (4 HCUs per H-Cube, so 128 HCUs per BCU). Spikes for the BCU arrive on
// one port and are distributed to the HCUs by a pipelined binary tree;
// spikes produced by the HCUs are collected by a reversed tree into one
// output port. The BCU's HCUs have the global numbers
// bcu_base .. bcu_base + 127; bcu_base must be a multiple of 128 because
// the input tree routes on the low seven bits of the destination HCU.
// The network between BCUs, the DRAM dies and their TSV channels, clocks,
// pads and power management are outside this module: each vault channel
// is a port array indexed by H-Cube.
//
// Interface: in_valid/in_spike (no back-pressure, one spike per cycle at
// most); out_valid/out_spike/out_ready; d_*[m] vault channel of H-Cube m;
// cc/icc/jc the model constants shared by all HCUs; per-HCU status arrays
// indexed by HCU number within the BCU (4 m + p).
// Timing: input latency log2(128) + 1 = 8 cycles to the HCU; everything
// else runs in the 1 ms rhythm of the H-Cube timers (CYC_PER_MS cycles).
module bcu
  import ebrain_pkg::*;
#(
  parameter int unsigned M          = 32,        // H-Cubes per BCU
  parameter int unsigned P          = 4,         // HCUs per H-Cube
  parameter int unsigned CYC_PER_MS = 200000,    // 200 MHz / 1 kHz
  parameter int unsigned FAN        = 100,       // destinations per fired MCU
  parameter int unsigned TOTAL_HCU  = 2000000,   // HCUs of the whole system
  parameter int unsigned NFRAG      = 100,       // fragments per column update
  localparam int unsigned NH = M * P
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [20:0] bcu_base,
  input  cell_const_t cc,
  input  cell_const_t icc,
  input  jvec_const_t jc,
  // spikes
  input  logic        in_valid,
  input  spike_t      in_spike,
  output logic        out_valid,
  output spike_t      out_spike,
  input  logic        out_ready,
  // vault channels
  output dram_cmd_e   d_cmd    [M],
  output logic [2:0]  d_bank   [M],
  output logic [12:0] d_row    [M],
  output logic [6:0]  d_col    [M],
  output logic [CELL_W-1:0] d_wdata [M],
  input  logic [CELL_W-1:0] d_rdata [M],
  input  logic        d_rvalid [M],
  // status
  output ms_t         t_ms,
  output logic [31:0] overruns       [NH],
  output logic [31:0] last_ms_cycles [NH],
  output logic [31:0] drops          [NH],
  output logic [31:0] n_row_jobs     [NH],
  output logic [31:0] n_col_frags    [NH],
  output logic [31:0] n_fires        [NH],
  output logic [31:0] n_act          [M],
  output logic [31:0] n_data         [M]
);
  logic   li_valid [NH], lo_valid [NH], lo_ready [NH];
  spike_t li_spike [NH], lo_spike [NH];
  ms_t    tm [M];

  spike_in_tree #(.LEAVES(NH)) i_in (
    .clk, .rst_n, .in_valid, .in_spike, .out_valid(li_valid), .out_spike(li_spike)
  );

  spike_out_tree #(.LEAVES(NH)) i_out (
    .clk, .rst_n, .in_valid(lo_valid), .in_spike(lo_spike), .in_ready(lo_ready),
    .out_valid, .out_spike, .out_ready
  );

  for (genvar m = 0; m < M; m++) begin : g_cube
    logic   c_in_valid [P], c_out_valid [P], c_out_ready [P];
    spike_t c_in_spike [P], c_out_spike [P];
    logic [31:0] c_ovr [P], c_lmc [P], c_drp [P], c_row [P], c_col [P], c_fir [P];

    for (genvar p = 0; p < P; p++) begin : g_map
      assign c_in_valid[p]      = li_valid[m*P + p];
      assign c_in_spike[p]      = li_spike[m*P + p];
      assign lo_valid[m*P + p]  = c_out_valid[p];
      assign lo_spike[m*P + p]  = c_out_spike[p];
      assign c_out_ready[p]     = lo_ready[m*P + p];
      assign overruns[m*P + p]       = c_ovr[p];
      assign last_ms_cycles[m*P + p] = c_lmc[p];
      assign drops[m*P + p]          = c_drp[p];
      assign n_row_jobs[m*P + p]     = c_row[p];
      assign n_col_frags[m*P + p]    = c_col[p];
      assign n_fires[m*P + p]        = c_fir[p];
    end

    hcube #(.P(P), .CYC_PER_MS(CYC_PER_MS), .FAN(FAN), .TOTAL_HCU(TOTAL_HCU), .NFRAG(NFRAG)) i_cube (
      .clk, .rst_n, .base_hcu(bcu_base + 21'(m * P)), .cc, .icc, .jc,
      .in_valid(c_in_valid), .in_spike(c_in_spike),
      .out_valid(c_out_valid), .out_spike(c_out_spike), .out_ready(c_out_ready),
      .d_cmd(d_cmd[m]), .d_bank(d_bank[m]), .d_row(d_row[m]), .d_col(d_col[m]),
      .d_wdata(d_wdata[m]), .d_rdata(d_rdata[m]), .d_rvalid(d_rvalid[m]),
      .t_ms(tm[m]), .overruns(c_ovr), .last_ms_cycles(c_lmc), .drops(c_drp),
      .n_row_jobs(c_row), .n_col_frags(c_col), .n_fires(c_fir),
      .n_act(n_act[m]), .n_data(n_data[m])
    );
  end

  // all H-Cube timers leave reset together and stay aligned
  assign t_ms = tm[0];
endmodule
