// hcu_partition: everything one HCU (hypercolumn unit) owns on the logic die.
//
// This is the block of the paper's detailed HCU-partition schematic: input
// spikes enter the delay queue, move to the active queue when their delay
// has elapsed, and the control FSM turns each into a row update; the
// periodic update may make one MCU fire, which the fan-out unit turns into
// 100 output spikes while the control FSM runs the column update of that
// MCU. Synaptic data comes from the H-Cube's DRAM vault through the
// round-robin scheduler into one of the two ping-pong SRAMs (200 words of
// 192 bits: 100 cells plus up to 100 i-vector entries); the j-vector (100
// entries) stays in the periodic-update SRAM. The update FSM moves data
// between these SRAMs and the two FPU sets.
//
// The Mux/DeMux in front of the ping-pong SRAMs gives each SRAM port to the
// DRAM side or to the update FSM. The control FSM guarantees they never use
// the same buffer at once; an assertion checks it.
//
// Interface:
//  * in_valid/in_spike: spikes addressed to this HCU (always accepted;
//    only delay and destination row are used here).
//  * out_valid/out_spike/out_ready: the 100 fan-out spikes per firing.
//  * req_*: one DRAM job at a time (see control_fsm).
//  * bw_*: the DRAM side writes a word into buffer bw_sel.
//  * br_*: the DRAM side reads a word from buffer br_sel; br_data is valid
//    one cycle after br_en.
//  * cc/icc/jc: model constants (cells, i-vector, j-vector), static.
module hcu_partition
  import ebrain_pkg::*;
#(
  parameter int unsigned FAN       = 100,
  parameter int unsigned TOTAL_HCU = 2000000,
  parameter int unsigned NFRAG     = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ms_tick,
  input  ms_t         t_ms,
  input  logic [20:0] own_hcu,
  input  cell_const_t cc,
  input  cell_const_t icc,
  input  jvec_const_t jc,
  // spikes
  input  logic        in_valid,
  input  spike_t      in_spike,
  output logic        out_valid,
  output spike_t      out_spike,
  input  logic        out_ready,
  // DRAM job port
  output logic        req_valid,
  output mem_req_t    req,
  input  logic        req_ready,
  input  logic        req_done,
  input  logic              bw_valid,
  input  logic              bw_sel,
  input  logic [BUF_AW-1:0] bw_addr,
  input  logic [CELL_W-1:0] bw_data,
  input  logic              br_en,
  input  logic              br_sel,
  input  logic [BUF_AW-1:0] br_addr,
  output logic [CELL_W-1:0] br_data,
  // status
  output logic        busy,
  output logic [31:0] overruns,
  output logic [31:0] last_ms_cycles,
  output logic [31:0] dq_drops,
  output logic [31:0] aq_drops,
  output logic [31:0] n_row_jobs,
  output logic [31:0] n_col_frags,
  output logic [31:0] n_fires
);
  // queues
  logic        dq_valid, dq_ready;
  logic [13:0] dq_row;
  logic [7:0]  dq_occ;
  logic        aq_pop, aq_empty, aq_full;
  logic [13:0] aq_row;
  logic [5:0]  aq_count;

  delay_queue i_dq (
    .clk, .rst_n, .ms_tick,
    .in_valid(in_valid), .in_delay(in_spike.delay), .in_row(in_spike.dst_row),
    .out_valid(dq_valid), .out_row(dq_row), .out_ready(dq_ready),
    .occupancy(dq_occ), .drops(dq_drops)
  );
  assign dq_ready = 1'b1;   // the active queue drops what it cannot hold

  active_queue i_aq (
    .clk, .rst_n, .push(dq_valid), .push_row(dq_row), .pop(aq_pop),
    .head_row(aq_row), .empty(aq_empty), .full(aq_full), .count(aq_count), .drops(aq_drops)
  );

  // control and update
  logic        uf_start, uf_buf, uf_done, uf_busy, uf_fired, fo_fire, fo_busy;
  job_e        uf_job;
  logic [6:0]  uf_col, uf_fire_mcu, fo_mcu;
  logic [31:0] fo_dropped;

  control_fsm #(.NFRAG(NFRAG)) i_ctl (
    .clk, .rst_n, .ms_tick,
    .aq_empty, .aq_row, .aq_pop,
    .uf_start, .uf_job, .uf_buf, .uf_col, .uf_done, .uf_fired, .uf_fire_mcu,
    .fo_fire, .fo_mcu,
    .req_valid, .req, .req_ready, .req_done,
    .busy, .overruns, .last_ms_cycles, .n_row_jobs, .n_col_frags
  );

  logic              u_bre, u_bwe, u_pre, u_pwe;
  logic [BUF_AW-1:0] u_braddr, u_bwaddr;
  logic [CELL_W-1:0] u_brdata, u_bwdata;
  logic [6:0]        u_praddr, u_pwaddr;
  jentry_t           u_prdata, u_pwdata;

  update_fsm #(.NCELL(N_MCU)) i_upd (
    .clk, .rst_n, .start(uf_start), .job(uf_job), .col(uf_col), .t_now(t_ms),
    .cc, .icc, .jc, .busy(uf_busy), .done(uf_done), .fired(uf_fired), .fire_mcu(uf_fire_mcu),
    .b_re(u_bre), .b_raddr(u_braddr), .b_rdata(u_brdata),
    .b_we(u_bwe), .b_waddr(u_bwaddr), .b_wdata(u_bwdata),
    .p_re(u_pre), .p_raddr(u_praddr), .p_rdata(u_prdata),
    .p_we(u_pwe), .p_waddr(u_pwaddr), .p_wdata(u_pwdata)
  );

  // ping-pong SRAMs with their Mux/DeMux
  logic              s_re [2], s_we [2];
  logic [BUF_AW-1:0] s_raddr [2], s_waddr [2];
  logic [CELL_W-1:0] s_rdata [2], s_wdata [2];
  logic              br_sel_q, uf_buf_q;

  for (genvar b = 0; b < 2; b++) begin : g_pp
    always_comb begin
      if (br_en && br_sel == 1'(b)) begin
        s_re[b] = 1'b1; s_raddr[b] = br_addr;
      end else begin
        s_re[b] = u_bre && uf_buf == 1'(b); s_raddr[b] = u_braddr;
      end
      if (bw_valid && bw_sel == 1'(b)) begin
        s_we[b] = 1'b1; s_waddr[b] = bw_addr; s_wdata[b] = bw_data;
      end else begin
        s_we[b] = u_bwe && uf_buf == 1'(b); s_waddr[b] = u_bwaddr; s_wdata[b] = u_bwdata;
      end
    end
    sram_1r1w #(.DEPTH(BUF_DEPTH), .WIDTH(CELL_W)) i_buf (
      .clk, .re(s_re[b]), .raddr(s_raddr[b]), .rdata(s_rdata[b]),
      .we(s_we[b]), .waddr(s_waddr[b]), .wdata(s_wdata[b])
    );
  end

  always_ff @(posedge clk) begin
    br_sel_q <= br_sel;
    uf_buf_q <= uf_buf;
  end
  assign br_data  = s_rdata[br_sel_q];
  assign u_brdata = s_rdata[uf_buf_q];

  // periodic-update SRAM
  sram_1r1w #(.DEPTH(N_MCU), .WIDTH($bits(jentry_t))) i_pvec (
    .clk, .re(u_pre), .raddr(u_praddr), .rdata(u_prdata),
    .we(u_pwe), .waddr(u_pwaddr), .wdata(u_pwdata)
  );

  fanout_unit #(.FAN(FAN), .TOTAL_HCU(TOTAL_HCU)) i_fo (
    .clk, .rst_n, .own_hcu, .fire(fo_fire), .fire_mcu(fo_mcu), .busy(fo_busy),
    .out_valid, .out_spike, .out_ready, .dropped_fires(fo_dropped)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_fires <= '0;
    else if (fo_fire) n_fires <= n_fires + 32'd1;
  end

  // the DRAM side and the update FSM never share a buffer
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(bw_valid && u_bwe && bw_sel == uf_buf));
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(br_en && u_bre && br_sel == uf_buf));
endmodule
