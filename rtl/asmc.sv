// asmc: application-specific memory controller of an H-Cube vault, with
// the row-merge address mapping.
//
// Stored naively (one matrix row per DRAM row), a row update is one DRAM
// row but a column update touches 10,000 DRAM rows. Row-merge cuts the
// 10,000 x 100 cell matrix of an HCU into groups of X = 10 rows and each row
// into X blocks of 10 cells, and stores block b of the 10 rows of group g
// together in one DRAM row (block interleaving):
//     DRAM row m(i, j) = (i / 10) * 10 + j / 10
//     position       p = (i % 10) * 10 + j % 10          (100 cells per row)
// A matrix row then costs 10 DRAM rows, a column 1,000, which is the
// minimum of 10000*(X + 100/X)*2 over the divisors X of 100 (paper, Fig. 10
// and its equation). Consecutive DRAM rows of an HCU are interleaved over
// four banks: HCUs 0 and 1 use banks 0-3, HCUs 2 and 3 banks 4-7 (one bank
// per DRAM layer, eight layers):
//     bank = (h / 2) * 4 + m % 4,     bank row = (h % 2) * 2500 + m / 4
// The i-vector of HCU h (100 DRAM rows of 100 entries) lies in the other
// bank group, as the paper's figure of the vault layout shows it, two banks
// per HCU:
//     bank = ((h / 2) ^ 1) * 4 + (h % 2) * 2 + r % 2,   bank row = 5000 + r / 2
// The mapping formulas follow the paper; the i-vector row numbers and
// the command sequencing are this design's.
//
// Each job (see ebrain_pkg::req_kind_e) is a list of segments, one per
// DRAM row: ACT, wait T_RCD, one RD or WR per cell (one 192-bit cell per
// logic cycle, which the paper equates to two bursts of 4 x 48 bits at the
// 400 MHz DRAM clock), then (after T_WR for writes) PRE and T_RP. The page
// is closed after every segment. Read data returns in order with
// d_rvalid; the buffer address of each outstanding read waits in a FIFO.
// Writes read the partition's buffer one cycle ahead of the WR command.
//
// Interface: m_valid/m_hcu/m_req with a one-cycle m_ready accept pulse and
// an m_done pulse when the last word has been written to DRAM or to the
// buffer; bw_* writes a read word into a partition buffer; br_* reads a
// buffer word (br_data one cycle later); d_* is the vault channel.
module asmc
  import ebrain_pkg::*;
#(
  parameter int unsigned T_RCD = 3,   // cycles of the 200 MHz logic clock
  parameter int unsigned T_RP  = 3,
  parameter int unsigned T_WR  = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              m_valid,
  input  logic [1:0]        m_hcu,
  input  mem_req_t          m_req,
  output logic              m_ready,
  output logic              m_done,
  // partition buffers
  output logic              bw_valid,
  output logic [1:0]        bw_hcu,
  output logic              bw_sel,
  output logic [BUF_AW-1:0] bw_addr,
  output logic [CELL_W-1:0] bw_data,
  output logic              br_en,
  output logic [1:0]        br_hcu,
  output logic              br_sel,
  output logic [BUF_AW-1:0] br_addr,
  input  logic [CELL_W-1:0] br_data,
  // vault channel
  output dram_cmd_e         d_cmd,
  output logic [2:0]        d_bank,
  output logic [12:0]       d_row,
  output logic [6:0]        d_col,
  output logic [CELL_W-1:0] d_wdata,
  input  logic [CELL_W-1:0] d_rdata,
  input  logic              d_rvalid,
  // statistics
  output logic [31:0]       n_act,
  output logic [31:0]       n_data
);
  typedef enum logic [2:0] { S_IDLE, S_ACT, S_TRCD, S_BURST, S_TWR, S_PRE, S_TRP, S_DRAIN } st_e;

  st_e         st;
  mem_req_t    r;
  logic [1:0]  h;
  logic [3:0]  seg, nseg;
  logic [6:0]  el, nel;
  logic [3:0]  cnt;
  // decoded request
  logic [9:0]  grp;      // i / 10 (row) or 10 f (column fragment)
  logic [3:0]  rin;      // i % 10
  logic [3:0]  blk;      // j / 10
  logic [3:0]  cin;      // j % 10
  logic [6:0]  irow;     // i / 100 or f
  logic [6:0]  ipos;     // i % 100

  // read-address FIFO
  localparam int unsigned FD = 8;
  logic [BUF_AW-1:0] fifo [FD];
  logic [2:0] f_wr, f_rd;
  logic [3:0] f_cnt;

  // segment -> DRAM row / bank, element -> column and buffer address
  logic [13:0] m_row;     // logical DRAM row of the HCU (cell region)
  logic [6:0]  ir;        // i-vector DRAM row (0..99)
  logic        iseg;      // segment is in the i-vector region
  logic [2:0]  bank;
  logic [12:0] brow;
  logic [6:0]  col;
  logic [BUF_AW-1:0] baddr;

  always_comb begin
    iseg  = (r.kind == REQ_IENTRY) || (r.kind == REQ_IFRAG);
    m_row = '0; col = '0; baddr = '0; ir = irow;
    unique case (r.kind)
      REQ_ROW: begin
        m_row = 14'(grp) * 14'd10 + 14'(seg);
        col   = 7'(rin) * 7'd10 + el;
        baddr = BUF_AW'(seg) * BUF_AW'(10) + BUF_AW'(el);
      end
      REQ_COLFRG: begin
        m_row = (14'(grp) + 14'(seg)) * 14'd10 + 14'(blk);
        col   = el * 7'd10 + 7'(cin);
        baddr = BUF_AW'(seg) * BUF_AW'(10) + BUF_AW'(el);
      end
      REQ_IENTRY: begin
        col   = ipos;
        baddr = BUF_AW'(N_MCU);
      end
      REQ_IFRAG: begin
        col   = el;
        baddr = BUF_AW'(N_MCU) + BUF_AW'(el);
      end
    endcase
    if (iseg) begin
      bank = {~h[1], h[0], ir[0]};
      brow = 13'd5000 + 13'(ir[6:1]);
    end else begin
      bank = {h[1], m_row[1:0]};
      brow = (h[0] ? 13'd2500 : 13'd0) + 13'(m_row[13:2]);
    end
  end

  always_comb begin
    d_cmd = DCMD_NOP; d_bank = bank; d_row = brow; d_col = col; d_wdata = br_data;
    br_en = 1'b0; br_addr = baddr; br_hcu = h; br_sel = r.buf_sel;
    unique case (st)
      S_ACT:   d_cmd = DCMD_ACT;
      S_TRCD:  if (cnt == 4'd1 && r.we) br_en = 1'b1;                   // element 0
      S_BURST: begin
        d_cmd = r.we ? DCMD_WR : DCMD_RD;
        if (r.we && el + 7'd1 < nel) begin br_en = 1'b1; br_addr = baddr + BUF_AW'(1); end
      end
      S_PRE:   d_cmd = DCMD_PRE;
      default: ;
    endcase
  end

  assign bw_valid = d_rvalid;
  assign bw_hcu   = h;
  assign bw_sel   = r.buf_sel;
  assign bw_addr  = fifo[f_rd];
  assign bw_data  = d_rdata;
  assign m_ready  = (st == S_IDLE) && m_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r <= '0; h <= '0; seg <= '0; nseg <= '0; el <= '0; nel <= '0; cnt <= '0;
      grp <= '0; rin <= '0; blk <= '0; cin <= '0; irow <= '0; ipos <= '0;
      f_wr <= '0; f_rd <= '0; f_cnt <= '0; m_done <= 1'b0;
      n_act <= '0; n_data <= '0;
      for (int k = 0; k < FD; k++) fifo[k] <= '0;
    end else begin
      m_done <= 1'b0;
      // read-return FIFO
      if (st == S_BURST && !r.we) begin fifo[f_wr] <= baddr; f_wr <= f_wr + 3'd1; end
      if (d_rvalid) f_rd <= f_rd + 3'd1;
      f_cnt <= f_cnt + 4'(st == S_BURST && !r.we) - 4'(d_rvalid);

      unique case (st)
        S_IDLE: if (m_valid) begin
          r   <= m_req;
          h   <= m_hcu;
          seg <= '0;
          el  <= '0;
          grp  <= (m_req.kind == REQ_COLFRG) ? 10'(m_req.index * 14'd10) : 10'(m_req.index / 14'd10);
          rin  <= 4'(m_req.index % 14'd10);
          blk  <= 4'(m_req.col / 7'd10);
          cin  <= 4'(m_req.col % 7'd10);
          irow <= (m_req.kind == REQ_IFRAG) ? 7'(m_req.index) : 7'(m_req.index / 14'd100);
          ipos <= 7'(m_req.index % 14'd100);
          unique case (m_req.kind)
            REQ_ROW, REQ_COLFRG: begin nseg <= 4'd10; nel <= 7'd10; end
            REQ_IENTRY:          begin nseg <= 4'd1;  nel <= 7'd1;  end
            REQ_IFRAG:           begin nseg <= 4'd1;  nel <= 7'd100; end
          endcase
          st <= S_ACT;
        end
        S_ACT: begin
          n_act <= n_act + 32'd1;
          el  <= '0;
          cnt <= 4'(T_RCD - 1);
          st  <= S_TRCD;
        end
        S_TRCD: begin
          cnt <= cnt - 4'd1;
          if (cnt == 4'd1) st <= S_BURST;
        end
        S_BURST: begin
          n_data <= n_data + 32'd1;
          if (el + 7'd1 == nel) begin
            st  <= r.we ? S_TWR : S_PRE;
            cnt <= 4'(T_WR);
          end
          el <= el + 7'd1;
        end
        S_TWR: begin
          cnt <= cnt - 4'd1;
          if (cnt == 4'd1) st <= S_PRE;
        end
        S_PRE: begin
          cnt <= 4'(T_RP - 1);
          st  <= S_TRP;
        end
        S_TRP: begin
          cnt <= cnt - 4'd1;
          if (cnt <= 4'd1) begin
            if (seg + 4'd1 == nseg) st <= S_DRAIN;
            else begin seg <= seg + 4'd1; st <= S_ACT; end
          end
        end
        S_DRAIN: if (f_cnt == 0 && !d_rvalid) begin
          m_done <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) f_cnt <= 4'(FD));
endmodule
