// dram_vault_model: behavioural model of one 3D-DRAM vault (simulation
// only).
//
// Eight banks (one per DRAM layer), rows of 100 cells of 192 bits. Storage
// is sparse (an associative array), so a full-size vault costs memory only
// for the words actually written. A word never written reads as a fresh
// value: a synaptic cell with Pij = P0 in the cell region (bank rows below
// 5000) and an i-vector entry with Pi = P0 in the i-vector region.
// The model checks the command protocol: ACT only to a precharged bank, RD
// and WR only to the open row and not earlier than T_RCD after ACT, PRE
// only after T_WR since the last WR, ACT not earlier than T_RP after PRE.
// Read data returns T_CL cycles after RD. Violations are counted in
// `errors`.
module dram_vault_model
  import ebrain_pkg::*;
#(
  parameter int unsigned T_RCD = 3,
  parameter int unsigned T_RP  = 3,
  parameter int unsigned T_WR  = 3,
  parameter int unsigned T_CL  = 3,
  parameter logic [31:0] P0    = 32'h3c23d70a   // 0.01
) (
  input  logic        clk,
  input  dram_cmd_e   d_cmd,
  input  logic [2:0]  d_bank,
  input  logic [12:0] d_row,
  input  logic [6:0]  d_col,
  input  logic [191:0] d_wdata,
  output logic [191:0] d_rdata,
  output logic        d_rvalid,
  output int          errors,
  output int          n_reads,
  output int          n_writes
);
  logic [191:0] mem [longint];
  bit           open_ [8];
  logic [12:0]  orow  [8];
  longint       t_act [8], t_pre [8], t_wr [8];
  longint       now;
  logic [191:0] pipe_d [T_CL];
  bit           pipe_v [T_CL];

  initial begin
    errors = 0; n_reads = 0; n_writes = 0; now = 0;
    for (int b = 0; b < 8; b++) begin open_[b] = 0; orow[b] = '0; t_act[b] = -100; t_pre[b] = -100; t_wr[b] = -100; end
    for (int k = 0; k < int'(T_CL); k++) begin pipe_v[k] = 0; pipe_d[k] = '0; end
    d_rvalid = 0; d_rdata = '0;
  end

  function automatic logic [191:0] fresh(logic [12:0] row);
    if (row >= 13'd5000) return {32'd0, 32'd0, P0, 32'd0, 64'd0};       // i-entry
    return {32'd0, 32'd0, 32'd0, P0, 32'd0, 32'd0};                       // cell
  endfunction

  always @(posedge clk) begin
    longint key;
    logic [191:0] rd;
    now++;
    d_rvalid <= pipe_v[0];
    d_rdata  <= pipe_d[0];
    for (int k = 0; k < int'(T_CL) - 1; k++) begin pipe_v[k] = pipe_v[k+1]; pipe_d[k] = pipe_d[k+1]; end
    pipe_v[T_CL-1] = 0;
    key = {d_bank, d_row, d_col};
    case (d_cmd)
      DCMD_ACT: begin
        if (open_[d_bank] || now - t_pre[d_bank] < longint'(T_RP)) begin errors++; $display("DRAM: bad ACT bank %0d", d_bank); end
        open_[d_bank] = 1; orow[d_bank] = d_row; t_act[d_bank] = now;
      end
      DCMD_RD, DCMD_WR: begin
        if (!open_[d_bank] || orow[d_bank] != d_row || now - t_act[d_bank] < longint'(T_RCD)) begin
          errors++; $display("DRAM: bad RD/WR bank %0d row %0d", d_bank, d_row);
        end
        if (d_col >= 7'd100) begin errors++; $display("DRAM: column %0d out of row", d_col); end
        if (d_cmd == DCMD_WR) begin mem[key] = d_wdata; t_wr[d_bank] = now; n_writes++; end
        else begin
          rd = mem.exists(key) ? mem[key] : fresh(d_row);
          pipe_v[T_CL-1] = 1; pipe_d[T_CL-1] = rd; n_reads++;
        end
      end
      DCMD_PRE: begin
        if (!open_[d_bank] || now - t_wr[d_bank] <= longint'(T_WR)) begin errors++; $display("DRAM: bad PRE bank %0d", d_bank); end
        open_[d_bank] = 0; t_pre[d_bank] = now;
      end
      default: ;
    endcase
  end
endmodule
