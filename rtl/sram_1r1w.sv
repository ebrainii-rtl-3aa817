// sram_1r1w: scratchpad SRAM with one synchronous read port and one write
// port.
//
// The HCU partition uses three of these: the two ping-pong buffers that
// hold a row or column fragment fetched from DRAM, and the periodic-update
// buffer that holds the j-vector. The paper states that the scratchpad
// buffers have single read and write ports; here they are written as a
// plain array that a memory compiler or synthesis maps to a macro.
//
// Interface: read data appears one cycle after re/raddr. A write takes
// effect at the clock edge; a read of the address being written in the same
// cycle returns the old contents. Contents are not reset.
module sram_1r1w #(
  parameter int unsigned DEPTH = 200,
  parameter int unsigned WIDTH = 192,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
