// sram_1r1w: on-chip SRAM with one write port and one read port.
//
// Stands for the SRAM macros of the plenoptic core (frequency, input, weight,
// activation and partial-sum memories and the data buffer). The array is written
// in plain SystemVerilog so that synthesis can map it to a macro. A write happens
// on the clock edge when we=1. A read with re=1 returns mem[raddr] on rdata one
// cycle later; rdata holds its value while re=0, which also models the sleep mode
// the paper uses for an unused frequency bank. Reading and writing the same
// address in one cycle returns the old word. Contents are not reset.
module sram_1r1w #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
