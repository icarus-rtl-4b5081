// sync_fifo: synchronous first-in first-out buffer with valid/ready handshakes.
//
// Used at the input of the plenoptic core (model, frequencies, samples streamed
// in) and at its output (pixel colours and network outputs streamed out), as in
// the core's block diagram. A word is written when in_valid && in_ready and read
// when out_valid && out_ready; out_data shows the oldest word combinationally.
// Both can happen in the same cycle. 'level' counts stored words. Depth and the
// handshake are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (level < (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // a word is never written into a full FIFO nor read from an empty one
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> level < (AW+1)'(DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> level != '0);
endmodule
