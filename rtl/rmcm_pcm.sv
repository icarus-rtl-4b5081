// rmcm_pcm: pre-compute module (PCM) of one RMCM block.
//
// Computes the four common subexpressions 1x, 3x, 5x and 7x of an activation x
// with shifts and adds only (3x = (x<<1)+x, 5x = (x<<2)+x, 7x = (x<<3)-x); they
// are shared by the 64 select & shift-add units of the RMCM column. This is the
// approximated RMCM of the paper, which drops 9x, 11x, 13x and 15x. A comparator
// checks x for zero: the subexpression registers are then not clocked (clock
// gating in silicon, a clock enable here) and the registered 'zero' flag tells
// the SSAs to output 0. Latency: one cycle from x/valid to the outputs.
module rmcm_pcm
  import icarus_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  act_t                    x,
  output logic signed [ACT_W+2:0] x1, x3, x5, x7,
  output logic                    zero
);
  logic is_zero;
  assign is_zero = (x == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x3 <= '0; x5 <= '0; x7 <= '0; zero <= 1'b1;
    end else if (valid) begin
      zero <= is_zero;
      if (!is_zero) begin   // gating enable
        x1 <= (ACT_W+3)'(x);
        x3 <= ((ACT_W+3)'(x) <<< 1) + (ACT_W+3)'(x);
        x5 <= ((ACT_W+3)'(x) <<< 2) + (ACT_W+3)'(x);
        x7 <= ((ACT_W+3)'(x) <<< 3) - (ACT_W+3)'(x);
      end
    end
  end
endmodule
