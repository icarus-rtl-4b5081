// rmcm_ssa: approximated select & shift-add (SSA) unit of an RMCM block.
//
// Multiplies the activation x, given as the PCM's subexpressions 1x/3x/5x/7x,
// by a 9-bit signed-magnitude weight {s, h[3:0], l[3:0]}. Each 4-bit half picks
// one odd subexpression with a 4:1 mux and shifts it: odd digits 1,3,5,7 are
// exact, 9, 11, 13 and 15 are replaced by their nearest neighbours 1x<<3, 5x<<1,
// 3x<<2 and 7x<<1 as in the paper's approximated RMCM; digit 0 is gated to 0 by
// an AND. The high half is shifted a further 4 bits and both are added. The sign
// is applied by XOR with s plus a carry-in of s (two's complement negation).
// Example from the paper: -78 = 1_0100_1110 selects 1x (<<2) and 7x (<<1), giving
// -(64x + 14x). The product register is loaded with 0 when the PCM reports x=0.
// Latency: one cycle.
module rmcm_ssa
  import icarus_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic signed [ACT_W+2:0] x1, x3, x5, x7,
  input  logic                    zero,
  input  wgt_t                    w,
  output logic signed [PROD_W-1:0] p
);
  // one 4-bit digit: select, shift, gate
  function automatic logic signed [PROD_W-1:0] digit(input logic [3:0] d,
      input logic signed [ACT_W+2:0] a1, a3, a5, a7);
    logic signed [ACT_W+2:0] sel;
    logic [1:0] sh;
    unique case (d)
      4'd1:  begin sel = a1; sh = 2'd0; end
      4'd2:  begin sel = a1; sh = 2'd1; end
      4'd3:  begin sel = a3; sh = 2'd0; end
      4'd4:  begin sel = a1; sh = 2'd2; end
      4'd5:  begin sel = a5; sh = 2'd0; end
      4'd6:  begin sel = a3; sh = 2'd1; end
      4'd7:  begin sel = a7; sh = 2'd0; end
      4'd8:  begin sel = a1; sh = 2'd3; end
      4'd9:  begin sel = a1; sh = 2'd3; end   // 9x  ~ 1x << 3
      4'd10: begin sel = a5; sh = 2'd1; end
      4'd11: begin sel = a5; sh = 2'd1; end   // 11x ~ 5x << 1
      4'd12: begin sel = a3; sh = 2'd2; end
      4'd13: begin sel = a3; sh = 2'd2; end   // 13x ~ 3x << 2
      4'd14: begin sel = a7; sh = 2'd1; end
      4'd15: begin sel = a7; sh = 2'd1; end   // 15x ~ 7x << 1
      default: begin sel = '0; sh = 2'd0; end // digit 0: AND gate
    endcase
    return PROD_W'(sel) <<< sh;
  endfunction

  logic signed [PROD_W-1:0] hi, lo, mag, prod;
  always_comb begin
    hi   = digit(w[7:4], x1, x3, x5, x7);
    lo   = digit(w[3:0], x1, x3, x5, x7);
    mag  = (hi <<< 4) + lo;
    prod = (mag ^ {PROD_W{w[8]}}) + PROD_W'(w[8]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     p <= '0;
    else if (valid) p <= zero ? '0 : prod;
  end
endmodule
