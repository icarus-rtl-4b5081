// rmcm_block: reconfigurable multiple constant multiplication (RMCM) block.
//
// One column of the 64x64 sub-MVM: it multiplies one input activation x_c by the
// 64 weights w_{r,c} of that column (r = 0..63) at once. A single PCM computes
// the shared subexpressions of x_c; 64 SSAs, one per output row, select and add
// them according to their weight. The weights sit in a local weight buffer that
// is written as one 64 x 9-bit word (wload) and then stays stationary while a
// batch of activations streams through. Changing the weights only reconfigures
// the SSA muxes, which is what makes the constant multiplication reconfigurable.
// Timing: x/valid -> PCM register -> SSA register: products p[r] two cycles
// after x; p_valid marks them.
module rmcm_block
  import icarus_pkg::*;
#(
  parameter int unsigned ROWS = LANES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wload,
  input  wgt_t [ROWS-1:0]          wdata,
  input  logic                     valid,
  input  act_t                     x,
  output logic                     p_valid,
  output logic signed [PROD_W-1:0] p [ROWS]
);
  wgt_t [ROWS-1:0] wbuf;
  logic signed [ACT_W+2:0] x1, x3, x5, x7;
  logic zero, v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= '0; v1 <= 1'b0; p_valid <= 1'b0;
    end else begin
      if (wload) wbuf <= wdata;
      v1      <= valid;
      p_valid <= v1;
    end
  end

  rmcm_pcm u_pcm (.clk, .rst_n, .valid, .x, .x1, .x3, .x5, .x7, .zero);

  for (genvar r = 0; r < ROWS; r++) begin : g_ssa
    rmcm_ssa u_ssa (.clk, .rst_n, .valid(v1), .x1, .x3, .x5, .x7, .zero,
                    .w(wbuf[r]), .p(p[r]));
  end
endmodule
