// adder_tree: balanced binary adder tree with a registered output.
//
// Sums N signed inputs (N a power of two) in log2(N) levels of two-input adders
// and registers the total: sum = in[0] + ... + in[N-1], one cycle after the
// inputs, with out_valid following in_valid. In the MONB one tree per output
// row sums the 64 products of that row (the paper's ACC. blocks); the SONB has
// one tree. Output width grows by log2(N) bits, so the sum never overflows.
module adder_tree #(
  parameter int unsigned N    = 64,
  parameter int unsigned IN_W = 21,
  localparam int unsigned LVL = $clog2(N),
  localparam int unsigned OW  = IN_W + LVL
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IN_W-1:0] in [N],
  output logic                 out_valid,
  output logic signed [OW-1:0] sum
);
  logic signed [OW-1:0] node [LVL+1][N];
  always_comb begin
    for (int l = 0; l <= LVL; l++)
      for (int i = 0; i < N; i++) node[l][i] = '0;
    for (int i = 0; i < N; i++) node[0][i] = OW'(in[i]);
    for (int l = 0; l < LVL; l++)
      for (int i = 0; i < (N >> (l + 1)); i++)
        node[l+1][i] = node[l][2*i] + node[l][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; sum <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= node[LVL][0];
    end
  end
endmodule
