// monb: multi-output network block, the hidden-layer engine of the MLP.
//
// Computes a 64x64 sub-MVM per input vector: 64 RMCM blocks (one per input lane c)
// multiply x_c by the 64 stationary weights of column c, and 64 adder trees (one
// per output row r) add the 64 products of their row. A layer wider than 64 is
// split into 64x64 tiles; the tile's partial sums for every sample of the batch
// are kept in the psum memory and accumulated over the input chunks (first =
// first chunk, which overwrites; last = final chunk). On the last chunk the sums
// pass through act_quant (bias, optional ReLU, re-quantization to 12 bits) and
// leave on y with the sample index. This is the paper's organisation; the tag
// protocol and the pipeline registers are this design's choice.
//
// Interface: wload/wcol/wdata write the weight buffer of RMCM block wcol (one
// column of the tile). valid/x/b/first/last present one 64-lane input chunk of
// sample b. Weights must not be reloaded while busy=1.
// Timing: input -> PCM (1) -> SSA (1) -> adder tree (1) -> accumulate and
// quantize (1): y_valid four cycles after valid. Throughput one chunk per cycle.
module monb
  import icarus_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned NB    = BATCH,
  localparam int unsigned BW   = $clog2(NB),
  localparam int unsigned CW   = $clog2(N),
  localparam int unsigned TW   = PROD_W + CW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wload,
  input  logic [CW-1:0]            wcol,
  input  wgt_t [N-1:0]             wdata,
  input  logic                     valid,
  input  act_t [N-1:0]             x,
  input  logic [BW-1:0]            b,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [BIAS_W-1:0] bias [N],
  input  logic                     relu,
  output logic                     y_valid,
  output logic [BW-1:0]            y_b,
  output act_t [N-1:0]             y,
  output logic                     busy
);
  // products: prod[c][r] = x_c * w_{r,c}
  logic signed [PROD_W-1:0] prod [N][N];
  logic signed [PROD_W-1:0] row_in [N][N];
  logic [N-1:0] pv;

  for (genvar c = 0; c < N; c++) begin : g_rmcm
    rmcm_block #(.ROWS(N)) u_rmcm (
      .clk, .rst_n, .wload(wload && wcol == CW'(c)), .wdata,
      .valid, .x(x[c]), .p_valid(pv[c]), .p(prod[c]));
  end

  always_comb
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) row_in[r][c] = prod[c][r];

  logic signed [TW-1:0] tsum [N];
  logic [N-1:0] tv;
  for (genvar r = 0; r < N; r++) begin : g_tree
    adder_tree #(.N(N), .IN_W(PROD_W)) u_tree (
      .clk, .rst_n, .in_valid(pv[0]), .in(row_in[r]), .out_valid(tv[r]), .sum(tsum[r]));
  end

  // tag pipeline: stage 1 = PCM, 2 = SSA, 3 = tree
  typedef struct packed { logic v; logic [BW-1:0] b; logic first; logic last; } tag_t;
  tag_t t1, t2, t3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0;
    end else begin
      t1 <= '{v: valid, b: b, first: first, last: last};
      t2 <= t1;
      t3 <= t2;
    end
  end

  // psum memory: read during the tree stage, written after accumulation
  logic [N*PSUM_W-1:0] ps_rd, ps_wr;
  logic ps_we;
  sram_1r1w #(.DEPTH(NB), .WIDTH(N*PSUM_W)) u_psum (
    .clk, .we(ps_we), .waddr(t3.b), .wdata(ps_wr),
    .re(t2.v && !t2.first), .raddr(t2.b), .rdata(ps_rd));

  logic signed [PSUM_W-1:0] acc [N];
  act_t [N-1:0] yq;
  for (genvar r = 0; r < N; r++) begin : g_acc
    always_comb begin
      acc[r] = PSUM_W'(tsum[r]);
      if (!t3.first) acc[r] = acc[r] + $signed(ps_rd[r*PSUM_W +: PSUM_W]);
      ps_wr[r*PSUM_W +: PSUM_W] = acc[r];
    end
    act_quant #(.ACC_W(PSUM_W), .OUT_BITS(ACT_W)) u_aq (
      .acc(acc[r]), .bias(bias[r]), .relu, .y(yq[r]));
  end
  assign ps_we = t3.v && !t3.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0; y_b <= '0; y <= '0;
    end else begin
      y_valid <= t3.v && t3.last;
      if (t3.v && t3.last) begin
        y_b <= t3.b;
        y   <= yq;
      end
    end
  end

  assign busy = t1.v || t2.v || t3.v || y_valid;
endmodule
