// sonb: single output network block, the output-layer engine of the MLP.
//
// Computes one output neuron of the layer per pass: 64 general multipliers
// multiply a 64-lane input chunk by the 64 weights held in the weight buffer,
// one adder tree sums them, and the partial sum of each sample of the batch is
// accumulated over the input chunks in the psum memory, as in the MONB (the
// paper keeps the same activation read order for both blocks). On the last chunk
// the sum gets its bias and is re-quantized (no ReLU: density and raw colour
// are passed on signed) to a 16-bit output with 8 fraction bits.
// Interface: wload writes the weight buffer; valid/x/b/first/last as in monb.
// Timing: input -> multipliers (1) -> tree (1) -> accumulate and quantize (1):
// y_valid three cycles after valid.
module sonb
  import icarus_pkg::*;
#(
  parameter int unsigned N   = LANES,
  parameter int unsigned NB  = BATCH,
  localparam int unsigned BW = $clog2(NB),
  localparam int unsigned TW = PROD_W + $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wload,
  input  wgt_t [N-1:0]             wdata,
  input  logic                     valid,
  input  act_t [N-1:0]             x,
  input  logic [BW-1:0]            b,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [BIAS_W-1:0] bias,
  output logic                     y_valid,
  output logic [BW-1:0]            y_b,
  output logic signed [OUT_W-1:0]  y,
  output logic                     busy
);
  wgt_t [N-1:0] wbuf;
  logic signed [PROD_W-1:0] prod [N];
  logic pv;

  typedef struct packed { logic v; logic [BW-1:0] b; logic first; logic last; } tag_t;
  tag_t t1, t2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf <= '0; pv <= 1'b0; t1 <= '0; t2 <= '0;
      for (int i = 0; i < N; i++) prod[i] <= '0;
    end else begin
      if (wload) wbuf <= wdata;
      pv <= valid;
      t1 <= '{v: valid, b: b, first: first, last: last};
      t2 <= t1;
      if (valid)
        for (int i = 0; i < N; i++) begin
          // general multiplier: signed activation x signed-magnitude weight
          automatic logic signed [PROD_W-1:0] m =
            PROD_W'(x[i]) * $signed({1'b0, wbuf[i][7:0]});
          prod[i] <= wbuf[i][8] ? -m : m;
        end
    end
  end

  logic signed [TW-1:0] tsum;
  logic tv;
  adder_tree #(.N(N), .IN_W(PROD_W)) u_tree (
    .clk, .rst_n, .in_valid(pv), .in(prod), .out_valid(tv), .sum(tsum));

  logic [PSUM_W-1:0] ps_rd;
  logic signed [PSUM_W-1:0] acc;
  logic signed [OUT_W-1:0] yq;
  sram_1r1w #(.DEPTH(NB), .WIDTH(PSUM_W)) u_psum (
    .clk, .we(t2.v && !t2.last), .waddr(t2.b), .wdata(acc),
    .re(t1.v && !t1.first), .raddr(t1.b), .rdata(ps_rd));

  always_comb begin
    acc = PSUM_W'(tsum);
    if (!t2.first) acc = acc + $signed(ps_rd);
  end

  act_quant #(.ACC_W(PSUM_W), .OUT_BITS(OUT_W)) u_q (.acc, .bias, .relu(1'b0), .y(yq));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0; y_b <= '0; y <= '0;
    end else begin
      y_valid <= t2.v && t2.last;
      if (t2.v && t2.last) begin
        y_b <= t2.b;
        y   <= yq;
      end
    end
  end

  assign busy = pv || t1.v || t2.v || y_valid;
endmodule
