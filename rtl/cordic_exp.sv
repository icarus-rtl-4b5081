// cordic_exp: exp(-a) for a >= 0 by range reduction and hyperbolic CORDIC.
//
// The volume renderer needs exp(x_i) with x_i = -sigma_i * delta_i <= 0; the
// paper computes it with a CORDIC module. Hyperbolic CORDIC converges only for
// |z| < 1.118, so the argument is split as a = k*ln2 + r with k = floor(a/ln2)
// and 0 <= r < ln2; exp(-r) = cosh(-r) + sinh(-r) comes from 16 rotation-mode
// micro-rotations (shift sequence 1..14 with 4 and 13 repeated, vector starting
// at (1/K_h, 0) = (1.20750, 0)), and exp(-a) = exp(-r) >> k. Arguments of 16 or
// more give 0. The range reduction and all formats are this design's choice.
// Input a: unsigned, A_FRAC = 20 fraction bits. Output: unsigned Q1.15, 1.0 =
// 32768. A TAG_W-bit tag travels along. Latency: 18 cycles, one result per cycle.
module cordic_exp
  import icarus_pkg::*;
#(
  parameter int unsigned TAG_W = 1,
  parameter int unsigned A_W   = 32,
  parameter int unsigned A_FRAC = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [A_W-1:0]   a,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [UQ_W-1:0]  e,
  output logic [TAG_W-1:0] out_tag
);
  localparam int unsigned IT = 16;
  localparam int unsigned XW = 20;   // Q3.16
  localparam int          SH [IT] = '{1, 2, 3, 4, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 13, 14};
  localparam logic signed [XW-1:0] ATANH [IT] = '{
    20'sd35999, 20'sd16739, 20'sd8235, 20'sd4101, 20'sd4101, 20'sd2049, 20'sd1024, 20'sd512,
    20'sd256, 20'sd128, 20'sd64, 20'sd32, 20'sd16, 20'sd8, 20'sd8, 20'sd4};
  localparam logic [16:0] INV_LN2 = 17'd94548;   // 2^16 / ln 2
  localparam logic [15:0] LN2     = 16'd45426;   // 2^16 * ln 2

  typedef struct packed {
    logic v; logic zero; logic [4:0] k; logic [TAG_W-1:0] tag;
    logic signed [XW-1:0] x; logic signed [XW-1:0] y; logic signed [XW-1:0] z;
  } st_t;
  st_t s [IT+1];

  // stage 0: range reduction
  logic        big;
  logic [19:0] a16;       // Q4.16
  logic [36:0] kp;
  logic [4:0]  k;
  logic signed [21:0]   rw;      // a16 - k ln2, wide enough for a16 < 2^20
  logic signed [XW-1:0] r;
  always_comb begin
    big = (a >> (A_FRAC + 4)) != '0;                  // a >= 16
    a16 = 20'(a >> (A_FRAC - 16));
    kp  = 37'(a16) * 37'(INV_LN2);
    k   = 5'(kp >> 32);
    rw  = $signed({2'b0, a16}) - $signed(22'(k) * 22'(LN2));
    r   = XW'(rw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s[0] <= '0;
    else begin
      s[0].v    <= in_valid;
      s[0].tag  <= in_tag;
      s[0].zero <= big;
      s[0].k    <= k;
      s[0].x    <= XW'(79135);
      s[0].y    <= '0;
      s[0].z    <= -r;
    end
  end

  for (genvar i = 0; i < IT; i++) begin : g_it
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) s[i+1] <= '0;
      else begin
        s[i+1].v    <= s[i].v;
        s[i+1].tag  <= s[i].tag;
        s[i+1].zero <= s[i].zero;
        s[i+1].k    <= s[i].k;
        if (!s[i].z[XW-1]) begin
          s[i+1].x <= s[i].x + (s[i].y >>> SH[i]);
          s[i+1].y <= s[i].y + (s[i].x >>> SH[i]);
          s[i+1].z <= s[i].z - ATANH[i];
        end else begin
          s[i+1].x <= s[i].x - (s[i].y >>> SH[i]);
          s[i+1].y <= s[i].y - (s[i].x >>> SH[i]);
          s[i+1].z <= s[i].z + ATANH[i];
        end
      end
    end
  end

  // output: (cosh + sinh) in Q.16 -> Q1.15, scaled by 2^-k
  logic signed [XW-1:0] sum;
  logic [XW-1:0] q;
  assign sum = s[IT].x + s[IT].y;
  assign q   = (XW'(sum) >> 1) >> s[IT].k;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; e <= '0; out_tag <= '0;
    end else begin
      out_valid <= s[IT].v;
      out_tag   <= s[IT].tag;
      if (s[IT].zero || sum < 0) e <= '0;
      else if (q > XW'(32768))  e <= 16'd32768;
      else                       e <= UQ_W'(q);
    end
  end
endmodule
