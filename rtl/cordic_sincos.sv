// cordic_sincos: pipelined circular CORDIC giving sin and cos of a phase.
//
// The phase is a 16-bit binary angle (2^16 = one turn), so the positional
// encoder's phase wraps modulo 2*pi for free. Angles in the left half plane are
// first rotated by pi (results negated at the end), which brings the angle
// into [-pi/2, pi/2) where 16 rotation-mode micro-rotations converge. The
// vector starts at (K, 0) with K = prod 1/sqrt(1+2^-2i) = 0.60725 (9949 in
// Q2.14), so no gain correction is needed. The micro-rotation angles are
// atan(2^-i) / (2 pi) * 2^16, rounded. Outputs use the activation format
// (12 bit, 8 fraction bits). A tag of TAG_W bits travels with each phase.
// The paper's PEU uses a "CORDIC array" for sin/cos; here the array is the
// chain of 16 pipelined micro-rotation stages, one result per cycle.
// Latency: 18 cycles (fold, 16 stages, output rounding).
module cordic_sincos
  import icarus_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [PHASE_W-1:0]  phase,
  input  logic [TAG_W-1:0]    in_tag,
  output logic                out_valid,
  output act_t                cos_o,
  output act_t                sin_o,
  output logic [TAG_W-1:0]    out_tag
);
  localparam int unsigned IT = 16;
  localparam int unsigned XW = 18;
  localparam logic signed [15:0] ATAN [IT] = '{
    16'sd8192, 16'sd4836, 16'sd2555, 16'sd1297, 16'sd651, 16'sd326, 16'sd163, 16'sd81,
    16'sd41, 16'sd20, 16'sd10, 16'sd5, 16'sd3, 16'sd1, 16'sd1, 16'sd0};
  localparam logic signed [XW-1:0] KC = XW'(9949);

  typedef struct packed {
    logic v; logic flip; logic [TAG_W-1:0] tag;
    logic signed [XW-1:0] x; logic signed [XW-1:0] y; logic signed [15:0] z;
  } st_t;
  st_t s [IT+1];

  // stage 0: quadrant fold
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s[0] <= '0;
    else begin
      s[0].v    <= in_valid;
      s[0].tag  <= in_tag;
      s[0].flip <= phase[15] ^ phase[14];
      s[0].z    <= (phase[15] ^ phase[14]) ? $signed(phase + 16'h8000) : $signed(phase);
      s[0].x    <= KC;
      s[0].y    <= '0;
    end
  end

  for (genvar i = 0; i < IT; i++) begin : g_it
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) s[i+1] <= '0;
      else begin
        s[i+1].v    <= s[i].v;
        s[i+1].tag  <= s[i].tag;
        s[i+1].flip <= s[i].flip;
        if (!s[i].z[15]) begin
          s[i+1].x <= s[i].x - (s[i].y >>> i);
          s[i+1].y <= s[i].y + (s[i].x >>> i);
          s[i+1].z <= s[i].z - ATAN[i];
        end else begin
          s[i+1].x <= s[i].x + (s[i].y >>> i);
          s[i+1].y <= s[i].y - (s[i].x >>> i);
          s[i+1].z <= s[i].z + ATAN[i];
        end
      end
    end
  end

  // output: Q2.14 -> Q3.8 with rounding, undo the fold
  logic signed [XW-1:0] cr, sr;
  assign cr = (s[IT].x + XW'(32)) >>> 6;
  assign sr = (s[IT].y + XW'(32)) >>> 6;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cos_o <= '0; sin_o <= '0; out_tag <= '0;
    end else begin
      out_valid <= s[IT].v;
      out_tag   <= s[IT].tag;
      cos_o     <= s[IT].flip ? -ACT_W'(cr) : ACT_W'(cr);
      sin_o     <= s[IT].flip ? -ACT_W'(sr) : ACT_W'(sr);
    end
  end
endmodule
