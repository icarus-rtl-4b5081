// vru: volume rendering unit.
//
// Composites the samples of a ray into a pixel colour with the rewritten
// volume rendering equation C = sum (T_i - T_{i+1}) c_i, T_{i+1} = T_i exp(x_i),
// x_i = -sigma_i delta_i, following the unit's block diagram in the paper: a
// multiplier forms sigma_i*delta_i (sigma is clamped at 0 first, the ReLU of
// NeRF's density), the CORDIC gives exp(x_i), a multiplier gives T_{i+1} from
// the registered T_i, a subtractor gives T_i*alpha_i = T_i - T_{i+1}, a
// multiplier weights the sigmoid of the colour, and an adder with a register
// accumulates C. A sample with last=1 ends the ray: its pixel leaves on
// pix_valid/pix and T, C return to 1 and 0.
// Inputs: one sample per cycle (no back-pressure), sigma and raw colour signed
// with 8 fraction bits, delta unsigned with 12 fraction bits. Output colours
// unsigned Q1.15. Latency from a last sample to its pixel: 20 cycles.
module vru
  import icarus_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [OUT_W-1:0]   sigma,
  input  logic signed [OUT_W-1:0]   c_raw [3],
  input  logic [DELTA_W-1:0]        delta,
  input  logic                      last,
  output logic                      pix_valid,
  output logic [UQ_W-1:0]           pix [3],
  output logic                      busy
);
  localparam logic [UQ_W:0] ONE = 17'd32768;

  // stage 0: -sigma*delta magnitude and sigmoid of the colour
  logic               v0, last0;
  logic [31:0]        a0;
  logic [UQ_W-1:0]    sg [3];
  logic [3*UQ_W-1:0]  sg0;
  for (genvar k = 0; k < 3; k++) begin : g_sig
    sigmoid_pwl u_sig (.x(c_raw[k]), .y(sg[k]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; last0 <= 1'b0; a0 <= '0; sg0 <= '0;
    end else begin
      v0    <= in_valid;
      last0 <= last;
      a0    <= sigma[OUT_W-1] ? '0 : 32'(sigma) * 32'(delta);
      sg0   <= {sg[2], sg[1], sg[0]};
    end
  end

  // exp(x_i); the colour and end-of-ray flag ride along as the tag
  logic              ev;
  logic [UQ_W-1:0]   e;
  logic [3*UQ_W:0]   etag;
  cordic_exp #(.TAG_W(3*UQ_W+1), .A_W(32), .A_FRAC(OUT_FRAC + DELTA_FRAC)) u_exp (
    .clk, .rst_n, .in_valid(v0), .a(a0), .in_tag({last0, sg0}),
    .out_valid(ev), .e, .out_tag(etag));

  // transmittance and colour accumulation
  logic [UQ_W:0]  t_reg, t_next, w;
  logic [UQ_W+1:0] c_reg [3];
  logic [UQ_W+1:0] c_new [3];
  always_comb begin
    t_next = (UQ_W+1)'((34'(t_reg) * 34'(e)) >> UQ_FRAC);
    w      = t_reg - t_next;
    for (int k = 0; k < 3; k++)
      c_new[k] = c_reg[k] + (UQ_W+2)'((34'(w) * 34'(etag[k*UQ_W +: UQ_W])) >> UQ_FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_reg <= ONE; pix_valid <= 1'b0;
      for (int k = 0; k < 3; k++) begin c_reg[k] <= '0; pix[k] <= '0; end
    end else begin
      pix_valid <= ev && etag[3*UQ_W];
      if (ev) begin
        if (etag[3*UQ_W]) begin
          t_reg <= ONE;
          for (int k = 0; k < 3; k++) begin
            c_reg[k] <= '0;
            pix[k]   <= (c_new[k] > (UQ_W+2)'(ONE)) ? UQ_W'(ONE) : UQ_W'(c_new[k]);
          end
        end else begin
          t_reg <= t_next;
          for (int k = 0; k < 3; k++) c_reg[k] <= c_new[k];
        end
      end
    end
  end

  // samples in flight between the input and the accumulator
  logic [5:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + 6'(in_valid) - 6'(ev);
  end
  assign busy = (inflight != '0) || pix_valid;
endmodule
