// peu: positional encoding unit.
//
// Maps a sample's position and/or direction p to Fourier features
// [cos(A^T p), sin(A^T p)] for a frequency matrix A held on chip, so fixed
// (NeRF), isotropic and anisotropic random Fourier features all run on the same
// hardware. As in the paper, A is kept in two banks of 3 x 128 entries: bank 0
// holds a 3-D matrix or the first half of a 6-D one, bank 1 the second half. For
// each column a_k of A the inner product z_k = a_k . p runs through a cascade of
// MAC stages: three stages for 3-D inputs (bank 1 then stays asleep, its read
// enable off, and stages 4-6 are bypassed) and all six for 6-D inputs. The phase
// z_k, taken modulo one turn, feeds the sin/cos CORDIC pipeline.
//
// Features are packed into 64-lane words of the input memory: lane 2j holds
// cos z_k and lane 2j+1 sin z_k with j = k mod 32 (the interleaved order is this
// design's choice; it only permutes the first layer's weight columns). A word is
// written when 32 frequencies are done or at the last frequency, with unused
// lanes zero.
//
// Interface: fw_* write a frequency entry {a2, a1, a0} (16 bit, 6 fraction bits,
// in turns per unit). A job (sample index, 6 input values, mode, first column
// fbase, count nf, first output chunk) is taken on job_valid && job_ready and
// issues one column per cycle; job_ready is low while a job is issuing. Jobs of
// different modes must not overlap in the pipeline (wait for busy=0).
// Timing: the word for frequency k appears 1 (read) + 3 or 6 (MAC) + 18
// (CORDIC) + 1 (pack) cycles after it is issued.
module peu
  import icarus_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // frequency memory write
  input  logic                      fw_en,
  input  logic                      fw_bank,
  input  logic [6:0]                fw_addr,
  input  freq_t [2:0]               fw_data,
  // encoding job
  input  logic                      job_valid,
  output logic                      job_ready,
  input  logic [6:0]                job_b,
  input  in_t  [5:0]                job_p,
  input  enc_e                      job_mode,
  input  logic [6:0]                job_fbase,
  input  logic [7:0]                job_nf,
  input  logic [3:0]                job_chunk,
  // feature words for the input memory
  output logic                      o_valid,
  output logic [6:0]                o_b,
  output logic [3:0]                o_chunk,
  output act_t [LANES-1:0]          o_data,
  output logic                      busy
);
  // ---------------- job sequencer ----------------
  logic        active, r6;
  logic [6:0]  cur_b, cur_fbase;
  logic [7:0]  cur_nf, k;
  logic [3:0]  cur_chunk;
  in_t [5:0]   p;

  assign job_ready = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; r6 <= 1'b0; cur_b <= '0; cur_fbase <= '0; cur_nf <= '0;
      k <= '0; cur_chunk <= '0; p <= '0;
    end else if (!active) begin
      if (job_valid) begin
        active    <= (job_nf != '0);
        r6        <= (job_mode == ENC_R6);
        cur_b     <= job_b;
        cur_fbase <= job_fbase;
        cur_nf    <= job_nf;
        cur_chunk <= job_chunk;
        k         <= '0;
        unique case (job_mode)
          ENC_DIR: p <= {(3*IN_W)'(0), job_p[5:3]};
          default: p <= job_p;      // ENC_POS uses p[2:0], ENC_R6 all six
        endcase
      end
    end else begin
      k <= k + 1'b1;
      if (k == cur_nf - 1'b1) active <= 1'b0;
    end
  end

  // ---------------- frequency memory (two 3 x 128 banks) ----------------
  logic [3*FREQ_W-1:0] a_lo, a_hi;
  logic [6:0] raddr;
  assign raddr = cur_fbase + k[6:0];
  sram_1r1w #(.DEPTH(NFREQ), .WIDTH(3*FREQ_W)) u_fmem0 (
    .clk, .we(fw_en && !fw_bank), .waddr(fw_addr), .wdata(fw_data),
    .re(active), .raddr, .rdata(a_lo));
  sram_1r1w #(.DEPTH(NFREQ), .WIDTH(3*FREQ_W)) u_fmem1 (
    .clk, .we(fw_en && fw_bank), .waddr(fw_addr), .wdata(fw_data),
    .re(active && r6), .raddr, .rdata(a_hi));

  // tag carried with each column
  typedef struct packed {
    logic v; logic r6; logic last; logic [6:0] b; logic [6:0] k; logic [3:0] chunk;
  } tag_t;
  tag_t t0;
  in_t [5:0] p0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t0 <= '0; p0 <= '0;
    end else begin
      t0 <= '{v: active, r6: r6, last: (k == cur_nf - 1'b1), b: cur_b, k: k[6:0], chunk: cur_chunk};
      p0 <= p;
    end
  end

  // ---------------- cascaded MAC (6 stages, 3 bypassed for R^3) ----------------
  localparam int unsigned MW = IN_W + FREQ_W + 3;
  freq_t [5:0] a0;
  assign a0 = {freq_t'(a_hi[47:32]), freq_t'(a_hi[31:16]), freq_t'(a_hi[15:0]),
               freq_t'(a_lo[47:32]), freq_t'(a_lo[31:16]), freq_t'(a_lo[15:0])};
  tag_t        ts  [6];
  logic signed [MW-1:0] acc [6];
  freq_t [5:0] as  [6];
  in_t  [5:0]  ps  [6];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 6; s++) begin ts[s] <= '0; acc[s] <= '0; as[s] <= '0; ps[s] <= '0; end
    end else begin
      ts[0]  <= t0;
      as[0]  <= a0;
      ps[0]  <= p0;
      acc[0] <= MW'(a0[0] * p0[0]);
      for (int s = 1; s < 6; s++) begin
        ts[s]  <= ts[s-1];
        as[s]  <= as[s-1];
        ps[s]  <= ps[s-1];
        acc[s] <= acc[s-1] + MW'(as[s-1][s] * ps[s-1][s]);
      end
    end
  end

  // bypass: R^3 results leave after stage 3, R^6 results after stage 6
  logic                 zv;
  logic signed [MW-1:0] z;
  tag_t                 zt;
  always_comb begin
    if (ts[5].v && ts[5].r6) begin
      zv = 1'b1; z = acc[5]; zt = ts[5];
    end else begin
      zv = ts[2].v && !ts[2].r6; z = acc[2]; zt = ts[2];
    end
  end

  // phase: fraction bits of z (IN_FRAC + FREQ_FRAC = 18) as a 16-bit turn
  logic                cv;
  act_t                cz, sz;
  logic [$bits(tag_t)-1:0] ct_raw;
  tag_t                ct;
  cordic_sincos #(.TAG_W($bits(tag_t))) u_cordic (
    .clk, .rst_n, .in_valid(zv),
    .phase(z[IN_FRAC+FREQ_FRAC-1 -: PHASE_W]), .in_tag(zt),
    .out_valid(cv), .cos_o(cz), .sin_o(sz), .out_tag(ct_raw));
  assign ct = tag_t'(ct_raw);

  // ---------------- feature packing ----------------
  act_t [LANES-1:0] word, word_n;
  logic [4:0] j;
  assign j = ct.k[4:0];
  always_comb begin
    word_n = (j == '0) ? '0 : word;
    word_n[2*j]   = cz;
    word_n[2*j+1] = sz;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0; o_valid <= 1'b0; o_b <= '0; o_chunk <= '0; o_data <= '0;
    end else begin
      o_valid <= 1'b0;
      if (cv) begin
        word <= word_n;
        if (j == 5'd31 || ct.last) begin
          o_valid <= 1'b1;
          o_b     <= ct.b;
          o_chunk <= ct.chunk + 4'(ct.k[6:5]);
          o_data  <= word_n;
        end
      end
    end
  end

  // columns in flight from issue to the packed word
  logic [6:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + 7'(active) - 7'(cv);
  end
  assign busy = active || (inflight != '0) || o_valid;
endmodule
