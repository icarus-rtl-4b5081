// plcore: plenoptic core, the unit that runs the whole NeRF pipeline on chip.
//
// Takes in a stream of model data (frequencies, weights, biases) and samples
// (position, direction, spacing, end-of-ray flag) and streams out rendered pixel
// colours, or raw network outputs when the volume renderer is bypassed. No
// intermediate data leaves the core. It holds, as in the paper's core diagram:
//   input FIFO and demux (loader)      -> frequency memory / weight memories /
//                                         bias memories / data buffer
//   PEU  : data buffer -> Fourier features -> input memory (96 KB)
//   MLP engine: MONB (64 RMCM blocks) with weight memory (726 KB) for hidden
//          layers, SONB (64 multipliers) with weight memory (1.125 KB) for output
//          layers; activation memories 1 and 2 (48 KB each) ping-pong between
//          layers; three 64-lane buses (input memory, AM1, AM2) and Sel_in
//   result buffer (SONB outputs per sample, columns 0-3) -> VRU or bypass
//   output mux and output FIFO
//   plcore_ctrl: the finite state machine that runs the instructions.
// The memory sizes are the paper's; the result and bias buffers, the instruction
// set and all formats are this design's choice (see icarus_pkg).
//
// Interfaces: instr_* is the opcode queue; s_* the 64-bit input stream and m_*
// the 64-bit output stream, both valid/ready. A pixel leaves as {16'h0, b, g, r}
// (Q1.15 each); a bypassed sample as {res3, res2, res1, res0} (8 fraction bits).
// A MONB layer must not read and write the same activation memory.
//
// Lint note: rst_n is used both as the asynchronous reset of the flip-flops and
// in the 'disable iff' of the output-room assertion; the latter is not logic,
// so the mixed synchronous/asynchronous use reported for rst_n is harmless.
module plcore
  import icarus_pkg::*;
#(
  parameter int unsigned IN_FIFO_DEPTH  = 16,
  parameter int unsigned OUT_FIFO_DEPTH = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic                clear_done,
  input  logic                instr_valid,
  input  instr_t              instr,
  output logic                instr_ready,
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [STREAM_W-1:0] s_data,
  output logic                m_valid,
  input  logic                m_ready,
  output logic [STREAM_W-1:0] m_data,
  output logic                busy,
  output logic                done,
  output opcode_e             cur_op
);
  localparam int unsigned AW_OUT = $clog2(OUT_FIFO_DEPTH);

  // ---------------- input FIFO ----------------
  logic                f_valid, f_ready;
  logic [STREAM_W-1:0] f_data;
  logic [$clog2(IN_FIFO_DEPTH):0] in_level;
  sync_fifo #(.WIDTH(STREAM_W), .DEPTH(IN_FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .level(in_level));

  // ---------------- controller ----------------
  instr_t cur;
  logic [7:0] batch;
  logic ld_shift, ld_commit;
  logic [13:0] ld_addr;
  logic db_re; logic [6:0] db_raddr;
  logic peu_job_valid, peu_job_ready; logic [6:0] peu_job_b;
  logic wm_re, sw_re, bm_re, sb_re;
  logic [13:0] wm_raddr; logic [3:0] sw_raddr; logic [5:0] bm_raddr; logic [3:0] sb_raddr;
  logic monb_wload, sonb_wload; logic [5:0] monb_wcol;
  logic imem_re, am1_re, am2_re;
  logic [9:0] imem_raddr; logic [8:0] am1_raddr, am2_raddr;
  src_e x_sel;
  logic x_valid_monb, x_valid_sonb, x_first, x_last;
  logic [6:0] x_b;
  logic [1:0] cur_o;
  logic res_re, rd_vru, rd_out;
  logic [6:0] res_raddr;
  logic peu_busy, monb_busy, sonb_busy, vru_busy;
  logic [7:0] out_free;

  plcore_ctrl u_ctrl (
    .clk, .rst_n, .enable, .clear_done, .instr_valid, .instr, .instr_ready,
    .s_valid(f_valid), .s_ready(f_ready),
    .peu_job_ready, .peu_busy, .monb_busy, .sonb_busy, .vru_busy, .out_free,
    .cur, .batch, .ld_shift, .ld_commit, .ld_addr, .db_re, .db_raddr,
    .peu_job_valid, .peu_job_b, .wm_re, .wm_raddr, .sw_re, .sw_raddr,
    .bm_re, .bm_raddr, .sb_re, .sb_raddr, .monb_wload, .monb_wcol, .sonb_wload,
    .imem_re, .imem_raddr, .am1_re, .am1_raddr, .am2_re, .am2_raddr,
    .x_sel, .x_valid_monb, .x_valid_sonb, .x_b, .x_first, .x_last, .cur_o,
    .res_re, .res_raddr, .rd_vru, .rd_out, .busy, .done);
  assign cur_op = cur.op;

  // ---------------- loader: beat assembler (demux) ----------------
  logic [1023:0] asm_q, asm_n;
  assign asm_n = {f_data, asm_q[1023:64]};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        asm_q <= '0;
    else if (ld_shift) asm_q <= asm_n;
  end
  logic commit_frq, commit_wm, commit_ws, commit_bm, commit_bs, commit_smp;
  assign commit_frq = ld_commit && cur.op == OP_LD_FRQ;
  assign commit_wm  = ld_commit && cur.op == OP_LD_WM;
  assign commit_ws  = ld_commit && cur.op == OP_LD_WS;
  assign commit_bm  = ld_commit && cur.op == OP_LD_BM;
  assign commit_bs  = ld_commit && cur.op == OP_LD_BS;
  assign commit_smp = ld_commit && cur.op == OP_LD_SMP;

  // ---------------- data buffer (positions & directions) ----------------
  sample_t db_rdata;
  sram_1r1w #(.DEPTH(BATCH), .WIDTH($bits(sample_t))) u_dbuf (
    .clk, .we(commit_smp), .waddr(ld_addr[6:0]), .wdata(asm_n[1023-15 -: $bits(sample_t)]),
    .re(db_re), .raddr(db_raddr), .rdata(db_rdata));

  // ---------------- PEU and input memory ----------------
  logic pe_valid; logic [6:0] pe_b; logic [3:0] pe_chunk;
  act_t [LANES-1:0] pe_data;
  peu u_peu (
    .clk, .rst_n,
    .fw_en(commit_frq), .fw_bank(cur.src[0]), .fw_addr(ld_addr[6:0]),
    .fw_data(asm_n[1023-16 -: 3*FREQ_W]),
    .job_valid(peu_job_valid), .job_ready(peu_job_ready), .job_b(peu_job_b),
    .job_p({db_rdata.dir, db_rdata.pos}), .job_mode(enc_e'(cur.src)),
    .job_fbase(cur.addr[6:0]), .job_nf(cur.count[7:0]), .job_chunk(cur.src_base),
    .o_valid(pe_valid), .o_b(pe_b), .o_chunk(pe_chunk), .o_data(pe_data), .busy(peu_busy));

  logic [LANES*ACT_W-1:0] imem_rd, am1_rd, am2_rd;
  sram_1r1w #(.DEPTH(BATCH*IMEM_CHUNKS), .WIDTH(LANES*ACT_W)) u_imem (
    .clk, .we(pe_valid), .waddr({pe_b, pe_chunk[2:0]}), .wdata(pe_data),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rd));

  // ---------------- MLP engine ----------------
  logic [LANES*WGT_W-1:0] wm_rd, sw_rd;
  sram_1r1w #(.DEPTH(WMEM_WORDS), .WIDTH(LANES*WGT_W)) u_wmem (
    .clk, .we(commit_wm), .waddr(ld_addr), .wdata(asm_n[1023 -: LANES*WGT_W]),
    .re(wm_re), .raddr(wm_raddr), .rdata(wm_rd));
  sram_1r1w #(.DEPTH(SWMEM_WORDS), .WIDTH(LANES*WGT_W)) u_swmem (
    .clk, .we(commit_ws), .waddr(ld_addr[3:0]), .wdata(asm_n[1023 -: LANES*WGT_W]),
    .re(sw_re), .raddr(sw_raddr), .rdata(sw_rd));

  logic [LANES*BIAS_W-1:0] bm_rd;
  logic [BIAS_W-1:0] sb_rd;
  sram_1r1w #(.DEPTH(BMEM_WORDS), .WIDTH(LANES*BIAS_W)) u_bmem (
    .clk, .we(commit_bm), .waddr(ld_addr[5:0]), .wdata(asm_n),
    .re(bm_re), .raddr(bm_raddr), .rdata(bm_rd));
  sram_1r1w #(.DEPTH(SBMEM_WORDS), .WIDTH(BIAS_W)) u_sbmem (
    .clk, .we(commit_bs), .waddr(ld_addr[3:0]), .wdata(asm_n[1023-48 -: BIAS_W]),
    .re(sb_re), .raddr(sb_raddr), .rdata(sb_rd));

  // Sel_in: one of the three 64-lane buses feeds the block in use
  act_t [LANES-1:0] x_bus;
  always_comb begin
    unique case (x_sel)
      SRC_AM1: x_bus = am1_rd;
      SRC_AM2: x_bus = am2_rd;
      default: x_bus = imem_rd;
    endcase
  end

  logic signed [BIAS_W-1:0] bias_vec [LANES];
  always_comb
    for (int r = 0; r < LANES; r++) bias_vec[r] = $signed(bm_rd[r*BIAS_W +: BIAS_W]);

  logic m_yv; logic [6:0] m_yb; act_t [LANES-1:0] m_y;
  monb u_monb (
    .clk, .rst_n, .wload(monb_wload), .wcol(monb_wcol), .wdata(wm_rd),
    .valid(x_valid_monb), .x(x_bus), .b(x_b), .first(x_first), .last(x_last),
    .bias(bias_vec), .relu(cur.relu), .y_valid(m_yv), .y_b(m_yb), .y(m_y), .busy(monb_busy));

  // Demux: MONB outputs go to the destination activation memory
  logic [8:0] am_waddr;
  assign am_waddr = {m_yb, cur_o};
  sram_1r1w #(.DEPTH(BATCH*AMEM_CHUNKS), .WIDTH(LANES*ACT_W)) u_am1 (
    .clk, .we(m_yv && cur.dst == SRC_AM1), .waddr(am_waddr), .wdata(m_y),
    .re(am1_re), .raddr(am1_raddr), .rdata(am1_rd));
  sram_1r1w #(.DEPTH(BATCH*AMEM_CHUNKS), .WIDTH(LANES*ACT_W)) u_am2 (
    .clk, .we(m_yv && cur.dst == SRC_AM2), .waddr(am_waddr), .wdata(m_y),
    .re(am2_re), .raddr(am2_raddr), .rdata(am2_rd));

  logic s_yv; logic [6:0] s_yb; logic signed [OUT_W-1:0] s_y;
  sonb u_sonb (
    .clk, .rst_n, .wload(sonb_wload), .wdata(sw_rd),
    .valid(x_valid_sonb), .x(x_bus), .b(x_b), .first(x_first), .last(x_last),
    .bias($signed(sb_rd)), .y_valid(s_yv), .y_b(s_yb), .y(s_y), .busy(sonb_busy));

  // result buffer: SONB output neuron o of sample b goes to column o + rcol
  logic [1:0] res_col;
  logic [OUT_W-1:0] res_rd [4];
  assign res_col = cur_o + cur.rcol;
  for (genvar c = 0; c < 4; c++) begin : g_res
    sram_1r1w #(.DEPTH(BATCH), .WIDTH(OUT_W)) u_res (
      .clk, .we(s_yv && res_col == 2'(c)), .waddr(s_yb), .wdata(s_y),
      .re(res_re), .raddr(res_raddr), .rdata(res_rd[c]));
  end

  // ---------------- VRU ----------------
  logic pix_valid;
  logic [UQ_W-1:0] pix [3];
  logic signed [OUT_W-1:0] c_raw [3];
  assign c_raw[0] = $signed(res_rd[0]);
  assign c_raw[1] = $signed(res_rd[1]);
  assign c_raw[2] = $signed(res_rd[2]);
  vru u_vru (
    .clk, .rst_n, .in_valid(rd_vru), .sigma($signed(res_rd[3])), .c_raw,
    .delta(db_rdata.delta), .last(db_rdata.last),
    .pix_valid, .pix, .busy(vru_busy));

  // ---------------- output mux and FIFO ----------------
  logic                o_push;
  logic [STREAM_W-1:0] o_word;
  logic [AW_OUT:0]     out_level;
  logic                o_ready;
  assign o_push = pix_valid || rd_out;
  assign o_word = pix_valid ? {16'h0, pix[2], pix[1], pix[0]}
                            : {res_rd[3], res_rd[2], res_rd[1], res_rd[0]};
  sync_fifo #(.WIDTH(STREAM_W), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(o_push), .in_ready(o_ready), .in_data(o_word),
    .out_valid(m_valid), .out_ready(m_ready), .out_data(m_data), .level(out_level));
  assign out_free = 8'(OUT_FIFO_DEPTH) - 8'(out_level);

  // the controller only issues render reads while the output FIFO has room
  a_out_room: assert property (@(posedge clk) disable iff (!rst_n) o_push |-> o_ready);
endmodule
