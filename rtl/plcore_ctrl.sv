// plcore_ctrl: instruction-driven finite state machine of the plenoptic core.
//
// Fetches one 64-bit instruction at a time from the opcode queue and runs it
// to completion before fetching the next; the state it exposes (busy, done,
// current opcode) is what the read-only status register shows. The paper gives
// the FSM, its opcode/state registers and the input demux; the instruction set
// below and the loop orders are this design's choice.
//
//   LD_*   Input demux: pops stream beats and commits entries of 1, 2, 9 or 16
//          beats (frequency / SONB bias, sample, weight word, MONB bias word)
//          to the memory selected by the opcode at addr, addr+1, ...
//          LD_SMP also sets the batch size to its count.
//   ENC    For every sample b of the batch: read the data buffer, hand a job to
//          the PEU; then wait for the PEU to drain.
//   MONB / SONB  One network layer, batch-computing with stationary weights:
//          for each output chunk o (MONB: 64 neurons, SONB: 1 neuron)
//            read the bias; for each input chunk i
//              load the weight tile (MONB: 64 words into the 64 RMCM blocks,
//              SONB: 1 word), then stream chunk i of every sample b of the
//              batch from its memory (Sel_in), then wait for the unit to drain.
//          Input chunks 0..n_in-1 come from the source memory, the next n_cat
//          from the input memory (skip connection / direction features).
//          A SONB layer with dst VRU or OUT is followed by a render pass that
//          reads the result buffer sample by sample into the VRU or straight to
//          the output FIFO (VRU bypass), issuing only while the output FIFO has
//          more than 24 free entries.
//   END    Sets the done flag (cleared by clear_done).
// All memory reads are issued here; the datapath sees the matching
// valid/first/last/sample tags one cycle later, aligned with the read data.
module plcore_ctrl
  import icarus_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        clear_done,
  // instruction queue
  input  logic        instr_valid,
  input  instr_t      instr,
  output logic        instr_ready,
  // input stream beats
  input  logic        s_valid,
  output logic        s_ready,
  // unit status
  input  logic        peu_job_ready,
  input  logic        peu_busy,
  input  logic        monb_busy,
  input  logic        sonb_busy,
  input  logic        vru_busy,
  input  logic [7:0]  out_free,
  // current instruction and batch size
  output instr_t      cur,
  output logic [7:0]  batch,
  // loader
  output logic        ld_shift,
  output logic        ld_commit,
  output logic [13:0] ld_addr,
  // data buffer
  output logic        db_re,
  output logic [6:0]  db_raddr,
  // PEU job
  output logic        peu_job_valid,
  output logic [6:0]  peu_job_b,
  // weight / bias memories
  output logic        wm_re,
  output logic [13:0] wm_raddr,
  output logic        sw_re,
  output logic [3:0]  sw_raddr,
  output logic        bm_re,
  output logic [5:0]  bm_raddr,
  output logic        sb_re,
  output logic [3:0]  sb_raddr,
  output logic        monb_wload,
  output logic [5:0]  monb_wcol,
  output logic        sonb_wload,
  // activation sources
  output logic        imem_re,
  output logic [9:0]  imem_raddr,
  output logic        am1_re,
  output logic [8:0]  am1_raddr,
  output logic        am2_re,
  output logic [8:0]  am2_raddr,
  output src_e        x_sel,
  output logic        x_valid_monb,
  output logic        x_valid_sonb,
  output logic [6:0]  x_b,
  output logic        x_first,
  output logic        x_last,
  output logic [1:0]  cur_o,
  // render pass
  output logic        res_re,
  output logic [6:0]  res_raddr,
  output logic        rd_vru,
  output logic        rd_out,
  // status
  output logic        busy,
  output logic        done
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_ENC_RD, S_ENC_JOB, S_ENC_WAIT,
    S_BIAS, S_WL, S_BATCH, S_DRAIN, S_REND, S_REND_WAIT
  } state_e;
  state_e state;

  logic [11:0] idx;
  logic [3:0]  beat;
  logic [6:0]  b;
  logic [5:0]  col;
  logic [3:0]  i;
  logic [1:0]  o;
  logic [1:0]  cnt;

  // derived quantities of the current instruction
  logic [3:0] nb;          // beats per loaded entry
  logic [4:0] n_tot;
  logic       is_monb;
  always_comb begin
    unique case (cur.op)
      OP_LD_WM, OP_LD_WS: nb = 4'd8;    // 9 beats
      OP_LD_BM:           nb = 4'd15;   // 16 beats
      OP_LD_SMP:          nb = 4'd1;    // 2 beats
      default:            nb = 4'd0;    // 1 beat
    endcase
    n_tot   = 5'(cur.n_in) + 5'(cur.n_cat);
    is_monb = (cur.op == OP_MONB);
  end

  // source of the current input chunk
  src_e        chunk_src;
  logic [3:0]  chunk_idx;
  always_comb begin
    if (i < cur.n_in) begin
      chunk_src = src_e'(cur.src);
      chunk_idx = cur.src_base + i;
    end else begin
      chunk_src = SRC_IMEM;
      chunk_idx = cur.cat_base + (i - cur.n_in);
    end
  end

  logic [13:0] tile;
  assign tile = 14'(o) * 14'(n_tot) + 14'(i);

  logic unit_busy;
  assign unit_busy = is_monb ? monb_busy : sonb_busy;

  // combinational controls
  always_comb begin
    instr_ready   = 1'b0;
    s_ready       = 1'b0;
    ld_shift      = 1'b0;
    ld_commit     = 1'b0;
    ld_addr       = cur.addr + 14'(idx);
    db_re         = 1'b0;
    db_raddr      = b;
    peu_job_valid = 1'b0;
    peu_job_b     = b;
    wm_re         = 1'b0;
    wm_raddr      = cur.addr + (tile << 6) + 14'(col);
    sw_re         = 1'b0;
    sw_raddr      = 4'(cur.addr + tile);
    bm_re         = 1'b0;
    bm_raddr      = 6'(cur.bias + 8'(o));
    sb_re         = 1'b0;
    sb_raddr      = 4'(cur.bias + 8'(o));
    imem_re       = 1'b0;
    imem_raddr    = {b, 3'(chunk_idx)};
    am1_re        = 1'b0;
    am1_raddr     = {b, 2'(chunk_idx)};
    am2_re        = 1'b0;
    am2_raddr     = {b, 2'(chunk_idx)};
    res_re        = 1'b0;
    res_raddr     = b;
    unique case (state)
      S_IDLE:    instr_ready = enable;
      S_LOAD: begin
        s_ready   = 1'b1;
        ld_shift  = s_valid;
        ld_commit = s_valid && (beat == nb);
      end
      S_ENC_RD:  db_re = 1'b1;
      S_ENC_JOB: peu_job_valid = 1'b1;
      S_BIAS: begin
        bm_re = is_monb;
        sb_re = !is_monb;
      end
      S_WL: begin
        wm_re = is_monb;
        sw_re = !is_monb;
      end
      S_BATCH: begin
        imem_re = (chunk_src == SRC_IMEM);
        am1_re  = (chunk_src == SRC_AM1);
        am2_re  = (chunk_src == SRC_AM2);
      end
      S_REND: begin
        res_re = (out_free > 8'd24);
        db_re  = (out_free > 8'd24);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; batch <= 8'(BATCH); done <= 1'b0;
      idx <= '0; beat <= '0; b <= '0; col <= '0; i <= '0; o <= '0; cnt <= '0;
      monb_wload <= 1'b0; monb_wcol <= '0; sonb_wload <= 1'b0;
      x_sel <= SRC_IMEM; x_valid_monb <= 1'b0; x_valid_sonb <= 1'b0;
      x_b <= '0; x_first <= 1'b0; x_last <= 1'b0; rd_vru <= 1'b0; rd_out <= 1'b0;
    end else begin
      // one-cycle delayed controls, aligned with memory read data
      monb_wload   <= (state == S_WL) && is_monb;
      sonb_wload   <= (state == S_WL) && !is_monb;
      monb_wcol    <= col;
      x_valid_monb <= (state == S_BATCH) && is_monb;
      x_valid_sonb <= (state == S_BATCH) && !is_monb;
      x_sel        <= chunk_src;
      x_b          <= b;
      x_first      <= (i == '0);
      x_last       <= (5'(i) == n_tot - 1'b1);
      rd_vru       <= res_re && (cur.dst == SD_VRU);
      rd_out       <= res_re && (cur.dst == SD_OUT);
      if (clear_done) done <= 1'b0;

      unique case (state)
        S_IDLE: if (enable && instr_valid) begin
          cur <= instr;
          idx <= '0; beat <= '0; b <= '0; col <= '0; i <= '0; o <= '0; cnt <= '0;
          unique case (instr.op)
            OP_LD_FRQ, OP_LD_WM, OP_LD_WS, OP_LD_BM, OP_LD_BS, OP_LD_SMP: begin
              if (instr.count != '0) state <= S_LOAD;
              if (instr.op == OP_LD_SMP && instr.count != '0)
                batch <= (instr.count > 12'(BATCH)) ? 8'(BATCH) : 8'(instr.count);
            end
            OP_ENC:              state <= S_ENC_RD;
            OP_MONB, OP_SONB:    if (instr.n_out != '0 && (instr.n_in + instr.n_cat) != '0) state <= S_BIAS;
            OP_END:              done  <= 1'b1;
            default: ;
          endcase
        end
        S_LOAD: if (s_valid) begin
          if (beat == nb) begin
            beat <= '0;
            idx  <= idx + 1'b1;
            if (idx == cur.count - 1'b1) state <= S_IDLE;
          end else beat <= beat + 1'b1;
        end
        S_ENC_RD:  state <= S_ENC_JOB;
        S_ENC_JOB: if (peu_job_ready) begin
          if (8'(b) == batch - 1'b1) state <= S_ENC_WAIT;
          else begin b <= b + 1'b1; state <= S_ENC_RD; end
        end
        S_ENC_WAIT: begin
          cnt <= (cnt == 2'd3) ? cnt : cnt + 1'b1;
          if (cnt == 2'd3 && !peu_busy) state <= S_IDLE;
        end
        S_BIAS: begin col <= '0; state <= S_WL; end
        S_WL: begin
          if (!is_monb || col == 6'd63) begin b <= '0; state <= S_BATCH; end
          else col <= col + 1'b1;
        end
        S_BATCH: begin
          if (8'(b) == batch - 1'b1) begin cnt <= '0; state <= S_DRAIN; end
          else b <= b + 1'b1;
        end
        S_DRAIN: begin
          cnt <= (cnt == 2'd3) ? cnt : cnt + 1'b1;
          if (cnt == 2'd3 && !unit_busy) begin
            if (5'(i) != n_tot - 1'b1) begin
              i <= i + 1'b1; col <= '0; state <= S_WL;
            end else if (3'(o) != cur.n_out - 1'b1) begin
              o <= o + 1'b1; i <= '0; state <= S_BIAS;
            end else if (!is_monb && cur.dst != SD_KEEP) begin
              b <= '0; state <= S_REND;
            end else state <= S_IDLE;
          end
        end
        S_REND: if (res_re) begin
          if (8'(b) == batch - 1'b1) begin cnt <= '0; state <= S_REND_WAIT; end
          else b <= b + 1'b1;
        end
        S_REND_WAIT: begin
          cnt <= (cnt == 2'd3) ? cnt : cnt + 1'b1;
          if (cnt == 2'd3 && !vru_busy) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign cur_o = o;
  assign busy  = (state != S_IDLE);
endmodule
