// tb_icarus_top: end-to-end test of the ICARUS core at its full default size.
//
// A host model programs the core through the AXI4-Lite registers and feeds the
// 64-bit input stream: frequency matrices, 48 samples (6 rays of 8), positional
// encoding in all three modes (3-D position, 6-D position+direction, 3-D
// direction), two MONB hidden layers (the second with a skip connection that
// appends an input-memory chunk), and a 4-output SONB layer run twice: once
// with the volume renderer bypassed (raw outputs to the output stream) and
// once into the VRU (one pixel per ray). It then checks
//   - every encoded feature against real cos/sin of the exact phase,
//   - both MONB layers bit-exactly against an integer model of the
//     approximated products, fed with the input memory the core wrote,
//   - the raw SONB outputs bit-exactly, and the pixels against a real-number
//     volume rendering model of those outputs (tolerance 0.005),
//   - the Stat register (done) and an SLVERR on a read of a write-only register.
// It counts each mechanism and fails if one never happened: R3/R6 mode
// switches with bank 1 asleep, zero-gated multiplications, skip-connection
// chunks, VRU bypass, instruction-queue-full stalls, input-stream stalls and
// render stalls from output back-pressure.
module tb_icarus_top;
  import icarus_pkg::*;
  localparam int B = 48, RL = 8;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic [63:0] s_wdata = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [63:0] s_rdata;
  logic in_valid = 0, in_ready, out_valid, out_ready;
  logic [63:0] in_data = 0, out_data;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  icarus_top dut (.*);
  logic [63:0] beats [$];
  logic [63:0] outs [$];

  // ---------------- data and reference model ----------------
  freq_t F0 [64][3], F1 [32][3];
  in_t   P [B][3], D [B][3];
  logic [DELTA_W-1:0] DL [B];
  wgt_t  W1 [128][192], W2 [64][192], WS [4][64];
  int    BI1 [128], BI2 [64], BS [4];

  function automatic wgt_t rw();
    return wgt_t'({1'($urandom), 8'($urandom % 48)});
  endfunction
  function automatic int approx(int d);
    return (d >= 9 && (d % 2 == 1)) ? d - 1 : d;
  endfunction
  function automatic int aprod(int xv, wgt_t w);
    return (w[8] ? -1 : 1) * xv * (16 * approx(w[7:4]) + approx(w[3:0]));
  endfunction
  function automatic int q12(longint acc, int bs);
    longint v = ((acc + 64) >>> 7) + bs;
    if (v < 0) v = 0;
    if (v > 2047) v = 2047;
    return int'(v);
  endfunction
  function automatic int q16(longint acc, int bs);
    longint v = ((acc + 64) >>> 7) + bs;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction
  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real sig(real x);
    real ax = fabs(x), y;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = ax / 32.0 + 0.84375;
    else if (ax >= 1.0)   y = ax / 8.0 + 0.625;
    else                  y = ax / 4.0 + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction
  function automatic int lane(logic [LANES*ACT_W-1:0] w, int l);
    return int'($signed(w[l*ACT_W +: ACT_W]));
  endfunction

  task automatic push_word(logic [1023:0] w, int nbeats);
    for (int k = 0; k < nbeats; k++) beats.push_back(w[k*64 +: 64]);
  endtask

  task automatic make_data();
    logic [1023:0] w;
    for (int k = 0; k < 64; k++) for (int d = 0; d < 3; d++) F0[k][d] = freq_t'($signed(11'($urandom)));
    for (int k = 0; k < 32; k++) for (int d = 0; d < 3; d++) F1[k][d] = freq_t'($signed(11'($urandom)));
    for (int b = 0; b < B; b++) begin
      for (int d = 0; d < 3; d++) begin
        P[b][d] = in_t'($signed(14'($urandom)));
        D[b][d] = in_t'($signed(13'($urandom)));
      end
      DL[b] = DELTA_W'(1024 + $urandom % 4096);
    end
    for (int r = 0; r < 128; r++) begin BI1[r] = $signed(7'($urandom)); for (int c = 0; c < 192; c++) W1[r][c] = rw(); end
    for (int r = 0; r < 64; r++)  begin BI2[r] = $signed(7'($urandom)); for (int c = 0; c < 192; c++) W2[r][c] = rw(); end
    for (int o = 0; o < 4; o++)   begin BS[o] = $signed(9'($urandom));  for (int c = 0; c < 64; c++)  WS[o][c] = rw(); end
    // stream, in instruction order
    for (int k = 0; k < 64; k++) push_word(1024'({F0[k][2], F0[k][1], F0[k][0]}), 1);
    for (int k = 0; k < 32; k++) push_word(1024'({F1[k][2], F1[k][1], F1[k][0]}), 1);
    for (int b = 0; b < B; b++) begin
      sample_t s;
      s.last = (b % RL == RL - 1); s.delta = DL[b];
      for (int d = 0; d < 3; d++) begin s.pos[d] = P[b][d]; s.dir[d] = D[b][d]; end
      push_word(1024'(s), 2);
    end
    for (int wd = 0; wd < 576; wd++) begin
      w = '0;
      for (int r = 0; r < 64; r++)
        if (wd < 384) w[r*9 +: 9] = W1[(wd / 192) * 64 + r][((wd / 64) % 3) * 64 + wd % 64];
        else          w[r*9 +: 9] = W2[r][wd - 384];
      push_word(w, 9);
    end
    for (int wd = 0; wd < 3; wd++) begin
      w = '0;
      for (int r = 0; r < 64; r++) w[r*16 +: 16] = 16'((wd < 2) ? BI1[wd*64 + r] : BI2[r]);
      push_word(w, 16);
    end
    for (int o = 0; o < 4; o++) begin
      w = '0;
      for (int c = 0; c < 64; c++) w[c*9 +: 9] = WS[o][c];
      push_word(w, 9);
    end
    for (int o = 0; o < 4; o++) push_word(1024'(16'(BS[o])), 1);
  endtask

  task automatic check_feature(int b, int ch, int l, longint z);
    int ph = int'((z >> 2) & 64'hFFFF);
    real ang = 2.0 * 3.14159265358979 * ph / 65536.0;
    real ex = (l % 2 == 0) ? $cos(ang) * 256.0 : $sin(ang) * 256.0;
    int got = lane(dut.u_core.u_imem.mem[b*8 + ch], l);
    checks++;
    if (fabs(real'(got) - ex) > 3.0) begin
      failures++;
      if (failures < 10) $display("FAIL feature b=%0d chunk=%0d lane=%0d got %0d exp %f", b, ch, l, got, ex);
    end
  endtask

  task automatic check_all();
    int x1 [192], x2 [192], y2 [64], so [B][4];
    for (int b = 0; b < B; b++) begin
      // positional encoding
      for (int l = 0; l < 64; l++) begin
        int k = l / 2;
        longint z0 = 0, z1 = 0, z2 = 0, z3 = 0;
        for (int d = 0; d < 3; d++) begin
          z0 += longint'(F0[k][d]) * P[b][d];
          z1 += longint'(F0[32 + k][d]) * P[b][d];
          z2 += longint'(F0[k][d]) * P[b][d] + longint'(F1[k][d]) * D[b][d];
          z3 += longint'(F0[32 + k][d]) * D[b][d];
        end
        check_feature(b, 0, l, z0); check_feature(b, 1, l, z1);
        check_feature(b, 2, l, z2); check_feature(b, 3, l, z3);
      end
      // MONB layer 1 (input memory chunks 0-2 -> AM1 chunks 0-1)
      for (int c = 0; c < 192; c++) x1[c] = lane(dut.u_core.u_imem.mem[b*8 + c/64], c % 64);
      for (int rr = 0; rr < 128; rr++) begin
        longint acc = 0;
        for (int c = 0; c < 192; c++) acc += aprod(x1[c], W1[rr][c]);
        checks++;
        if (lane(dut.u_core.u_am1.mem[b*4 + rr/64], rr % 64) != q12(acc, BI1[rr])) begin
          failures++;
          if (failures < 10) $display("FAIL layer1 b=%0d r=%0d got %0d exp %0d", b, rr,
                                      lane(dut.u_core.u_am1.mem[b*4 + rr/64], rr % 64), q12(acc, BI1[rr]));
        end
      end
      // MONB layer 2 (AM1 chunks 0-1 + input memory chunk 3 -> AM2 chunk 0)
      for (int c = 0; c < 128; c++) x2[c] = lane(dut.u_core.u_am1.mem[b*4 + c/64], c % 64);
      for (int c = 0; c < 64; c++)  x2[128 + c] = lane(dut.u_core.u_imem.mem[b*8 + 3], c);
      for (int rr = 0; rr < 64; rr++) begin
        longint acc = 0;
        for (int c = 0; c < 192; c++) acc += aprod(x2[c], W2[rr][c]);
        y2[rr] = q12(acc, BI2[rr]);
        checks++;
        if (lane(dut.u_core.u_am2.mem[b*4], rr) != y2[rr]) begin
          failures++;
          if (failures < 10) $display("FAIL layer2 b=%0d r=%0d got %0d exp %0d", b, rr, lane(dut.u_core.u_am2.mem[b*4], rr), y2[rr]);
        end
      end
      // SONB (exact multipliers), raw outputs
      for (int o = 0; o < 4; o++) begin
        longint acc = 0;
        for (int c = 0; c < 64; c++) acc += longint'(y2[c]) * (WS[o][c][8] ? -1 : 1) * int'(WS[o][c][7:0]);
        so[b][o] = q16(acc, BS[o]);
      end
    end
    checks++;
    if (outs.size() != B + B / RL) begin
      failures++; $display("FAIL %0d output words, expected %0d", outs.size(), B + B / RL);
    end else begin
      for (int b = 0; b < B; b++) begin
        checks++;
        if (outs[b] != {16'(so[b][3]), 16'(so[b][2]), 16'(so[b][1]), 16'(so[b][0])}) begin
          failures++; $display("FAIL raw output b=%0d got %h", b, outs[b]);
        end
      end
      for (int ray = 0; ray < B / RL; ray++) begin
        real T = 1.0, C [3] = '{0.0, 0.0, 0.0};
        for (int s = 0; s < RL; s++) begin
          int b = ray * RL + s;
          real sg = (so[b][3] < 0) ? 0.0 : real'(so[b][3]) / 256.0;
          real al = 1.0 - $exp(-sg * real'(DL[b]) / 4096.0);
          for (int k = 0; k < 3; k++) C[k] += T * al * sig(real'(so[b][k]) / 256.0);
          T = T * (1.0 - al);
        end
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (fabs(real'(outs[B + ray][k*16 +: 16]) / 32768.0 - C[k]) > 0.005) begin
            failures++; $display("FAIL pixel %0d ch%0d got %0d exp %f", ray, k, outs[B + ray][k*16 +: 16], C[k] * 32768.0);
          end
        end
      end
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- input stream feeder ----------------
  // signals are driven at negedge; a transfer happens at the next posedge if
  // valid and ready are both high now (ready only changes at posedge)
  logic in_pend = 0;
  always @(negedge clk) begin
    if (in_pend) void'(beats.pop_front());
    in_valid = rst_n && (beats.size() != 0);
    if (in_valid) in_data = beats[0];
    in_pend = in_valid && in_ready;
  end

  // ---------------- output collector ----------------
  logic out_release = 0;
  always @(negedge clk) begin
    out_ready = out_release;
    if (out_valid && out_ready) outs.push_back(out_data);
  end

  // ---------------- mechanism counters ----------------
  int n_r3 = 0, n_r6 = 0, n_switch = 0, n_zero = 0, n_skip = 0, n_bypass = 0,
      n_pix = 0, n_qstall = 0, n_install = 0, n_rstall = 0, n_sleep = 0;
  logic last_r6 = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_core.u_peu.zv) begin
      if (dut.u_core.u_peu.zt.r6) n_r6++; else n_r3++;
      if (dut.u_core.u_peu.zt.r6 != last_r6) n_switch++;
      last_r6 = dut.u_core.u_peu.zt.r6;
    end
    if (dut.u_core.u_peu.t0.v && !dut.u_core.u_peu.t0.r6) n_sleep++;
    if (dut.u_core.u_monb.valid)
      for (int c = 0; c < LANES; c++) if (dut.u_core.u_monb.x[c] == '0) n_zero++;
    if (dut.u_core.x_valid_monb && dut.u_core.cur.src != 2'(SRC_IMEM) && dut.u_core.x_sel == SRC_IMEM) n_skip++;
    if (dut.u_core.rd_out) n_bypass++;
    if (dut.u_core.pix_valid) n_pix++;
    if (in_valid && !in_ready) n_install++;
    if (dut.u_core.u_ctrl.state == 4'd9 && !dut.u_core.u_ctrl.res_re) n_rstall++;
  end

  // ---------------- AXI4-Lite host ----------------
  task automatic axi_write(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d;
    #1;                                 // let the combinational ready settle
    while (!(s_awready && s_wready)) begin
      if (a == 8'h08) n_qstall++;
      @(negedge clk); #1;
    end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
  endtask
  task automatic axi_read(input logic [7:0] a, output logic [63:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; resp = s_rresp;
  endtask
  task automatic op(input instr_t ins);
    axi_write(8'h08, 64'(ins));
  endtask
  function automatic instr_t mk(opcode_e o, logic [1:0] src, int addr, int count);
    instr_t i = '0;
    i.op = o; i.src = src; i.addr = 14'(addr); i.count = 12'(count);
    return i;
  endfunction
  function automatic instr_t mk_layer(opcode_e o, src_e src, int n_in, int cat_base, int n_cat,
                                      int n_out, logic [1:0] dst, int addr, int bias);
    instr_t i = '0;
    i.op = o; i.src = src; i.src_base = 0; i.n_in = 4'(n_in); i.cat_base = 4'(cat_base);
    i.n_cat = 4'(n_cat); i.n_out = 3'(n_out); i.dst = dst; i.relu = (o == OP_MONB);
    i.addr = 14'(addr); i.bias = 8'(bias);
    return i;
  endfunction

  initial begin
    instr_t e;
    logic [63:0] st;
    logic [1:0] resp;
    make_data();
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(8'h00, 64'h1);                       // run
    op(mk(OP_LD_FRQ, 2'd0, 0, 64));
    op(mk(OP_LD_FRQ, 2'd1, 0, 32));
    op(mk(OP_LD_SMP, 2'd0, 0, B));
    e = mk(OP_ENC, 2'(ENC_POS), 0, 64);  e.src_base = 0; op(e);
    e = mk(OP_ENC, 2'(ENC_R6), 0, 32);   e.src_base = 2; op(e);
    e = mk(OP_ENC, 2'(ENC_DIR), 32, 32); e.src_base = 3; op(e);
    op(mk(OP_LD_WM, 2'd0, 0, 576));
    op(mk(OP_LD_BM, 2'd0, 0, 3));
    op(mk(OP_LD_WS, 2'd0, 0, 4));
    op(mk(OP_LD_BS, 2'd0, 0, 4));
    op(mk_layer(OP_MONB, SRC_IMEM, 3, 0, 0, 2, 2'(SRC_AM1), 0, 0));
    op(mk_layer(OP_MONB, SRC_AM1, 2, 3, 1, 1, 2'(SRC_AM2), 384, 2));
    for (int k = 0; k < 8; k++) op('0);               // NOPs: fill the queue
    op(mk_layer(OP_SONB, SRC_AM2, 1, 0, 0, 4, 2'(SD_OUT), 0, 0));
    op(mk_layer(OP_SONB, SRC_AM2, 1, 0, 0, 4, 2'(SD_VRU), 0, 0));
    op(mk(OP_END, 2'd0, 0, 0));
    // back-pressure on the output until the render pass has stalled a while
    while (n_rstall < 50) @(negedge clk);
    out_release = 1;
    do begin
      repeat (50) @(negedge clk);
      axi_read(8'h10, st, resp);
    end while (!st[1]);
    checks++;
    if (resp != 2'b00 || st[0]) begin failures++; $display("FAIL stat %h resp %0d", st, resp); end
    axi_read(8'h00, st, resp);
    checks++;
    if (resp != 2'b10) begin failures++; $display("FAIL no SLVERR on Ctrl read"); end
    repeat (10) @(negedge clk);
    check_all();
    $display("mechanisms: r3_cols=%0d r6_cols=%0d mode_switches=%0d bank1_asleep=%0d zero_gated=%0d skip_chunks=%0d vru_bypass=%0d pixels=%0d queue_stalls=%0d in_stalls=%0d render_stalls=%0d",
             n_r3, n_r6, n_switch, n_sleep, n_zero, n_skip, n_bypass, n_pix, n_qstall, n_install, n_rstall);
    if (n_r3 == 0 || n_r6 == 0 || n_switch < 2 || n_sleep == 0 || n_zero == 0 || n_skip == 0 ||
        n_bypass == 0 || n_pix == 0 || n_qstall == 0 || n_install == 0 || n_rstall == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
