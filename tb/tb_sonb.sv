// tb_sonb: a 3-chunk dot product per sample (input width 3N, N = 16 lanes,
// batch 5) with exact products, bias and 16-bit re-quantization, against an
// integer model; checks the 3-cycle latency.
module tb_sonb;
  import icarus_pkg::*;
  localparam int N = 16, NB = 8, B = 5;
  logic clk = 0, rst_n = 0;
  logic wload = 0, valid = 0, first = 0, last = 0;
  wgt_t [N-1:0] wdata = '0;
  act_t [N-1:0] x = '0;
  logic [2:0] b = 0;
  logic signed [BIAS_W-1:0] bias = 0;
  logic y_valid, busy;
  logic [2:0] y_b;
  logic signed [OUT_W-1:0] y;
  int checks = 0, failures = 0, cyc = 0, t_issue [B];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  sonb #(.N(N), .NB(NB)) dut (.*);

  wgt_t W [3*N];
  act_t X [B][3*N];

  function automatic int quant(longint acc, int bs);
    longint v = ((acc + 64) >>> 7) + bs;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && y_valid) begin
    longint acc;
    acc = 0;
    for (int c = 0; c < 3 * N; c++)
      acc += longint'(X[y_b][c]) * (W[c][8] ? -1 : 1) * longint'(W[c][7:0]);
    checks++;
    if (y != quant(acc, bias)) begin
      failures++; $display("FAIL b=%0d got %0d exp %0d", y_b, y, quant(acc, bias));
    end
    checks++;
    if (cyc - t_issue[y_b] != 3) begin failures++; $display("FAIL latency %0d", cyc - t_issue[y_b]); end
  end

  initial begin
    bias = BIAS_W'($signed(12'($urandom)));
    for (int c = 0; c < 3 * N; c++) W[c] = wgt_t'($urandom);
    for (int s = 0; s < B; s++)
      for (int c = 0; c < 3 * N; c++) X[s][c] = act_t'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 3; ch++) begin
      @(negedge clk);
      wload = 1;
      for (int c = 0; c < N; c++) wdata[c] = W[ch*N + c];
      @(negedge clk); wload = 0;
      for (int s = 0; s < B; s++) begin
        valid = 1; b = 3'(s); first = (ch == 0); last = (ch == 2);
        for (int c = 0; c < N; c++) x[c] = X[s][ch*N + c];
        t_issue[s] = cyc;
        @(negedge clk);
      end
      valid = 0;
      while (busy) @(negedge clk);
    end
    if (checks != 2 * B) begin failures++; $display("FAIL only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
