// tb_monb: a 2-chunk layer (input width 2N) on a reduced MONB (N = 16 lanes,
// batch 6): loads the two weight tiles in turn, streams the batch for each, and
// compares every output neuron with an integer model of the approximated
// products, bias, ReLU and re-quantization. Also checks the 4-cycle latency.
module tb_monb;
  import icarus_pkg::*;
  localparam int N = 16, NB = 8, B = 6;
  logic clk = 0, rst_n = 0;
  logic wload = 0, valid = 0, first = 0, last = 0, relu = 1;
  logic [3:0] wcol = 0;
  wgt_t [N-1:0] wdata = '0;
  act_t [N-1:0] x = '0;
  logic [2:0] b = 0;
  logic signed [BIAS_W-1:0] bias [N];
  logic y_valid, busy;
  logic [2:0] y_b;
  act_t [N-1:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  monb #(.N(N), .NB(NB)) dut (.*);

  wgt_t W [N][2*N];        // W[row][input]
  act_t X [B][2*N];
  int   cyc = 0, t_issue [B];
  always @(posedge clk) cyc++;

  function automatic int approx(int d);
    return (d >= 9 && (d % 2 == 1)) ? d - 1 : d;
  endfunction
  function automatic int prod(int xv, wgt_t w);
    return (w[8] ? -1 : 1) * xv * (16 * approx(w[7:4]) + approx(w[3:0]));
  endfunction
  function automatic int quant(longint acc, int bs, bit r);
    longint v = ((acc + 64) >>> 7) + bs;
    if (r && v < 0) v = 0;
    if (v > 2047) v = 2047;
    if (v < -2048) v = -2048;
    return int'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && y_valid) begin
    for (int r = 0; r < N; r++) begin
      longint acc;
      act_t yr;
      acc = 0;
      yr = y[r];
      for (int c = 0; c < 2 * N; c++) acc += prod(X[y_b][c], W[r][c]);
      checks++;
      if (yr != act_t'(quant(acc, bias[r], relu))) begin
        failures++;
        $display("FAIL b=%0d r=%0d got %0d exp %0d", y_b, r, yr, quant(acc, bias[r], relu));
      end
    end
    checks++;
    if (cyc - t_issue[y_b] != 4) begin
      failures++; $display("FAIL latency %0d", cyc - t_issue[y_b]);
    end
  end

  initial begin
    for (int r = 0; r < N; r++) begin
      bias[r] = BIAS_W'($signed(10'($urandom)));
      for (int c = 0; c < 2 * N; c++) W[r][c] = wgt_t'($urandom);
    end
    for (int s = 0; s < B; s++)
      for (int c = 0; c < 2 * N; c++) X[s][c] = ((s + c) % 11 == 0) ? '0 : act_t'($signed(10'($urandom)));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 2; ch++) begin
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        wload = 1; wcol = 4'(c);
        for (int r = 0; r < N; r++) wdata[r] = W[r][ch*N + c];
      end
      @(negedge clk); wload = 0;
      for (int s = 0; s < B; s++) begin
        valid = 1; b = 3'(s); first = (ch == 0); last = (ch == 1);
        for (int c = 0; c < N; c++) x[c] = X[s][ch*N + c];
        t_issue[s] = cyc;
        @(negedge clk);
      end
      valid = 0;
      while (busy) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    if (checks != B * (N + 1)) begin failures++; $display("FAIL only %0d checks", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
