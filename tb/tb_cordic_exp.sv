// tb_cordic_exp: streams random non-negative arguments (20 fraction bits,
// 0..17) through the exp(-a) unit and compares with the real exp(-a) within
// 8 LSB (0.025%) of the Q1.15 output, including a = 0 (result 1.0) and a >= 16 (0).
// Checks the 18-cycle latency and the tag.
module tb_cordic_exp;
  import icarus_pkg::*;
  localparam int LAT = 18, NV = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a = 0;
  logic [11:0] in_tag = 0, out_tag;
  logic [UQ_W-1:0] e;
  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  cordic_exp #(.TAG_W(12)) dut (.*);

  longint a_q [$];
  int t_q [$], g_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic longint av = a_q.pop_front();
    automatic int t = t_q.pop_front();
    automatic int g = g_q.pop_front();
    automatic real ee = (av >= (longint'(16) << 20)) ? 0.0 : $exp(-real'(av) / 1048576.0) * 32768.0;
    checks++;
    if (fabs(real'(e) - ee) > 8.0) begin
      failures++; $display("FAIL a=%f got %0d exp %f", real'(av) / 1048576.0, e, ee);
    end
    if (out_tag != 12'(g) || cyc - t != LAT) begin
      failures++; $display("FAIL tag %0d latency %0d", out_tag, cyc - t);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk);
      in_valid = (n % 5 != 2);
      case (n)
        0: a = 0;
        1: a = 32'd1;
        2: a = 32'(16) << 20;
        3: a = 32'hFFFF_FFFF;
        default: a = (n % 2) ? 32'($urandom % (17 << 20)) : 32'($urandom % (1 << 20));
      endcase
      in_tag = 12'(n);
      if (in_valid) begin a_q.push_back(longint'(a)); t_q.push_back(cyc); g_q.push_back(n); end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    if (a_q.size() != 0) begin failures++; $display("FAIL %0d results missing", a_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
