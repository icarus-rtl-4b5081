// tb_cordic_sincos: streams one random phase per cycle (plus the four axis
// angles) through the sin/cos CORDIC and compares each result with the real
// sin/cos within 3 LSB of the 8-fraction-bit output. Checks the 18-cycle
// latency and that the tag travels with its phase.
module tb_cordic_sincos;
  import icarus_pkg::*;
  localparam int LAT = 18, NV = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [PHASE_W-1:0] phase = 0;
  logic [11:0] in_tag = 0, out_tag;
  act_t cos_o, sin_o;
  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  cordic_sincos #(.TAG_W(12)) dut (.*);

  int ph_q [$], t_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int p = ph_q.pop_front();
    automatic int t = t_q.pop_front();
    automatic real ang = 2.0 * 3.14159265358979 * p / 65536.0;
    automatic real ec = $cos(ang) * 256.0, es = $sin(ang) * 256.0;
    checks++;
    if (fabs(real'(cos_o) - ec) > 3.0 || fabs(real'(sin_o) - es) > 3.0) begin
      failures++; $display("FAIL phase=%0d cos %0d (%f) sin %0d (%f)", p, cos_o, ec, sin_o, es);
    end
    if (out_tag != 12'(p) || cyc - t != LAT) begin
      failures++; $display("FAIL tag %0d latency %0d", out_tag, cyc - t);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk);
      in_valid = (n % 7 != 3);              // some idle cycles
      phase = (n < 4) ? PHASE_W'(n * 16384) : PHASE_W'($urandom);
      in_tag = 12'(phase);
      if (in_valid) begin ph_q.push_back(int'(phase)); t_q.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    if (ph_q.size() != 0) begin failures++; $display("FAIL %0d results missing", ph_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
