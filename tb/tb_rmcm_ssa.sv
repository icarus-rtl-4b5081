// tb_rmcm_ssa: checks the approximated shift-add product against an
// independent model: each 4-bit weight digit d is replaced by d-1 when d is odd
// and at least 9 (9->8, 11->10, 13->12, 15->14) and the product is
// sign * x * (16*hi + lo). Includes the -78 example and zero gating.
module tb_rmcm_ssa;
  import icarus_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, zero = 0;
  logic signed [ACT_W+2:0] x1 = 0, x3 = 0, x5 = 0, x7 = 0;
  wgt_t w = 0;
  logic signed [PROD_W-1:0] p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rmcm_ssa dut (.*);

  function automatic int approx(int d);
    return (d >= 9 && (d % 2 == 1)) ? d - 1 : d;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi, hi, lo, s, expv;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      xi = $signed(12'($urandom));
      w  = wgt_t'($urandom);
      if (n == 0) begin xi = 1; w = 9'b1_0100_1110; end   // -78 example: 1x<<2, 7x<<1
      zero = (n % 7 == 3);
      x1 = 15'(xi); x3 = 15'(3 * xi); x5 = 15'(5 * xi); x7 = 15'(7 * xi);
      valid = 1;
      s = w[8]; hi = w[7:4]; lo = w[3:0];
      expv = zero ? 0 : (s ? -1 : 1) * xi * (16 * approx(hi) + approx(lo));
      @(negedge clk);
      valid = 0;
      checks++;
      if (p != expv) begin
        failures++; $display("FAIL x=%0d w=%b got %0d expected %0d", xi, w, p, expv);
      end
      if (n == 0 && p != -78) begin
        failures++; $display("FAIL -78 example gives %0d", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
