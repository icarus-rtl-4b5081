// tb_rmcm_pcm: checks the four subexpressions 1x, 3x, 5x, 7x for random
// activations, the zero flag, and that the registers hold on a zero input.
module tb_rmcm_pcm;
  import icarus_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, zero;
  act_t x = 0;
  logic signed [ACT_W+2:0] x1, x3, x5, x7;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rmcm_pcm dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi, last_nz;
    last_nz = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      valid = 1;
      xi = ($urandom % 5 == 0) ? 0 : $signed(12'($urandom));
      if (n < 2) xi = (n == 0) ? -2048 : 2047;
      x = act_t'(xi);
      @(negedge clk);
      valid = 0;
      checks++;
      if (xi == 0) begin
        if (!zero || x1 != last_nz || x7 != 7 * last_nz) begin
          failures++; $display("FAIL zero gating x=%0d", xi);
        end
      end else begin
        if (zero || x1 != xi || x3 != 3 * xi || x5 != 5 * xi || x7 != 7 * xi) begin
          failures++; $display("FAIL x=%0d got %0d %0d %0d %0d", xi, x1, x3, x5, x7);
        end
        last_nz = xi;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
