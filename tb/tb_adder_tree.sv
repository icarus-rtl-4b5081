// tb_adder_tree: random and extreme inputs against a plain sum, with the
// one-cycle latency checked.
module tb_adder_tree;
  localparam int N = 64, IW = 21;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IW-1:0] in [N];
  logic signed [IW+5:0] sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  adder_tree #(.N(N), .IN_W(IW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_sum;
    for (int i = 0; i < N; i++) in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ref_sum = 0;
      for (int i = 0; i < N; i++) begin
        in[i] = (n == 0) ? -(1 <<< (IW-1)) : (n == 1) ? (1 <<< (IW-1)) - 1 : IW'($urandom);
        ref_sum += longint'(in[i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || longint'(sum) != ref_sum) begin
        failures++; $display("FAIL n=%0d got %0d expected %0d", n, sum, ref_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
