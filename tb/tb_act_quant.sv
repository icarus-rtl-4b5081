// tb_act_quant: bias, ReLU, rounding shift and saturation against an integer
// model, for the 12-bit activation output and the 16-bit network output.
module tb_act_quant;
  import icarus_pkg::*;
  logic signed [PSUM_W-1:0] acc;
  logic signed [BIAS_W-1:0] bias;
  logic relu;
  logic signed [ACT_W-1:0] y12;
  logic signed [OUT_W-1:0] y16;
  int checks = 0, failures = 0;
  act_quant #(.OUT_BITS(ACT_W)) dut12 (.acc, .bias, .relu, .y(y12));
  act_quant #(.OUT_BITS(OUT_W)) dut16 (.acc, .bias, .relu, .y(y16));

  function automatic longint model(longint a, longint b, bit r, int bits);
    longint v, mx, mn;
    v = ((a + 64) >>> 7) + b;
    if (r && v < 0) v = 0;
    mx = (64'sd1 <<< (bits - 1)) - 1;
    mn = -(64'sd1 <<< (bits - 1));
    if (v > mx) v = mx;
    if (v < mn) v = mn;
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      acc  = (n % 3 == 0) ? PSUM_W'($urandom) : PSUM_W'($signed(20'($urandom)));
      bias = BIAS_W'($urandom);
      relu = 1'($urandom);
      #1;
      checks++;
      if (longint'(y12) != model(acc, bias, relu, ACT_W) || longint'(y16) != model(acc, bias, relu, OUT_W)) begin
        failures++;
        $display("FAIL acc=%0d bias=%0d relu=%0d got %0d/%0d", acc, bias, relu, y12, y16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
