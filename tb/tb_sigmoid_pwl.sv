// tb_sigmoid_pwl: sweeps all 65536 inputs of the piecewise-linear sigmoid and
// checks that each output is within 0.0195 of the real sigmoid, that the curve
// never drops by more than the 0.004 step PLAN has at |x| = 2.375 (and nowhere
// else), and the symmetry y(-x) = 1 - y(x).
module tb_sigmoid_pwl;
  import icarus_pkg::*;
  logic signed [OUT_W-1:0] x, xn;
  logic [UQ_W-1:0] y, yn;
  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction
  int checks = 0, failures = 0;
  sigmoid_pwl dut (.x, .y);
  sigmoid_pwl dut_n (.x(xn), .y(yn));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev = -1;
    for (int v = -32767; v < 32768; v++) begin
      real xr, er;
      x = OUT_W'(v); xn = OUT_W'(-v);
      #1;
      xr = real'(v) / 256.0;
      er = 32768.0 / (1.0 + $exp(-xr));
      checks++;
      if (fabs(real'(y) - er) > 0.0195 * 32768.0) begin
        failures++; $display("FAIL x=%f got %0d exp %f", xr, y, er);
      end
      if (int'(y) < prev && !((v == 608 || v == -607) && prev - int'(y) <= 128)) begin failures++; $display("FAIL not monotonic at x=%f", xr); end
      if (int'(y) + int'(yn) != 32768) begin failures++; $display("FAIL symmetry at x=%f", xr); end
      prev = int'(y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
