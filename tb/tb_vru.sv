// tb_vru: sends 150 rays of random length (1..24 samples, back to back, with a
// few idle cycles) into the volume rendering unit and compares every pixel
// with a real-number model of C = sum T_i (1 - exp(-relu(sigma_i) delta_i))
// sigmoid(c_i), using the same piecewise-linear sigmoid. Tolerance: 0.4% of
// full scale (fixed-point rounding of T and exp over up to 24 samples).
// Checks the 20-cycle latency from a ray's last sample to its pixel and that
// T and C restart at every ray.
module tb_vru;
  import icarus_pkg::*;
  localparam int LAT = 20, NR = 150;
  logic clk = 0, rst_n = 0, in_valid = 0, last = 0, pix_valid, busy;
  logic signed [OUT_W-1:0] sigma = 0;
  logic signed [OUT_W-1:0] c_raw [3];
  logic [DELTA_W-1:0] delta = 0;
  logic [UQ_W-1:0] pix [3];
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  vru dut (.*);

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

  real exp_q [3][$];
  int  t_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && pix_valid) begin
    real ex [3];
    automatic int t = t_q.pop_front();
    for (int k = 0; k < 3; k++) ex[k] = exp_q[k].pop_front();
    checks++;
    for (int k = 0; k < 3; k++)
      if (fabs(real'(pix[k]) / 32768.0 - ex[k]) > 0.004) begin
        failures++; $display("FAIL ch%0d got %f exp %f", k, real'(pix[k]) / 32768.0, ex[k]);
      end
    if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    for (int k = 0; k < 3; k++) c_raw[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ray = 0; ray < NR; ray++) begin
      automatic int len = 1 + $urandom % 24;
      automatic real T = 1.0;
      automatic real C [3] = '{0.0, 0.0, 0.0};
      for (int i = 0; i < len; i++) begin
        real sr, dr, al;
        @(negedge clk);
        sigma = OUT_W'($signed(12'($urandom)));            // -8 .. +8
        if (ray % 5 == 0) sigma = OUT_W'($urandom % 256); // thin rays
        delta = DELTA_W'(1024 + $urandom % 4096);            // 0.25 .. 1.25
        for (int k = 0; k < 3; k++) c_raw[k] = OUT_W'($signed(11'($urandom)));
        last = (i == len - 1);
        in_valid = 1;
        sr = (sigma < 0) ? 0.0 : real'(sigma) / 256.0;
        dr = real'(delta) / 4096.0;
        al = 1.0 - $exp(-sr * dr);
        for (int k = 0; k < 3; k++) C[k] += T * al * sig(real'(c_raw[k]) / 256.0);
        T = T * (1.0 - al);
        if (last) begin
          for (int k = 0; k < 3; k++) exp_q[k].push_back(C[k]);
          t_q.push_back(cyc);
        end
      end
      if (ray % 7 == 3) begin @(negedge clk); in_valid = 0; last = 0; end
    end
    @(negedge clk) in_valid = 0; last = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    if (checks != NR) begin failures++; $display("FAIL %0d pixels of %0d", checks, NR); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
