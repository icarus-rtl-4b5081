// tb_rmcm_block: loads a random weight column, streams activations and checks
// all 64 approximated products two cycles later; reloads the weights halfway.
module tb_rmcm_block;
  import icarus_pkg::*;
  localparam int R = 64;
  logic clk = 0, rst_n = 0, wload = 0, valid = 0, p_valid;
  wgt_t [R-1:0] wdata = '0;
  act_t x = 0;
  logic signed [PROD_W-1:0] p [R];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rmcm_block #(.ROWS(R)) dut (.*);

  function automatic int approx(int d);
    return (d >= 9 && (d % 2 == 1)) ? d - 1 : d;
  endfunction
  function automatic int prod(int xv, wgt_t w);
    return (w[8] ? -1 : 1) * xv * (16 * approx(w[7:4]) + approx(w[3:0]));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xs [$];
  initial begin
    wgt_t [R-1:0] wcur;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) wdata[r] = wgt_t'($urandom);
      wcur = wdata; wload = 1;
      @(negedge clk); wload = 0;
      for (int n = 0; n < 300; n++) begin
        // drive a new x each cycle; check the product of the previous x (two clock edges later)
        x = (n % 9 == 4) ? '0 : act_t'($urandom);
        valid = 1;
        xs.push_back(x);
        @(negedge clk);
        if (n >= 1) begin
          automatic int xo = xs.pop_front();
          checks++;
          if (!p_valid) begin failures++; $display("FAIL p_valid low"); end
          for (int r = 0; r < R; r++)
            if (p[r] != prod(xo, wcur[r])) begin
              failures++; $display("FAIL x=%0d r=%0d got %0d exp %0d", xo, r, p[r], prod(xo, wcur[r]));
              break;
            end
        end
      end
      valid = 0; xs.delete();
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
