// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// level, full and empty flags.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [3:0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  always #5 clk = ~clk;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // compare model state before the edge
      checks++;
      if (level != 4'(q.size()) || in_ready != (q.size() < D) || out_valid != (q.size() != 0)
          || (q.size() != 0 && out_data != q[0])) begin
        failures++;
        $display("FAIL n=%0d level=%0d model=%0d", n, level, q.size());
      end
      in_valid  = ($urandom % 100) < ((n / 500) % 2 ? 70 : 30);
      out_ready = ($urandom % 100) < ((n / 500) % 2 ? 30 : 70);
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    automatic logic push = in_valid && in_ready;
    automatic logic pop  = out_valid && out_ready;
    if (pop)  void'(q.pop_front());
    if (push) q.push_back(in_data);
  end
endmodule
