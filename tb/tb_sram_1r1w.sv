// tb_sram_1r1w: checks the SRAM model against a reference array: one-cycle read
// latency, output held while re=0, old data on a same-address read/write.
module tb_sram_1r1w;
  localparam int D = 64, W = 24;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sram_1r1w #(.DEPTH(D), .WIDTH(W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] exp_v, input string what);
    checks++;
    if (rdata !== exp_v) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp_v);
    end
  endtask

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = W'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    // read back, one-cycle latency
    for (int a = 0; a < D; a++) begin
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0; check(ref_mem[a], "readback");
      @(negedge clk); check(ref_mem[a], "hold");
    end
    // random mixed traffic with collisions
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] expv;
      @(negedge clk);
      we = 1'($urandom); re = 1;
      waddr = 6'($urandom); raddr = ($urandom % 4 == 0) ? waddr : 6'($urandom);
      wdata = W'($urandom);
      expv = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk); we = 0; re = 0;
      check(expv, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
