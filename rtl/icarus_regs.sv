// icarus_regs: the three host-addressable registers of ICARUS on an AXI4-Lite
// slave port (64-bit data).
//
//   0x00 Ctrl (write only)  bit 0: run enable, bit 1: clear done (self-clearing)
//   0x08 Op   (write only)  64-bit instruction; each write queues one instruction
//   0x10 Stat (read only)   bit 0 busy, bit 1 done, bits 7:4 current opcode,
//                           bits 15:8 instructions waiting in the queue
// The paper's prototype has exactly these three registers (two write-only for
// instructions and control, one read-only for state) behind an AXI port; the
// bit assignments and the AXI4-Lite subset are this design's choice. Reads of
// a write-only register and writes to the read-only one answer SLVERR.
// A write is accepted when AW and W are both valid, in one cycle; an Op write
// waits while the instruction queue is full. One response is outstanding at a
// time. Byte strobes are ignored (whole-register writes).
module icarus_regs
  import icarus_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [7:0]          s_awaddr,
  input  logic                s_wvalid,
  output logic                s_wready,
  input  logic [STREAM_W-1:0] s_wdata,
  output logic                s_bvalid,
  input  logic                s_bready,
  output logic [1:0]          s_bresp,
  input  logic                s_arvalid,
  output logic                s_arready,
  input  logic [7:0]          s_araddr,
  output logic                s_rvalid,
  input  logic                s_rready,
  output logic [STREAM_W-1:0] s_rdata,
  output logic [1:0]          s_rresp,
  // to the core
  output logic                run_enable,
  output logic                clear_done,
  output logic                op_push,
  output logic [STREAM_W-1:0] op_data,
  input  logic                op_room,
  input  logic                st_busy,
  input  logic                st_done,
  input  logic [3:0]          st_op,
  input  logic [7:0]          st_queued
);
  localparam logic [7:0] A_CTRL = 8'h00, A_OP = 8'h08, A_STAT = 8'h10;

  logic wr_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid && (s_awaddr != A_OP || op_room);
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_arready = !s_rvalid;
  assign op_push   = wr_go && s_awaddr == A_OP;
  assign op_data   = s_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_enable <= 1'b0; clear_done <= 1'b0;
      s_bvalid <= 1'b0; s_bresp <= 2'b00;
      s_rvalid <= 1'b0; s_rdata <= '0; s_rresp <= 2'b00;
    end else begin
      clear_done <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        s_bresp  <= (s_awaddr == A_CTRL || s_awaddr == A_OP) ? 2'b00 : 2'b10;
        if (s_awaddr == A_CTRL) begin
          run_enable <= s_wdata[0];
          clear_done <= s_wdata[1];
        end
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        if (s_araddr == A_STAT) begin
          s_rdata <= {48'h0, st_queued, st_op, 2'b00, st_done, st_busy};
          s_rresp <= 2'b00;
        end else begin
          s_rdata <= '0;
          s_rresp <= 2'b10;
        end
      end
    end
  end

  // AXI rules the slave relies on: a master keeps a request valid until taken
  a_aw_stable: assume property (@(posedge clk) disable iff (!rst_n)
                                s_awvalid && !s_awready |=> s_awvalid);
  a_ar_stable: assume property (@(posedge clk) disable iff (!rst_n)
                                s_arvalid && !s_arready |=> s_arvalid);
  // and the slave holds a response until it is taken
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
