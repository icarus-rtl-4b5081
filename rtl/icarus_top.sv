// icarus_top: single-core ICARUS NeRF rendering co-processor.
//
// The host programs the core through three AXI4-Lite registers (icarus_regs):
// instructions written to the Op register queue up in a 16-entry instruction
// FIFO that the plenoptic core's state machine fetches from while the run bit of
// the Ctrl register is set; the Stat register reports busy/done, the opcode in
// progress and the queue level. Model data and samples arrive on a 64-bit
// valid/ready stream (where the platform's DMA reads them from DRAM) and
// rendered pixels leave on a 64-bit valid/ready stream. The configuration is the
// one the paper builds and evaluates: one plenoptic core (PEU, MLP engine, VRU).
// The multi-core on-chip network, DMA, AXI interconnect and DRAM of the
// prototype platform are outside this module.
module icarus_top
  import icarus_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite register port
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
  // data in (model, frequencies, samples)
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [STREAM_W-1:0] in_data,
  // data out (pixels or network outputs)
  output logic                out_valid,
  input  logic                out_ready,
  output logic [STREAM_W-1:0] out_data
);
  logic run_enable, clear_done, op_push, op_room;
  logic [STREAM_W-1:0] op_data;
  logic busy, done;
  opcode_e cur_op;

  logic q_valid, q_ready;
  logic [STREAM_W-1:0] q_data;
  logic [4:0] q_level;

  icarus_regs u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .run_enable, .clear_done, .op_push, .op_data, .op_room,
    .st_busy(busy), .st_done(done), .st_op(cur_op), .st_queued(8'(q_level)));

  sync_fifo #(.WIDTH(STREAM_W), .DEPTH(16)) u_opq (
    .clk, .rst_n, .in_valid(op_push), .in_ready(op_room), .in_data(op_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .level(q_level));

  plcore u_core (
    .clk, .rst_n, .enable(run_enable), .clear_done,
    .instr_valid(q_valid), .instr(instr_t'(q_data)), .instr_ready(q_ready),
    .s_valid(in_valid), .s_ready(in_ready), .s_data(in_data),
    .m_valid(out_valid), .m_ready(out_ready), .m_data(out_data),
    .busy, .done, .cur_op);
endmodule
