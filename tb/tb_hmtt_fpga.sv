// tb_hmtt_fpga -- end-to-end test of the whole tracer FPGA with a small TX
// FIFO (1K words), short frames (64 words), a short flush timeout and a low
// hot-page threshold, so that FIFO overflow, drops, flushes and hot pages
// all occur in a short run. The stimulus, reference model and checks are
// described in hmtt_e2e_body.svh.
module tb_hmtt_fpga;
  import hmtt_pkg::*;
  localparam int P_FIFO  = 1024;
  localparam int P_FW    = 64;
  localparam int P_FLUSH = 256;
  localparam int P_HOT   = 16;
  localparam int P_BURST = 12000;
  localparam int P_SCALE = 1;

  hmtt_fpga #(
    .FIFO_DEPTH(P_FIFO), .NUM_GE(3), .FRAME_WORDS(P_FW), .FLUSH_CYCLES(P_FLUSH),
    .LRU_DEPTH(128), .HOT_THRESH(P_HOT)
  ) dut (.*);

`include "hmtt_e2e_body.svh"
endmodule
