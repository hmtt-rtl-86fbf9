// tb_hmtt_fpga_full -- the same end-to-end test as tb_hmtt_fpga, on the top
// at its default sizes: 16K-word TX FIFO, 256-word frames, 1024-clock flush
// timeout, 128-entry LRU stack, hot threshold 64, three GE ports. The burst
// phase is long enough (200K back-to-back READs) to fill the 16K FIFO,
// since three GE links drain about 0.9 words per memory clock.
module tb_hmtt_fpga_full;
  import hmtt_pkg::*;
  localparam int P_FIFO  = 16384;
  localparam int P_FW    = 256;
  localparam int P_FLUSH = 1024;
  localparam int P_HOT   = 64;
  localparam int P_BURST = 200000;
  localparam int P_SCALE = 4;

  hmtt_fpga dut (.*);

`include "hmtt_e2e_body.svh"
endmodule
