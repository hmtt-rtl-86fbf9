// hmtt_fpga -- the FPGA of the Memory Trace Board (MTB).
// The board sits in a DIMM slot of the traced machine and carries that
// machine's memory module; the FPGA sees the DIMM's command and address pins
// and turns every READ/WRITE into a 32-bit trace record that leaves over
// NUM_GE Gigabit Ethernet ports. Software on the traced machine steers the
// tracer, and marks high-level events in the trace, by reading addresses in a
// reserved configuration space at the top of the DIMM.
//
//  DDR pins -> ddr_cmd_buffer (DCBU) --buffered cmd--+-> config_unit (CU)
//                                                    +-> ddr_state_machine_unit (DSMU)
//  CU  --mode, clear, tags--> DSMU, RDHPU, SU
//  DSMU --raw trace--> rdhpu (RDHPU) --reuse distance--> statistic_unit (SU)
//  DSMU --raw trace--> SU
//  DSMU trace, SU statistics, RDHPU hot pages -> tx_fifo_unit (TFU, 16K words,
//       memory clock -> transmit clock) -> tx_thread_unit -> NUM_GE x gmac_tx
//
// Two clocks: `clk` is the DDR command clock (half the data rate, e.g.
// 100 MHz for DDR-200) and `tx_clk` the 125 MHz GMII clock, each with its own
// active-low asynchronous reset. The two optional online-analysis units can
// be left out with EN_RDHPU / EN_SU = 0, as the paper's board can be
// reconfigured without them. Latency from the DDR pins to the TX FIFO input
// is four memory clocks (two in the DCBU, one in the bank state machines,
// one through the DSMU queue).
// user_event pulses for each configuration-space read in the user-defined
// event area; it is where an interrupt to the traced machine for on-line
// feedback would attach (the paper mentions such feedback without giving its
// interface). frames_sent counts the frames each MAC has finished.
// Lint note: the resets are used asynchronously by the flip-flops and, in
// the assertions' `disable iff`, synchronously; that second use is only in
// the assertions.
module hmtt_fpga
  import hmtt_pkg::*;
#(
  parameter int FIFO_DEPTH   = 16384,
  parameter int NUM_GE       = 3,
  parameter int FRAME_WORDS  = 256,
  parameter int FLUSH_CYCLES = 1024,
  parameter int LRU_DEPTH    = 128,
  parameter int HOT_THRESH   = 64,
  parameter bit EN_RDHPU     = 1'b1,
  parameter bit EN_SU        = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // snooped DIMM command bus
  input  logic               ddr_cs_n,
  input  logic               ddr_ras_n,
  input  logic               ddr_cas_n,
  input  logic               ddr_we_n,
  input  logic [BANK_W-1:0]  ddr_ba,
  input  logic [ABUS_W-1:0]  ddr_a,
  // Statistic Unit interval in memory clocks (0 = no reports)
  input  logic [26:0]        stat_interval,
  // status
  output work_mode_e         mode,
  output logic [15:0]        drop_count,
  output logic               user_event,     // pulse: a user-defined event tag
  output logic [15:0]        stat_skipped,
  output logic [15:0]        hot_lost,
  output logic [$clog2(FIFO_DEPTH):0] fifo_max_level,
  // transmit side
  input  logic               tx_clk,
  input  logic               tx_rst_n,
  output logic [7:0]         gmii_txd   [NUM_GE],
  output logic [NUM_GE-1:0]  gmii_tx_en,
  output logic [NUM_GE-1:0]  gmii_tx_er,
  output logic [31:0]        frames_built,
  output logic [31:0]        frames_sent [NUM_GE]
);
  ddr_cmd_t               cmd;
  logic                   clear, tag_valid;
  logic [CFG_IDX_W-1:0]   tag_idx;
  logic                   trc_valid, trc_ready;
  logic [TRACE_W-1:0]     trc_data;
  logic                   raw_valid;
  ref_t                   raw_ref;
  logic                   rd_valid, rd_miss;
  logic [$clog2(LRU_DEPTH)-1:0] rd_dist;
  logic                   hot_valid;
  logic [PAGE_W-1:0]      hot_page;
  logic                   st_valid, st_ready;
  logic [TRACE_W-1:0]     st_data;
  logic                   f_valid, f_rd;
  logic [TRACE_W-1:0]     f_data;

  ddr_cmd_buffer u_dcbu (
    .clk, .rst_n, .cs_n(ddr_cs_n), .ras_n(ddr_ras_n), .cas_n(ddr_cas_n),
    .we_n(ddr_we_n), .ba(ddr_ba), .a(ddr_a), .cmd
  );

  config_unit u_cu (
    .clk, .rst_n, .cmd, .mode, .clear, .tag_valid, .tag_idx, .user_event
  );

  ddr_state_machine_unit u_dsmu (
    .clk, .rst_n, .cmd, .mode, .clear, .tag_valid, .tag_idx,
    .out_valid(trc_valid), .out_data(trc_data), .out_ready(trc_ready),
    .raw_valid, .raw_ref, .drop_count
  );

  if (EN_RDHPU) begin : g_rdhpu
    rdhpu #(.DEPTH(LRU_DEPTH), .HOT_THRESH(HOT_THRESH)) u_rdhpu (
      .clk, .rst_n, .clear, .ref_valid(raw_valid),
      .ref_page(raw_ref.line[LINE_W-1 -: PAGE_W]),
      .rd_valid, .rd_miss, .rd_dist, .hot_valid, .hot_page
    );
  end else begin : g_no_rdhpu
    assign rd_valid = 1'b0; assign rd_miss = 1'b0; assign rd_dist = '0;
    assign hot_valid = 1'b0; assign hot_page = '0;
  end

  if (EN_SU) begin : g_su
    statistic_unit #(.RD_W($clog2(LRU_DEPTH))) u_su (
      .clk, .rst_n, .clear, .enable(mode != MODE_OFF), .interval(stat_interval),
      .raw_valid, .raw_ref, .rd_valid, .rd_miss, .rd_dist,
      .out_valid(st_valid), .out_data(st_data), .out_ready(st_ready),
      .skipped(stat_skipped)
    );
  end else begin : g_no_su
    assign st_valid = 1'b0; assign st_data = '0; assign stat_skipped = '0;
  end

  tx_fifo_unit #(.DEPTH(FIFO_DEPTH)) u_tfu (
    .clk, .rst_n,
    .trc_valid, .trc_data, .trc_ready,
    .st_valid, .st_data, .st_ready,
    .hot_valid, .hot_page, .hot_lost, .max_level(fifo_max_level),
    .tx_clk, .tx_rst_n, .rd_valid(f_valid), .rd_data(f_data), .rd_en(f_rd)
  );

  logic [NUM_GE-1:0] m_valid, m_last, m_ready;
  logic [7:0]        m_data [NUM_GE];

  tx_thread_unit #(.NUM_GE(NUM_GE), .FRAME_WORDS(FRAME_WORDS), .FLUSH_CYCLES(FLUSH_CYCLES)) u_ttu (
    .clk(tx_clk), .rst_n(tx_rst_n), .rd_valid(f_valid), .rd_data(f_data), .rd_en(f_rd),
    .m_valid, .m_data, .m_last, .m_ready, .frames_built
  );

  for (genvar g = 0; g < NUM_GE; g++) begin : g_mac
    gmac_tx u_gmac (
      .clk(tx_clk), .rst_n(tx_rst_n),
      .s_valid(m_valid[g]), .s_data(m_data[g]), .s_last(m_last[g]), .s_ready(m_ready[g]),
      .gmii_txd(gmii_txd[g]), .gmii_tx_en(gmii_tx_en[g]), .gmii_tx_er(gmii_tx_er[g]),
      .frames_sent(frames_sent[g])
    );
  end
endmodule
