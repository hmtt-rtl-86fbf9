// tx_fifo_unit -- TX FIFO Unit (TFU).
// Collects everything that leaves the board -- trace records from the DSMU,
// statistics records from the Statistic Unit and hot-page records from the
// RDHPU -- into one DEPTH-entry (16K in the paper), 32-bit FIFO that also
// moves the words from the memory clock to the transmit clock. The large
// depth absorbs the bursts of memory traffic that the Ethernet links cannot
// follow at once. Sources use a valid/ready handshake; one word is written
// per memory clock, chosen by fixed priority trace > statistics > hot page
// (the priority is this design's choice). A hot-page record is held in a
// one-word register until it gets its turn; if a second one arrives first it
// is lost and hot_lost counts it. The read side is first-word-fall-through
// in the transmit clock. max_level keeps the highest fill level seen, to show
// how close a run came to losing trace.
module tx_fifo_unit
  import hmtt_pkg::*;
#(
  parameter int DEPTH = 16384
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  trc_valid,
  input  logic [TRACE_W-1:0]    trc_data,
  output logic                  trc_ready,
  input  logic                  st_valid,
  input  logic [TRACE_W-1:0]    st_data,
  output logic                  st_ready,
  input  logic                  hot_valid,
  input  logic [PAGE_W-1:0]     hot_page,
  output logic [15:0]           hot_lost,
  output logic [$clog2(DEPTH):0] max_level,
  input  logic                  tx_clk,
  input  logic                  tx_rst_n,
  output logic                  rd_valid,
  output logic [TRACE_W-1:0]    rd_data,
  input  logic                  rd_en
);
  logic                 full, empty, wr_en;
  logic [TRACE_W-1:0]   wdata;
  logic [$clog2(DEPTH):0] level;
  logic                 hot_pend, hot_take;
  logic [PAGE_W-1:0]    hot_q;

  always_comb begin
    trc_ready = !full;
    st_ready  = !full && !trc_valid;
    hot_take  = !full && !trc_valid && !st_valid && hot_pend;
    wr_en     = trc_valid || (st_valid && st_ready) || hot_take;
    if (trc_valid)     wdata = trc_data;
    else if (st_valid) wdata = st_data;
    else               wdata = sp_word(SP_HOT, 28'(hot_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hot_pend  <= 1'b0;
      hot_q     <= '0;
      hot_lost  <= '0;
      max_level <= '0;
    end else begin
      if (hot_valid) begin
        if (hot_pend && !hot_take && hot_lost != '1) hot_lost <= hot_lost + 16'd1;
        hot_pend <= 1'b1;
        hot_q    <= hot_page;
      end else if (hot_take) hot_pend <= 1'b0;
      if (level > max_level) max_level <= level;
    end
  end

  async_fifo #(.WIDTH(TRACE_W), .DEPTH(DEPTH)) u_fifo (
    .wclk(clk), .wrst_n(rst_n), .wr_en(wr_en && !full), .wdata, .full, .wlevel(level),
    .rclk(tx_clk), .rrst_n(tx_rst_n), .rd_en, .rdata(rd_data), .empty
  );
  assign rd_valid = !empty;
endmodule
