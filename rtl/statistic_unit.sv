// statistic_unit -- Statistic Unit (SU).
// Counts memory events over a programmable interval (the paper quotes 1 us
// to 1 s; here `interval` memory clocks, 0 = off) and reports them:
//   index 0          read references        } memory bandwidth
//   index 1          write references       }
//   index 2..5       references per bank      (bank behaviour)
//   index 6..28      references on which line-address bit i differs from
//                    the previous reference  (address bits change)
//   index 29..37     reuse-distance histogram from the RDHPU: bin 0 = 0,
//                    bin k = [2^(k-1), 2^k) for k = 1..7, bin 8 = miss
// At the end of an interval the counters are copied into a snapshot and
// cleared, and the snapshot leaves as 32-bit statistics records: first a
// header (SP_STAT_LO, index 0xFF, interval number), then for each counter a
// SP_STAT_LO word (low 20 bits) and a SP_STAT_HI word (high 12 bits), one per
// clock while out_ready. If an interval ends while the previous snapshot is
// still being sent, that report is skipped and `skipped` counts it.
// Counting runs while `enable` (work mode not OFF). `clear` zeroes all.
// The paper names the kinds of statistics; the exact counter set, histogram
// bins and record layout are this design's.
// Lint note: raw_ref.cfg is unused; raw references never have it set.
module statistic_unit
  import hmtt_pkg::*;
#(
  parameter int CNT_W = 32,
  parameter int IV_W  = 27,              // up to 1 s at 100 MHz
  parameter int RD_W  = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                enable,
  input  logic [IV_W-1:0]     interval,
  input  logic                raw_valid,
  input  ref_t                raw_ref,
  input  logic                rd_valid,
  input  logic                rd_miss,
  input  logic [RD_W-1:0]     rd_dist,
  output logic                out_valid,
  output logic [TRACE_W-1:0]  out_data,
  input  logic                out_ready,
  output logic [15:0]         skipped
);
  localparam int I_RD   = 0;
  localparam int I_WR   = 1;
  localparam int I_BANK = 2;
  localparam int I_BIT  = I_BANK + NUM_BANKS;     // 6
  localparam int I_HIST = I_BIT + LINE_W;         // 29
  localparam int NBIN   = RD_W + 2;               // 9
  localparam int NCNT   = I_HIST + NBIN;          // 38
  localparam int NWORD  = 1 + 2 * NCNT;
  localparam int W_W    = $clog2(NWORD + 1);
  localparam int CI_W   = $clog2(NCNT);

  logic [CNT_W-1:0]  cnt  [NCNT];
  logic [CNT_W-1:0]  snap [NCNT];
  logic [NCNT-1:0]   inc;
  logic [LINE_W-1:0] prev_line;
  logic [IV_W-1:0]   tmr;
  logic              iv_end, busy;
  logic [W_W-1:0]    widx;
  logic [19:0]       seq;
  logic [BANK_W-1:0] bank;

  assign bank   = raw_ref.line[COL_W-BL_LOG2 +: BANK_W];
  assign iv_end = enable && (interval != '0) && (tmr >= interval - IV_W'(1));

  always_comb begin
    inc = '0;
    if (raw_valid) begin
      inc[I_RD] = !raw_ref.write;
      inc[I_WR] =  raw_ref.write;
      inc[I_BANK + int'(bank)] = 1'b1;
      for (int i = 0; i < LINE_W; i++)
        inc[I_BIT + i] = raw_ref.line[i] ^ prev_line[i];
    end
    if (rd_valid && enable) begin
      if (rd_miss)            inc[I_HIST + NBIN - 1] = 1'b1;
      else if (rd_dist == '0) inc[I_HIST] = 1'b1;
      else begin
        for (int k = RD_W-1; k >= 0; k--)
          if (rd_dist[k]) begin
            inc[I_HIST + k + 1] = 1'b1;
            break;
          end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCNT; i++) begin cnt[i] <= '0; snap[i] <= '0; end
      prev_line <= '0;
      tmr       <= '0;
      busy      <= 1'b0;
      widx      <= '0;
      seq       <= '0;
      skipped   <= '0;
    end else if (clear) begin
      for (int i = 0; i < NCNT; i++) cnt[i] <= '0;
      prev_line <= '0;
      tmr       <= '0;
      busy      <= 1'b0;
      widx      <= '0;
      seq       <= '0;
      skipped   <= '0;
    end else begin
      if (raw_valid) prev_line <= raw_ref.line;
      if (enable) tmr <= iv_end ? '0 : tmr + IV_W'(1);
      for (int i = 0; i < NCNT; i++) begin
        if (iv_end)      cnt[i] <= '0;
        else if (inc[i]) cnt[i] <= cnt[i] + CNT_W'(1);
      end
      if (iv_end) begin
        if (!busy) begin
          for (int i = 0; i < NCNT; i++) snap[i] <= cnt[i] + CNT_W'(inc[i]);
          busy <= 1'b1;
          widx <= '0;
        end else if (skipped != '1) skipped <= skipped + 16'd1;
        seq <= seq + 20'd1;
      end
      if (busy && out_ready) begin
        if (widx == W_W'(NWORD - 1)) busy <= 1'b0;
        widx <= widx + W_W'(1);
      end
    end
  end

  // word selection
  logic [W_W-1:0]   k;
  logic [7:0]       ci;
  logic [CNT_W-1:0] val;
  always_comb begin
    k   = widx - W_W'(1);
    ci  = 8'(k >> 1);
    val = (ci < 8'(NCNT)) ? snap[CI_W'(ci)] : '0;
    if (widx == '0)
      out_data = sp_word(SP_STAT_LO, {8'hFF, seq - 20'd1});
    else if (!k[0])
      out_data = sp_word(SP_STAT_LO, {ci, val[19:0]});
    else
      out_data = sp_word(SP_STAT_HI, {ci, 20'(val >> 20)});
  end
  assign out_valid = busy;
endmodule
