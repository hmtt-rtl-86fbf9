// ddr_state_machine_unit -- DDR State Machine Unit (DSMU).
// Turns the interleaved multi-bank DDR command stream into trace records.
// One ddr_bank_fsm per bank follows ACTIVE/READ/WRITE and hands out
// <line address, r/w> one clock after each READ/WRITE. This unit adds the
// duration, the number of memory clocks since the previous timed record,
// in place of an absolute timestamp, and packs everything into 32-bit words
// (layout in hmtt_pkg):
//  * a reference outside the configuration space becomes a reference record
//    when the work mode is TRACE;
//  * a configuration-space reference is never recorded as such; instead the
//    Config Unit's synchronisation tag (same clock) becomes a tag record;
//  * when the duration does not fit in DUR_W bits, a SP_DUR_HI record with
//    the high bits precedes the record; if nothing is recorded for 2^35
//    clocks a SP_DUR_HI record with all ones is sent on its own.
// Records pass through a QDEPTH-word queue (up to two words enter per
// clock, one leaves per clock when out_ready). If the queue has no room the
// record is dropped, drop_count counts it and the duration keeps running so
// that later timestamps stay right. raw_valid/raw_ref give every normal
// reference (work mode not OFF) to the Statistic Unit and the RDHPU.
// `clear` (RESET_TRACING) restarts the duration count and drop count.
// The state machine and the duration/overflow scheme follow the paper; the
// bit layout, the queue and the drop policy are this design's.
// Lint note: the bank machines' state outputs (st) are left unused here;
// they exist for observation in simulation.
module ddr_state_machine_unit
  import hmtt_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ddr_cmd_t              cmd,
  input  work_mode_e            mode,
  input  logic                  clear,
  input  logic                  tag_valid,
  input  logic [CFG_IDX_W-1:0]  tag_idx,
  output logic                  out_valid,
  output logic [TRACE_W-1:0]    out_data,
  input  logic                  out_ready,
  output logic                  raw_valid,
  output ref_t                  raw_ref,
  output logic [15:0]           drop_count
);
  localparam int QA_W = $clog2(QDEPTH);

  // ---------------- bank state machines ----------------
  logic [NUM_BANKS-1:0] b_valid;
  ref_t                 b_ref [NUM_BANKS];
  logic                 cfg_hit;
  logic [COL_W-1:0]     col;

  assign cfg_hit = is_cfg_row(cmd.addr[ROW_W-1:0]);
  assign col     = col_of(cmd.addr);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [1:0] st;
    ddr_bank_fsm #(.BANK(BANK_W'(b))) u_fsm (
      .clk, .rst_n,
      .act    (cmd.bank == BANK_W'(b) && cmd.cmd == CMD_ACT),
      .rd     (cmd.bank == BANK_W'(b) && cmd.cmd == CMD_READ),
      .wr     (cmd.bank == BANK_W'(b) && cmd.cmd == CMD_WRITE),
      .row_in (cmd.addr[ROW_W-1:0]),
      .col_in (col),
      .cfg_hit(cfg_hit),
      .ref_valid(b_valid[b]),
      .ref_o  (b_ref[b]),
      .state_o(st)
    );
  end

  ref_t any_ref;
  logic any_valid;
  always_comb begin
    any_ref   = '0;
    any_valid = |b_valid;
    for (int b = 0; b < NUM_BANKS; b++)
      if (b_valid[b]) any_ref = b_ref[b];
  end

  assign raw_valid = any_valid && !any_ref.cfg && (mode != MODE_OFF);
  assign raw_ref   = any_ref;

  // ---------------- record formation ----------------
  logic [DURCNT_W-1:0] dur_cnt;
  logic                rec_valid;     // a timed record this clock
  logic [TRACE_W-1:0]  rec_word;
  logic                need_hi, sat;
  logic [TRACE_W-1:0]  w0, w1;
  logic [1:0]          npush;

  always_comb begin
    rec_valid = 1'b0;
    rec_word  = '0;
    if (tag_valid) begin
      rec_valid = 1'b1;
      rec_word  = sp_word(SP_TAG, {dur_cnt[DUR_W-1:0], {(28-DUR_W-CFG_IDX_W){1'b0}}, tag_idx});
    end else if (any_valid && !any_ref.cfg && mode == MODE_TRACE) begin
      rec_valid = 1'b1;
      rec_word  = ref_word(any_ref.write, dur_cnt[DUR_W-1:0], any_ref.line);
    end
    need_hi = |dur_cnt[DURCNT_W-1:DUR_W];
    sat     = &dur_cnt[DURCNT_W-1:DUR_W];
    w0 = '0; w1 = '0; npush = 2'd0;
    if (rec_valid) begin
      if (need_hi) begin
        w0 = sp_word(SP_DUR_HI, dur_cnt[DURCNT_W-1:DUR_W]);
        w1 = rec_word; npush = 2'd2;
      end else begin
        w0 = rec_word; npush = 2'd1;
      end
    end else if (sat) begin
      w0 = sp_word(SP_DUR_HI, dur_cnt[DURCNT_W-1:DUR_W]); npush = 2'd1;
    end
  end

  // ---------------- output queue ----------------
  logic [TRACE_W-1:0] q [QDEPTH];
  logic [QA_W-1:0]    q_rd, q_wr;
  logic [QA_W:0]      q_cnt;
  logic               pop, fits;

  assign out_valid = (q_cnt != '0);
  assign out_data  = q[q_rd];
  assign pop       = out_valid && out_ready;
  assign fits      = (int'(q_cnt) + int'(npush)) <= QDEPTH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dur_cnt    <= '0;
      q_rd       <= '0;
      q_wr       <= '0;
      q_cnt      <= '0;
      drop_count <= '0;
      for (int i = 0; i < QDEPTH; i++) q[i] <= '0;
    end else begin
      // duration counter
      if (clear)                   dur_cnt <= '0;
      else if (rec_valid && fits)  dur_cnt <= DURCNT_W'(1);
      else if (!rec_valid && sat && fits)
                                   dur_cnt <= {{DURHI_W{1'b0}}, dur_cnt[DUR_W-1:0]} + DURCNT_W'(1);
      else if (!sat)               dur_cnt <= dur_cnt + DURCNT_W'(1);

      if (clear) drop_count <= '0;
      else if (npush != 0 && !fits && drop_count != '1) drop_count <= drop_count + 16'd1;

      // queue
      if (npush != 0 && fits) begin
        q[q_wr] <= w0;
        if (npush == 2'd2) q[QA_W'(q_wr + 1'b1)] <= w1;
        q_wr <= QA_W'(q_wr + QA_W'(npush));
      end
      if (pop) q_rd <= QA_W'(q_rd + 1'b1);
      q_cnt <= q_cnt + ((npush != 0 && fits) ? (QA_W+1)'(npush) : '0) - (pop ? (QA_W+1)'(1) : '0);
    end
  end

  a_qdepth_pow2: assert property (@(posedge clk) (1 << QA_W) == QDEPTH);
endmodule
