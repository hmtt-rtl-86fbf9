// hmtt_e2e_body -- shared body of the end-to-end tests of hmtt_fpga.
// Included by tb_hmtt_fpga (small FIFO and frames, so that every mechanism
// shows up quickly) and tb_hmtt_fpga_full (the top at its default sizes).
// The including module defines P_FIFO, P_FW, P_FLUSH, P_HOT, P_BURST and
// P_SCALE and instantiates the top as `dut` on the signals declared here.
//
// The test plays the traced machine: it drives DDR commands (ACTIVE,
// READ/WRITE with or without auto-precharge, PRECHARGE, REFRESH) on the
// command pins, and software's reads of the configuration space, and keeps
// a reference model of what must appear in the trace: every reference made
// in TRACE mode and every configuration-space read made while tracing, each
// with the memory clock it was issued in. Three GMII receiver models take
// the frames off the three ports. At the end all frames are merged by
// sequence number and the word stream is decoded:
//   * trace records must match the model in order; each duration (low bits
//     plus any preceding SP_DUR_HI) must equal the clocks since the previous
//     record that arrived; records may be missing only while the FIFO was
//     full, and the number missing must equal drop_count;
//   * statistics reports must be complete and self-consistent (per-bank
//     counts add up to reads + writes, reuse histogram within one);
//   * every hot page reported must have been referenced at least
//     HOT_THRESH times while tracing (counted over the whole run).
// Phases: OFF traffic (nothing recorded), TRACE with long idle gaps
// (duration overflow) and user events, BW mode, a hot-page loop, RESET,
// then a back-to-back burst that fills the FIFO (stall and drops), END.
// Each mechanism is counted and must occur at least once.

  logic clk = 1'b0, rst_n = 1'b1, tx_clk = 1'b0, tx_rst_n = 1'b1;
  initial begin #1 rst_n = 1'b0; tx_rst_n = 1'b0; end   // real reset edges
  always #5 clk = ~clk;            // 100 MHz memory command clock (DDR-200)
  always #4 tx_clk = ~tx_clk;      // 125 MHz GMII clock
  int checks = 0, failures = 0;

  logic              ddr_cs_n, ddr_ras_n, ddr_cas_n, ddr_we_n;
  logic [1:0]        ddr_ba;
  logic [12:0]       ddr_a;
  logic [26:0]       stat_interval;
  work_mode_e        mode;
  logic [15:0]       drop_count, stat_skipped, hot_lost;
  logic [$clog2(P_FIFO):0] fifo_max_level;
  logic [7:0]        gmii_txd [3];
  logic [2:0]        gmii_tx_en, gmii_tx_er;
  logic [31:0]       frames_built;
  logic [31:0]       frames_sent [3];
  logic              user_event;

  gmii_rx_model u_rx0 (.clk(tx_clk), .txd(gmii_txd[0]), .tx_en(gmii_tx_en[0]), .tx_er(gmii_tx_er[0]));
  gmii_rx_model u_rx1 (.clk(tx_clk), .txd(gmii_txd[1]), .tx_en(gmii_tx_en[1]), .tx_er(gmii_tx_er[1]));
  gmii_rx_model u_rx2 (.clk(tx_clk), .txd(gmii_txd[2]), .tx_en(gmii_tx_en[2]), .tx_er(gmii_tx_er[2]));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int cyc = 0;
  int n_stall = 0, n_mode_sw = 0, n_full_clk = 0, n_user_pulse = 0;
  work_mode_e last_mode = MODE_OFF;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (dut.trc_valid && !dut.trc_ready) n_stall++;
      if (dut.u_tfu.full) n_full_clk++;
      if (mode != last_mode) n_mode_sw++;
      if (user_event) n_user_pulse++;
      last_mode = mode;
    end
  end

  // ---------------- reference model ----------------
  typedef struct { bit tag; bit wr; int unsigned val; int c; } ev_t;
  ev_t          exp_q [$];
  work_mode_e   m_mode = MODE_OFF;
  int           m_open_row [4];
  bit           m_open [4];
  int           page_cnt [int];
  int           n_raw = 0, n_cfg_wr = 0;
  int           reset_c = -1000;     // clock of the last RESET_TRACING read

  task automatic pins(input ddr_cmd_e c, input logic [1:0] b, input logic [12:0] a);
    @(negedge clk);
    ddr_cs_n = 1'b0; ddr_ba = b; ddr_a = a;
    unique case (c)
      CMD_ACT:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b011;
      CMD_READ:  {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b101;
      CMD_WRITE: {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b100;
      CMD_PRE:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b010;
      CMD_REF:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b001;
      default:   begin ddr_cs_n = 1'b1; {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b111; end
    endcase
    @(negedge clk);
    ddr_cs_n = 1'b1; {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b111;
    ddr_a = 13'($urandom);          // the bus floats between commands
  endtask

  task automatic nops(input int n);
    if (n > 0) repeat (n) @(negedge clk);
  endtask

  task automatic activate(input int b, input int row);
    pins(CMD_ACT, 2'(b), 13'(row));
    m_open_row[b] = row; m_open[b] = 1;
  endtask

  // one READ/WRITE to an ordinary address (not the configuration space)
  task automatic access(input int b, input int row, input int col, input bit wr, input bit ap);
    int c;
    logic [22:0] line;
    if (!m_open[b] || m_open_row[b] != row) begin
      if (m_open[b]) pins(CMD_PRE, 2'(b), 13'h0);
      activate(b, row);
    end
    c = cyc + 1;                    // command clock (pins() waits one negedge)
    pins(wr ? CMD_WRITE : CMD_READ, 2'(b),
         {1'($urandom), 1'(col >> 10), ap, 10'(col)});
    if (ap) m_open[b] = 0;
    line = {13'(row), 2'(b), 8'(col >> 3)};
    if (m_mode != MODE_OFF) begin
      n_raw++;
      if (page_cnt.exists((int'(line) >> 6))) page_cnt[(int'(line) >> 6)]++;
      else page_cnt[(int'(line) >> 6)] = 1;
    end
    if (m_mode == MODE_TRACE) exp_q.push_back('{0, wr, int'(line), c});
  endtask

  // software reads one line of the configuration space (index = offset/64)
  task automatic cfg_read(input int idx);
    int b, off, col, c;
    work_mode_e nm;
    off = idx >> 10; b = (idx >> 8) & 3; col = (idx & 255) << 3;
    if (m_open[b]) pins(CMD_PRE, 2'(b), 13'h0);
    activate(b, 8064 + off);
    c = cyc + 1;
    pins(CMD_READ, 2'(b), {1'b0, 1'(col >> 10), 1'b1, 10'(col)});
    m_open[b] = 0;
    nm = m_mode;
    case (idx)
      0: nm = MODE_TRACE;
      1, 2: nm = MODE_OFF;
      3: nm = MODE_BW;
      default: ;
    endcase
    if (m_mode != MODE_OFF || nm != MODE_OFF) exp_q.push_back('{1, 0, idx, c});
    if (idx == 2) reset_c = c;
    m_mode = nm;
  endtask

  // a write into the configuration space: ignored by the tracer
  task automatic cfg_write(input int idx);
    int b, off, col;
    off = idx >> 10; b = (idx >> 8) & 3; col = (idx & 255) << 3;
    if (m_open[b]) pins(CMD_PRE, 2'(b), 13'h0);
    activate(b, 8064 + off);
    pins(CMD_WRITE, 2'(b), {1'b0, 1'(col >> 10), 1'b1, 10'(col)});
    m_open[b] = 0;
    n_cfg_wr++;
  endtask

  task automatic random_traffic(input int n, input int max_gap, input int long_every);
    for (int i = 0; i < n; i++) begin
      int b, row, col;
      b = $urandom_range(0, 3);
      row = (m_open[b] && $urandom_range(0, 3) != 0) ? m_open_row[b] : $urandom_range(0, 8063);
      col = $urandom_range(0, 2047);
      access(b, row, col, 1'($urandom), $urandom_range(0, 7) == 0);
      if (long_every > 0 && $urandom_range(1, long_every) == 1) nops($urandom_range(130, 3000));
      else nops($urandom_range(0, max_gap));
      if ($urandom_range(0, 40) == 0) pins(CMD_REF, 2'b00, 13'h0);
    end
  endtask

  // ---------------- frame collection ----------------
  logic [31:0] fwords [int][$];
  int          port_frames [3];
  int          n_short = 0;

  `define HMTT_DRAIN(P, RX) \
    while (RX.len_q.size() != 0) begin \
      int L, nw; int unsigned s; \
      L = RX.len_q.pop_front(); \
      for (int i = 0; i < L; i++) void'(RX.raw_q.pop_front()); \
      s = RX.seq_q.pop_front(); nw = RX.nw_q.pop_front(); \
      chk(!fwords.exists(int'(s)), $sformatf("frame %0d twice", s)); \
      chk(int'(s % 3) == P, $sformatf("frame %0d on port %0d", s, P)); \
      for (int w = 0; w < nw; w++) fwords[int'(s)].push_back(RX.rec_q.pop_front()); \
      if (nw < P_FW) n_short++; \
      port_frames[P]++; \
    end

  initial begin
    repeat (P_SCALE * 3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] words [$];
    static int n_ref = 0, n_tag = 0, n_durhi = 0, n_hot = 0, n_stat_rep = 0, n_user = 0;
    static int n_missing = 0;
    int last_c, ei, ei0, miss0;
    bit first;
    longint hi;
    int drop_at_end;
    int hot_pages [$];

    ddr_cs_n = 1; ddr_ras_n = 1; ddr_cas_n = 1; ddr_we_n = 1; ddr_ba = 0; ddr_a = 0;
    stat_interval = 27'd0;
    for (int b = 0; b < 4; b++) begin m_open[b] = 0; m_open_row[b] = 0; end
    repeat (5) @(posedge clk);
    rst_n = 1; tx_rst_n = 1;
    repeat (5) @(negedge clk);
    last_c = cyc;                    // durations count from reset

    // phase A: work mode OFF, nothing is recorded
    random_traffic(200, 6, 0);
    cfg_read(1);                     // END while already off: no tag
    cfg_read(64 + 7);                // user event while off: no tag
    // phase B: TRACE with long gaps and user events
    stat_interval = 27'(P_SCALE * 3000);
    cfg_read(0);
    random_traffic(300, 10, 25);
    for (int u = 0; u < 6; u++) begin
      cfg_read(64 + $urandom_range(0, 60000));
      n_user++;
      random_traffic(20, 4, 0);
      cfg_write(64 + u);
    end
    cfg_read(5);                     // below the user area, not a command
    // phase C: OUTPUT_BW -- tags and statistics, no references
    cfg_read(3);
    random_traffic(300, 5, 0);
    cfg_read(64 + 99); n_user++;
    random_traffic(100, 5, 0);
    // phase D: TRACE, a loop over a few pages makes them hot
    cfg_read(0);
    for (int r = 0; r < P_HOT + 8; r++)
      for (int p = 0; p < 4; p++) begin
        access(p, 1000 + p, 8 * $urandom_range(0, 63), 1'(r & 1), 1'b0);
        nops($urandom_range(0, 3));
      end
    random_traffic(200, 3, 40);
    // phase E: reset, then a burst faster than the links
    cfg_read(2);
    nops(50);
    cfg_read(0);
    for (int i = 0; i < P_BURST; i++) begin
      int b, col, c;
      logic [22:0] line;
      b = i & 3;
      if (!m_open[b]) activate(b, 4000 + b);
      col = (i * 8) & 2047;
      // back-to-back READs: one command every memory clock
      @(negedge clk);
      ddr_cs_n = 1'b0; {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b101; ddr_ba = 2'(b);
      ddr_a = {1'b0, 1'(col >> 10), 1'b0, 10'(col)};
      c = cyc;                       // same clock numbering as access()
      line = {13'(m_open_row[b]), 2'(b), 8'(col >> 3)};
      n_raw++;
      if (page_cnt.exists(int'(line) >> 6)) page_cnt[int'(line) >> 6]++;
      else page_cnt[int'(line) >> 6] = 1;
      exp_q.push_back('{0, 0, int'(line), c});
    end
    @(negedge clk); ddr_cs_n = 1'b1; {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b111;
    random_traffic(100, 20, 0);
    drop_at_end = -1;
    cfg_read(1);                     // END
    nops(10);
    drop_at_end = int'(drop_count);
    stat_interval = 27'd0;
    // let the FIFO drain, the last partial frame flush and the MACs finish
    begin
      int quiet;
      quiet = 0;
      while (quiet < 3 * P_FLUSH + 3000) begin
        @(posedge tx_clk);
        if (gmii_tx_en != 0 || !dut.u_tfu.u_fifo.empty || dut.u_ttu.sending != 0) quiet = 0;
        else quiet++;
      end
    end
    `HMTT_DRAIN(0, u_rx0)
    `HMTT_DRAIN(1, u_rx1)
    `HMTT_DRAIN(2, u_rx2)
    chk(u_rx0.bad_frames == 0 && u_rx1.bad_frames == 0 && u_rx2.bad_frames == 0, "bad frames");
    chk(fwords.size() == int'(frames_built), $sformatf("frames %0d of %0d", fwords.size(), frames_built));
    for (int s = 0; s < int'(frames_built); s++) begin
      chk(fwords.exists(s), $sformatf("frame %0d missing", s));
      if (fwords.exists(s)) for (int w = 0; w < fwords[s].size(); w++) words.push_back(fwords[s][w]);
    end

    // ---------------- decode ----------------
    ei = 0; hi = 0; first = 1;
    begin
      int rep_pos, rep_cnt [38];
      rep_pos = -1;
      foreach (words[i]) begin
        logic [31:0] w;
        w = words[i];
        if (!w[31] || w[30:28] == 3'(SP_TAG)) begin
          // timed record: reference or tag
          bit is_tag, wr;
          int unsigned val;
          longint dur;
          bit found;
          is_tag = w[31];
          wr     = !w[31] && w[30];
          val    = is_tag ? int'(w[16:0]) : int'(w[22:0]);
          dur    = (hi << 7) + (is_tag ? longint'(w[27:21]) : longint'(w[29:23]));
          hi = 0;
          if (is_tag) n_tag++; else n_ref++;
          // find it in the model; records skipped over were dropped
          found = 0;
          ei0 = ei; miss0 = n_missing;
          while (ei < exp_q.size() && !found) begin
            longint want;
            want = longint'(exp_q[ei].c) - longint'(last_c);
            if (exp_q[ei].tag == is_tag && exp_q[ei].val == val && exp_q[ei].wr == wr &&
                (want == dur || first)) found = 1;
            else begin
              n_missing++;
              // after RESET_TRACING the duration restarts
              if (exp_q[ei].tag && exp_q[ei].val == 2) last_c = exp_q[ei].c + 1;
              ei++;
            end
          end
          chk(found, $sformatf("record %0d (%s %0h dur %0d) not in model", i,
                               is_tag ? "tag" : "ref", val, dur));
          first = 0;
          if (!found) begin
            ei = ei0; n_missing = miss0;
          end else begin
            last_c = (exp_q[ei].tag && exp_q[ei].val == 2) ? exp_q[ei].c + 1 : exp_q[ei].c;
            ei++;
          end
        end else if (w[30:28] == 3'(SP_DUR_HI)) begin
          hi = longint'(w[27:0]);
          n_durhi++;
        end else if (w[30:28] == 3'(SP_HOT)) begin
          n_hot++;
          hot_pages.push_back(int'(w[16:0]));
        end else if (w[30:28] == 3'(SP_STAT_LO) && w[27:20] == 8'hFF) begin
          chk(rep_pos == -1 || rep_pos == 76, "statistics report cut short");
          rep_pos = 0;
        end else if (w[30:28] == 3'(SP_STAT_LO) || w[30:28] == 3'(SP_STAT_HI)) begin
          int ci;
          ci = int'(w[27:20]);
          chk(rep_pos >= 0 && rep_pos < 76 && ci == rep_pos / 2 &&
              w[28] == 1'(rep_pos & 1), $sformatf("statistics word %0d", rep_pos));
          if (rep_pos >= 0 && rep_pos < 76) begin
            if (!w[28]) rep_cnt[ci] = int'(w[19:0]);
            else rep_cnt[ci] += int'(w[11:0]) << 20;
            rep_pos++;
            if (rep_pos == 76) begin
              int bsum, hsum;
              bsum = 0; hsum = 0;
              for (int k = 2; k < 6; k++) bsum += rep_cnt[k];
              for (int k = 29; k < 38; k++) hsum += rep_cnt[k];
              chk(bsum == rep_cnt[0] + rep_cnt[1], "bank counts add up");
              chk(hsum >= rep_cnt[0] + rep_cnt[1] - 1 && hsum <= rep_cnt[0] + rep_cnt[1] + 1,
                  $sformatf("histogram %0d vs refs %0d", hsum, rep_cnt[0] + rep_cnt[1]));
              for (int k = 6; k < 29; k++)
                chk(rep_cnt[k] <= rep_cnt[0] + rep_cnt[1], "bit toggles bounded");
              n_stat_rep++;
            end
          end
        end else chk(0, $sformatf("unknown record %h", w));
      end
    end
    n_missing += exp_q.size() - ei;
    chk(n_missing == drop_at_end, $sformatf("missing %0d, drop_count %0d", n_missing, drop_at_end));
    foreach (hot_pages[i])
      chk(page_cnt.exists(hot_pages[i]) && page_cnt[hot_pages[i]] >= P_HOT,
          $sformatf("hot page %0h referenced %0d times", hot_pages[i],
                    page_cnt.exists(hot_pages[i]) ? page_cnt[hot_pages[i]] : 0));

    // every mechanism happened
    chk(n_ref > 0,            "references recorded");
    chk(n_tag >= n_user,      "tags recorded");
    chk(n_durhi > 0,          "duration overflow (SP_DUR_HI)");
    chk(n_mode_sw >= 6,       "mode switches");
    chk(n_stall > 0,          "trace stalled on a full FIFO");
    chk(drop_at_end > 0,      "records dropped");
    chk(n_stat_rep > 0,       "statistics reports");
    chk(n_hot > 0,            "hot pages");
    chk(n_short > 0,          "flushed partial frames");
    chk(port_frames[0] > 0 && port_frames[1] > 0 && port_frames[2] > 0, "all three ports used");
    chk(int'(fifo_max_level) >= P_FIFO - 1, "FIFO filled");
    chk(n_user_pulse == n_user + 1, $sformatf("user_event pulses %0d", n_user_pulse));
    chk(frames_sent[0] + frames_sent[1] + frames_sent[2] == frames_built, "frames sent by the MACs");
    $display("mechanisms: refs=%0d tags=%0d dur_hi=%0d mode_switches=%0d stall_clocks=%0d",
             n_ref, n_tag, n_durhi, n_mode_sw, n_stall);
    $display("            drops=%0d stat_reports=%0d stat_skipped=%0d hot=%0d hot_lost=%0d",
             drop_at_end, n_stat_rep, stat_skipped, n_hot, hot_lost);
    $display("            frames=%0d (%0d/%0d/%0d) flushed=%0d fifo_max=%0d full_clocks=%0d cfg_writes=%0d",
             frames_built, port_frames[0], port_frames[1], port_frames[2], n_short,
             fifo_max_level, n_full_clk, n_cfg_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
