// tb_hmtt_workloads -- the tracer at its default sizes under the peak
// traffic of one 64-bit DIMM, at two memory speeds:
//   DDR-200  : 100 MHz command clock
//   DDR2-400 : 200 MHz command clock
// A burst of eight moves one 64-byte line per READ/WRITE and takes four
// command clocks of data bus, so the fastest a DIMM can be driven is one
// READ/WRITE every fourth clock. The stimulus does exactly that: a
// streaming pattern over the four banks, with the PRECHARGE/ACTIVE pairs
// for the next row tucked into the idle command slots. Each workload is
// bracketed by RESET_TRACING, BEGIN_TRACING and END_TRACING reads. The
// records are collected from the three Ethernet ports, merged by sequence
// number, and for each workload the test checks that every reference
// arrived in order, with the right address, and with durations that add
// up to the elapsed clocks, that nothing was dropped, and reports the
// trace bandwidth and the peak FIFO fill. Peak trace bandwidths are
// 100 MB/s and 200 MB/s against about 360 MB/s of link capacity.
module tb_hmtt_workloads;
  import hmtt_pkg::*;
  localparam int N_REF = 40000;

  logic clk = 1'b0, rst_n = 1'b1, tx_clk = 1'b0, tx_rst_n = 1'b1;
  initial begin #1 rst_n = 1'b0; tx_rst_n = 1'b0; end
  bit fast = 1'b0;                 // 0: 100 MHz, 1: 200 MHz command clock
  always begin
    if (fast) #2.5 clk = ~clk;
    else      #5.0 clk = ~clk;
  end
  always #4 tx_clk = ~tx_clk;
  int checks = 0, failures = 0;

  logic              ddr_cs_n, ddr_ras_n, ddr_cas_n, ddr_we_n;
  logic [1:0]        ddr_ba;
  logic [12:0]       ddr_a;
  logic [26:0]       stat_interval;
  work_mode_e        mode;
  logic [15:0]       drop_count, stat_skipped, hot_lost;
  logic [14:0]       fifo_max_level;
  logic [7:0]        gmii_txd [3];
  logic [2:0]        gmii_tx_en, gmii_tx_er;
  logic [31:0]       frames_built;
  logic [31:0]       frames_sent [3];
  logic              user_event;

  hmtt_fpga dut (.*);

  gmii_rx_model u_rx0 (.clk(tx_clk), .txd(gmii_txd[0]), .tx_en(gmii_tx_en[0]), .tx_er(gmii_tx_er[0]));
  gmii_rx_model u_rx1 (.clk(tx_clk), .txd(gmii_txd[1]), .tx_en(gmii_tx_en[1]), .tx_er(gmii_tx_er[1]));
  gmii_rx_model u_rx2 (.clk(tx_clk), .txd(gmii_txd[2]), .tx_en(gmii_tx_en[2]), .tx_er(gmii_tx_er[2]));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #(20ms);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  int m_row [4];
  bit m_open [4];

  // one command in the next clock slot (NOP when c is CMD_NOP)
  task automatic slot(input ddr_cmd_e c, input int b, input logic [12:0] a);
    @(negedge clk);
    ddr_cs_n = (c == CMD_NOP); ddr_ba = 2'(b); ddr_a = a;
    unique case (c)
      CMD_ACT:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b011;
      CMD_READ:  {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b101;
      CMD_WRITE: {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b100;
      CMD_PRE:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b010;
      default:   {ddr_ras_n, ddr_cas_n, ddr_we_n} = 3'b111;
    endcase
  endtask

  // configuration-space read of line index idx, with its own ACTIVE
  task automatic cfg_read(input int idx);
    int b;
    b = (idx >> 8) & 3;
    if (m_open[b]) slot(CMD_PRE, b, 13'h0);
    slot(CMD_NOP, 0, 13'h0);
    slot(CMD_ACT, b, 13'(8064 + (idx >> 10)));
    slot(CMD_NOP, 0, 13'h0);
    slot(CMD_READ, b, {1'b0, 1'b0, 1'b1, 10'((idx & 255) << 3)});
    m_open[b] = 0;
    slot(CMD_NOP, 0, 13'h0);
  endtask

  // expected references of the current workload
  typedef struct { bit wr; int line; int c; } ev_t;
  ev_t exp_q [2][$];

  // the row that access k of a stream uses, and its bank
  function automatic int row_of(int k);  return 100 + (k / 1024);  endfunction
  function automatic int bank_of(int k); return k & 3;             endfunction

  task automatic stream(input int w);
    for (int k = 0; k < N_REF; k++) begin
      int b, r, col, nb, nr;
      bit wr;
      b = bank_of(k); r = row_of(k); col = ((k >> 2) & 255) << 3;
      wr = (k % 3 == 0);
      // slot 0: the access
      slot(wr ? CMD_WRITE : CMD_READ, b, {1'b0, 1'(col >> 10), 1'b0, 10'(col)});
      exp_q[w].push_back('{wr, int'({13'(r), 2'(b), 8'(col >> 3)}), cyc});
      // slots 1..3: open the row the next access to the following bank needs
      nb = bank_of(k + 1); nr = row_of(k + 1);
      if (!m_open[nb] || m_row[nb] != nr) begin
        slot(m_open[nb] ? CMD_PRE : CMD_NOP, nb, 13'h0);
        slot(CMD_ACT, nb, 13'(nr));
        m_open[nb] = 1; m_row[nb] = nr;
      end else begin
        slot(CMD_NOP, 0, 13'h0);
        slot(CMD_NOP, 0, 13'h0);
      end
      slot(CMD_NOP, 0, 13'h0);
    end
  endtask

  `define WL_DRAIN(RX) \
    while (RX.len_q.size() != 0) begin \
      int L, nw; int unsigned s; \
      L = RX.len_q.pop_front(); \
      for (int i = 0; i < L; i++) void'(RX.raw_q.pop_front()); \
      s = RX.seq_q.pop_front(); nw = RX.nw_q.pop_front(); \
      for (int i = 0; i < nw; i++) fwords[int'(s)].push_back(RX.rec_q.pop_front()); \
    end

  logic [31:0] fwords [int][$];
  int drops [2], fifo_peak [2];
  realtime t0 [2], t1 [2];

  task automatic settle();
    int quiet;
    quiet = 0;
    while (quiet < 5000) begin
      @(posedge tx_clk);
      if (gmii_tx_en != 0 || !dut.u_tfu.u_fifo.empty || dut.u_ttu.sending != 0) quiet = 0;
      else quiet++;
    end
  endtask

  initial begin
    logic [31:0] words [$];
    int w, ei, last_c, nref [2];
    longint hi, dur;
    string nm [2];
    nm[0] = "DDR-200 peak";  nm[1] = "DDR2-400 peak";
    ddr_cs_n = 1; ddr_ras_n = 1; ddr_cas_n = 1; ddr_we_n = 1; ddr_ba = 0; ddr_a = 0;
    stat_interval = 27'd0;
    for (int b = 0; b < 4; b++) begin m_open[b] = 0; m_row[b] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1; tx_rst_n = 1;
    for (int wl = 0; wl < 2; wl++) begin
      fast = (wl == 1);
      repeat (4) @(posedge clk);
      cfg_read(2);                   // RESET_TRACING: clears drop count, durations
      cfg_read(0);                   // BEGIN_TRACING
      for (int b = 0; b < 4; b++) begin
        if (m_open[b]) slot(CMD_PRE, b, 13'h0);
        slot(CMD_ACT, b, 13'(row_of(b)));
        m_open[b] = 1; m_row[b] = row_of(b);
      end
      slot(CMD_NOP, 0, 13'h0);
      t0[wl] = $realtime;
      stream(wl);
      t1[wl] = $realtime;
      cfg_read(1);                   // END_TRACING
      settle();
      drops[wl] = int'(drop_count);
      fifo_peak[wl] = int'(fifo_max_level);
    end
    `WL_DRAIN(u_rx0)
    `WL_DRAIN(u_rx1)
    `WL_DRAIN(u_rx2)
    chk(u_rx0.bad_frames + u_rx1.bad_frames + u_rx2.bad_frames == 0, "bad frames");
    chk(fwords.size() == int'(frames_built), "all frames received");
    for (int s = 0; s < int'(frames_built); s++)
      if (fwords.exists(s)) for (int i = 0; i < fwords[s].size(); i++) words.push_back(fwords[s][i]);

    // split by workload at the BEGIN tags; check refs and durations
    w = -1; ei = 0; hi = 0; last_c = 0; nref[0] = 0; nref[1] = 0;
    for (int i = 0; i < words.size(); i++) begin
      logic [31:0] x;
      x = words[i];
      if (x[31] && x[30:28] == 3'(SP_DUR_HI)) hi = longint'(x[27:0]);
      else if (x[31] && x[30:28] == 3'(SP_TAG)) begin
        if (x[16:0] == 17'd0) begin w++; ei = 0; end
        hi = 0;
      end else if (!x[31]) begin
        dur = (hi << 7) + longint'(x[29:23]);
        hi = 0;
        if (w >= 0 && w < 2 && ei < exp_q[w].size()) begin
          chk(x[22:0] == 23'(exp_q[w][ei].line) && x[30] == exp_q[w][ei].wr,
              $sformatf("%s reference %0d", nm[w], ei));
          if (ei > 0) chk(dur == longint'(exp_q[w][ei].c) - longint'(last_c),
                          $sformatf("%s duration %0d: %0d", nm[w], ei, dur));
          last_c = exp_q[w][ei].c;
          ei++;
          nref[w]++;
        end else chk(0, "reference outside a workload");
      end
    end
    for (int wl = 0; wl < 2; wl++) begin
      real mbps, secs;
      secs = (t1[wl] - t0[wl]) / 1s;
      mbps = real'(nref[wl]) * 4.0 / secs / 1.0e6;
      chk(nref[wl] == N_REF, $sformatf("%s: %0d of %0d references", nm[wl], nref[wl], N_REF));
      chk(drops[wl] == 0, $sformatf("%s: %0d drops", nm[wl], drops[wl]));
      $display("%s: %0d references in %0.1f us, trace %0.1f MB/s, drops %0d, FIFO peak %0d of 16384",
               nm[wl], nref[wl], secs * 1.0e6, mbps, drops[wl], fifo_peak[wl]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
