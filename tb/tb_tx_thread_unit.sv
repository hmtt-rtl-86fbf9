// tb_tx_thread_unit -- the thread unit feeding three transmit MACs, each
// watched by a GMII receiver model. A first-word-fall-through FIFO model
// supplies a numbered word stream in bursts separated by random gaps, some
// longer than the flush timeout. Checks:
//   * every frame received is good (CRC, length, gap) and carries the
//     header: destination, source MAC (last byte + port number), EtherType;
//   * frame k (sequence number k) leaves on port k mod 3 (round robin);
//   * merging all ports by sequence number gives back the word stream
//     exactly, with nothing lost or duplicated;
//   * full frames hold FRAME_WORDS words, partial ones appear only after an
//     input gap of at least the flush timeout;
//   * the FIFO is held back (rd_valid without rd_en) while the next port
//     is still busy, and this happens in the test.
// Small frame and flush sizes keep the run short; the full-size numbers
// are exercised by the top-level test.
module tb_tx_thread_unit;
  import hmtt_pkg::*;
  localparam int NUM_GE = 3;
  localparam int FW     = 16;
  localparam int FLUSH  = 64;
  localparam logic [47:0] DST = 48'hFF_FF_FF_FF_FF_FF;
  localparam logic [47:0] SRC = 48'h02_48_4D_54_54_00;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic                rd_valid, rd_en;
  logic [TRACE_W-1:0]  rd_data;
  logic [NUM_GE-1:0]   m_valid, m_last, m_ready;
  logic [7:0]          m_data [NUM_GE];
  logic [31:0]         frames_built;
  logic [7:0]          txd [NUM_GE];
  logic [NUM_GE-1:0]   tx_en, tx_er;
  logic [31:0]         sent [NUM_GE];

  tx_thread_unit #(.NUM_GE(NUM_GE), .FRAME_WORDS(FW), .FLUSH_CYCLES(FLUSH)) dut (
    .clk, .rst_n, .rd_valid, .rd_data, .rd_en,
    .m_valid, .m_data, .m_last, .m_ready, .frames_built);

  for (genvar g = 0; g < NUM_GE; g++) begin : g_mac
    gmac_tx u_mac (.clk, .rst_n, .s_valid(m_valid[g]), .s_data(m_data[g]),
                   .s_last(m_last[g]), .s_ready(m_ready[g]),
                   .gmii_txd(txd[g]), .gmii_tx_en(tx_en[g]), .gmii_tx_er(tx_er[g]),
                   .frames_sent(sent[g]));
    gmii_rx_model u_rx (.clk, .txd(txd[g]), .tx_en(tx_en[g]), .tx_er(tx_er[g]));
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO model: words in q, first one shown on rd_data
  logic [31:0] q [$];
  int unsigned next_word = 0;
  assign rd_valid = q.size() != 0;
  assign rd_data  = (q.size() != 0) ? q[0] : '0;
  always @(posedge clk) if (rd_en && q.size() != 0) void'(q.pop_front());

  // input gap length seen before each launch, and back-pressure count
  int gap = 0, held = 0;
  always @(posedge clk) begin
    if (rd_valid) gap = 0; else gap++;
    if (rd_valid && !rd_en) held++;
  end

  // per-port frame check, shared by the three receivers
  logic [31:0] stream [int];        // seq -> words, flattened later
  int          nw_of  [int];
  int          port_of [int];
  int          short_frames = 0, full_frames = 0;

  task automatic drain_port(input int p);
    int L, nw;
    int unsigned s;
    byte unsigned hdr [20];
    case (p)
      0: begin
        while (g_mac[0].u_rx.len_q.size() != 0) begin
          L = g_mac[0].u_rx.len_q.pop_front();
          for (int i = 0; i < L; i++) begin
            byte unsigned b;
            b = g_mac[0].u_rx.raw_q.pop_front();
            if (i < 20) hdr[i] = b;
          end
          s = g_mac[0].u_rx.seq_q.pop_front(); nw = g_mac[0].u_rx.nw_q.pop_front();
          check_frame(0, hdr, s, nw);
          for (int w = 0; w < nw; w++) stream[int'(s) * FW + w] = g_mac[0].u_rx.rec_q.pop_front();
        end
      end
      1: begin
        while (g_mac[1].u_rx.len_q.size() != 0) begin
          L = g_mac[1].u_rx.len_q.pop_front();
          for (int i = 0; i < L; i++) begin
            byte unsigned b;
            b = g_mac[1].u_rx.raw_q.pop_front();
            if (i < 20) hdr[i] = b;
          end
          s = g_mac[1].u_rx.seq_q.pop_front(); nw = g_mac[1].u_rx.nw_q.pop_front();
          check_frame(1, hdr, s, nw);
          for (int w = 0; w < nw; w++) stream[int'(s) * FW + w] = g_mac[1].u_rx.rec_q.pop_front();
        end
      end
      default: begin
        while (g_mac[2].u_rx.len_q.size() != 0) begin
          L = g_mac[2].u_rx.len_q.pop_front();
          for (int i = 0; i < L; i++) begin
            byte unsigned b;
            b = g_mac[2].u_rx.raw_q.pop_front();
            if (i < 20) hdr[i] = b;
          end
          s = g_mac[2].u_rx.seq_q.pop_front(); nw = g_mac[2].u_rx.nw_q.pop_front();
          check_frame(2, hdr, s, nw);
          for (int w = 0; w < nw; w++) stream[int'(s) * FW + w] = g_mac[2].u_rx.rec_q.pop_front();
        end
      end
    endcase
  endtask

  task automatic check_frame(input int p, input byte unsigned hdr [20],
                             input int unsigned s, input int nw);
    bit hok;
    hok = 1;
    for (int i = 0; i < 6; i++) if (hdr[i] != DST[8*(5-i) +: 8]) hok = 0;
    for (int i = 0; i < 5; i++) if (hdr[6+i] != SRC[8*(5-i) +: 8]) hok = 0;
    if (hdr[11] != 8'(SRC[7:0] + 8'(p))) hok = 0;
    if (hdr[12] != 8'h88 || hdr[13] != 8'hB5) hok = 0;
    chk(hok, $sformatf("header of frame %0d on port %0d", s, p));
    chk(int'(s % NUM_GE) == p, $sformatf("frame %0d on port %0d (round robin)", s, p));
    chk(!nw_of.exists(int'(s)), $sformatf("frame %0d received twice", s));
    chk(nw >= 1 && nw <= FW, $sformatf("frame %0d word count %0d", s, nw));
    nw_of[int'(s)] = nw;
    port_of[int'(s)] = p;
    if (nw == FW) full_frames++; else short_frames++;
  endtask

  // remember the idle gap that preceded each partial-frame launch
  int launches = 0;
  always @(posedge clk) begin
    if (rst_n && dut.launch) begin
      if (!dut.rd_en) begin
        chk(gap >= FLUSH - 1, $sformatf("flush after only %0d idle clocks", gap));
      end
      launches++;
    end
  end

  initial begin
    int nbursts, len;
    m_ready = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nbursts = 120;
    for (int k = 0; k < nbursts; k++) begin
      len = (k % 10 == 0) ? $urandom_range(100, 300) : $urandom_range(1, 40);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        q.push_back(next_word * 32'h9E37_79B9 ^ next_word);
        next_word++;
      end
      // sometimes leave the unit idle past the flush timeout
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(FLUSH + 10, 4 * FLUSH)) @(negedge clk);
      else repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    // let everything drain and flush
    wait (q.size() == 0);
    repeat (FLUSH + 20) @(posedge clk);
    wait (m_valid == '0 && tx_en == '0);
    repeat (40) @(posedge clk);
    for (int p = 0; p < NUM_GE; p++) drain_port(p);

    // frames: every sequence number 0..frames_built-1, exactly once
    chk(nw_of.size() == int'(frames_built), $sformatf("received %0d of %0d frames", nw_of.size(), frames_built));
    for (int s = 0; s < int'(frames_built); s++) chk(nw_of.exists(s), $sformatf("frame %0d missing", s));
    // stream: in order, complete
    begin
      int unsigned idx;
      idx = 0;
      for (int s = 0; s < int'(frames_built); s++) begin
        if (nw_of.exists(s)) begin
          for (int w = 0; w < nw_of[s]; w++) begin
            chk(stream[s * FW + w] == (idx * 32'h9E37_79B9 ^ idx),
                $sformatf("word %0d (frame %0d slot %0d)", idx, s, w));
            idx++;
          end
        end
      end
      chk(idx == next_word, $sformatf("words received %0d of %0d", idx, next_word));
    end
    for (int p = 0; p < NUM_GE; p++) begin
      chk(g_mac[0].u_rx.bad_frames == 0 && g_mac[1].u_rx.bad_frames == 0 &&
          g_mac[2].u_rx.bad_frames == 0, "no bad frames");
    end
    chk(full_frames > 0 && short_frames > 0, "both full and flushed frames");
    chk(held > 0, "FIFO held back while ports busy");
    chk(launches == int'(frames_built), "launch count");
    $display("words=%0d frames=%0d full=%0d flushed=%0d held_clocks=%0d",
             next_word, frames_built, full_frames, short_frames, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
