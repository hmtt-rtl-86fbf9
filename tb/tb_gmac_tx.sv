// tb_gmac_tx -- random frames of 1 to 300 bytes, with random idle time
// between them, through the transmit MAC into the GMII receiver model. The
// receiver checks preamble, delimiter, minimum length, CRC-32 and the
// inter-frame gap; the testbench checks that every frame's bytes arrive,
// zero padded to 60 bytes when shorter, and that a frame occupies the
// wire for exactly 8 + max(len, 60) + 4 clocks.
module tb_gmac_tx;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid, s_last, s_ready, gmii_tx_en, gmii_tx_er;
  logic [7:0] s_data, gmii_txd;
  logic [31:0] frames_sent;

  gmac_tx dut (.*);
  gmii_rx_model u_rx (.clk, .txd(gmii_txd), .tx_en(gmii_tx_en), .tx_er(gmii_tx_er));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int en_len = 0, lens [$];
  always @(posedge clk) begin
    if (gmii_tx_en) en_len++;
    else if (en_len != 0) begin lens.push_back(en_len); en_len = 0; end
  end

  initial begin
    byte unsigned sent [$];
    static int n, base, nshort = 0;
    s_valid = 0; s_last = 0; s_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      n = ($urandom_range(0, 3) == 0) ? $urandom_range(1, 59) : $urandom_range(60, 300);
      if (n < 60) nshort++;
      sent.delete();
      for (int i = 0; i < n; i++) sent.push_back(8'($urandom));
      begin
        int i;
        bit r;
        i = 0;
        while (i < n) begin
          @(negedge clk);
          s_valid = 1; s_data = sent[i]; s_last = (i == n - 1);
          r = s_ready;
          @(posedge clk);
          if (r) i++;
        end
        @(negedge clk);
        s_valid = 0; s_last = 0;
      end
      wait (frames_sent == 32'(f + 1));
      repeat (3) @(posedge clk);
      // compare; the next frame waits out the gap by itself
      repeat ($urandom_range(0, 20)) @(posedge clk);
      chk(u_rx.good_frames == f + 1, $sformatf("frame %0d received", f));
      if (u_rx.len_q.size() > 0) begin
        int L;
        L = u_rx.len_q.pop_front();
        chk(L == ((n < 60) ? 60 : n), $sformatf("length %0d for %0d", L, n));
        for (int i = 0; i < L; i++) begin
          byte unsigned b;
          b = u_rx.raw_q.pop_front();
          chk(b == ((i < n) ? sent[i] : 8'h00), "byte");
        end
      end
      if (lens.size() > 0) begin
        int w;
        w = lens.pop_front();
        chk(w == 8 + ((n < 60) ? 60 : n) + 4, $sformatf("wire length %0d for %0d", w, n));
      end
    end
    chk(u_rx.bad_frames == 0, "no bad frames");
    chk(frames_sent == 200, "frames_sent");
    chk(nshort > 10, "short frames exercised");
    $display("frames=%0d short=%0d", u_rx.good_frames, nshort);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
