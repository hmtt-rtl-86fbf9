// gmii_rx_model -- behavioural Gigabit Ethernet receiver for testbenches
// (stands in for the PHY, cable and receiving NIC). It samples a GMII
// transmitter on every clock and checks each frame: seven 0x55 preamble
// bytes and the 0xD5 delimiter, no TX_ER, at least 64 bytes including the
// FCS, a correct CRC-32 (the register over data plus FCS must leave the
// 802.3 residue 0xDEBB20E3) and at least 12 idle clocks before the next
// frame. Good frames are kept: their bytes (without preamble and FCS) in
// raw_q with lengths in len_q, and, for trace frames (EtherType 0x88B5),
// the sequence number in seq_q, the word count in nw_q and the 32-bit
// words in rec_q. bad_frames counts frames that failed a check.
module gmii_rx_model (
  input logic       clk,
  input logic [7:0] txd,
  input logic       tx_en,
  input logic       tx_er
);
  byte unsigned raw_q [$];
  int           len_q [$];
  int unsigned  seq_q [$];
  int           nw_q  [$];
  logic [31:0]  rec_q [$];
  int good_frames = 0, bad_frames = 0;

  byte unsigned cur [$];
  int  idle = 100;
  bit  in_frame = 0, err = 0;

  function automatic logic [31:0] crc_byte(input logic [31:0] c, input byte unsigned d);
    logic [31:0] r = c;
    for (int i = 0; i < 8; i++)
      r = (r[0] ^ d[i]) ? ((r >> 1) ^ 32'hEDB88320) : (r >> 1);
    return r;
  endfunction

  task automatic finish_frame();
    logic [31:0] crc = '1;
    int n;
    bit ok = !err;
    // preamble + SFD
    if (cur.size() < 8 + 64) ok = 0;
    else begin
      for (int i = 0; i < 7; i++) if (cur[i] != 8'h55) ok = 0;
      if (cur[7] != 8'hD5) ok = 0;
    end
    if (ok) begin
      for (int i = 8; i < cur.size(); i++) crc = crc_byte(crc, cur[i]);
      if (crc != 32'hDEBB20E3) ok = 0;
    end
    if (!ok) begin
      bad_frames++;
      $display("gmii_rx_model: bad frame (%0d bytes) at %0t", cur.size(), $time);
      return;
    end
    good_frames++;
    n = cur.size() - 12;            // without preamble/SFD and FCS
    for (int i = 0; i < n; i++) raw_q.push_back(cur[8 + i]);
    len_q.push_back(n);
    if (cur[8+12] == 8'h88 && cur[8+13] == 8'hB5) begin
      int nw;
      seq_q.push_back({cur[8+14], cur[8+15], cur[8+16], cur[8+17]});
      nw = int'({cur[8+18], cur[8+19]});
      nw_q.push_back(nw);
      for (int w = 0; w < nw; w++)
        rec_q.push_back({cur[8+20+4*w], cur[8+21+4*w], cur[8+22+4*w], cur[8+23+4*w]});
    end
  endtask

  always @(posedge clk) begin
    if (tx_en) begin
      if (!in_frame) begin
        in_frame = 1; err = (idle < 12); cur.delete();
      end
      if (tx_er) err = 1;
      cur.push_back(txd);
      idle = 0;
    end else begin
      if (in_frame) begin
        in_frame = 0;
        finish_frame();
      end
      if (idle < 1000) idle++;
    end
  end
endmodule
