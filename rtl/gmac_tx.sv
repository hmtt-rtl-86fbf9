// gmac_tx -- transmit side of a Gigabit Ethernet MAC (GMAC Unit).
// Takes a frame as a byte stream (destination address first, no FCS) and
// drives a GMII transmitter at one byte per 125 MHz clock: seven preamble
// bytes 0x55, the start delimiter 0xD5, the frame bytes, zero padding up to
// the 60-byte minimum, the four FCS bytes (IEEE 802.3 CRC-32, reflected,
// initial value all ones, complemented, least significant byte first), and
// then at least 12 idle clocks of inter-frame gap. The paper names this unit
// only; the framing is the standard one.
// Interface: s_ready is high exactly in the clocks where a frame byte is
// sent; the source must then keep s_valid high until s_last (a GMII frame
// cannot pause), which an assertion checks; should it happen anyway the
// byte goes out with GMII TX_ER set so the receiver discards the frame. A new frame starts when s_valid
// is seen in the idle state.
module gmac_tx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  input  logic [7:0]  s_data,
  input  logic        s_last,
  output logic        s_ready,
  output logic [7:0]  gmii_txd,
  output logic        gmii_tx_en,
  output logic        gmii_tx_er,
  output logic [31:0] frames_sent
);
  typedef enum logic [2:0] {G_IDLE, G_PRE, G_SFD, G_DATA, G_PAD, G_FCS, G_IFG} gstate_e;
  localparam int MIN_LEN = 60;     // without FCS
  localparam int IFG     = 12;

  gstate_e     st;
  logic [31:0] crc;
  logic [10:0] len;
  logic [3:0]  n;

  function automatic logic [31:0] crc_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r;
    r = c;
    for (int i = 0; i < 8; i++)
      r = (r[0] ^ d[i]) ? ((r >> 1) ^ 32'hEDB88320) : (r >> 1);
    return r;
  endfunction

  assign s_ready = (st == G_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= G_IDLE;
      crc         <= '1;
      len         <= '0;
      n           <= '0;
      gmii_txd    <= '0;
      gmii_tx_en  <= 1'b0;
      gmii_tx_er  <= 1'b0;
      frames_sent <= '0;
    end else begin
      gmii_tx_er <= 1'b0;
      unique case (st)
        G_IDLE: begin
          gmii_tx_en <= 1'b0;
          gmii_txd   <= '0;
          if (s_valid) begin
            st <= G_PRE;
            n  <= '0;
          end
        end
        G_PRE: begin
          gmii_tx_en <= 1'b1;
          gmii_txd   <= 8'h55;
          n          <= n + 4'd1;
          if (n == 4'd6) st <= G_SFD;
        end
        G_SFD: begin
          gmii_txd <= 8'hD5;
          crc      <= '1;
          len      <= '0;
          st       <= G_DATA;
        end
        G_DATA: begin
          gmii_txd   <= s_data;
          gmii_tx_er <= !s_valid;     // source ran dry: mark the frame bad
          crc      <= crc_byte(crc, s_data);
          len      <= len + 11'd1;
          if (s_last) st <= (len + 11'd1 < 11'(MIN_LEN)) ? G_PAD : G_FCS;
          n <= '0;
        end
        G_PAD: begin
          gmii_txd <= 8'h00;
          crc      <= crc_byte(crc, 8'h00);
          len      <= len + 11'd1;
          if (len + 11'd1 == 11'(MIN_LEN)) st <= G_FCS;
        end
        G_FCS: begin
          gmii_txd <= ~crc[8*n[1:0] +: 8];
          n        <= n + 4'd1;
          if (n == 4'd3) begin
            st <= G_IFG;
            n  <= '0;
            frames_sent <= frames_sent + 32'd1;
          end
        end
        G_IFG: begin
          gmii_tx_en <= 1'b0;
          gmii_txd   <= '0;
          n          <= n + 4'd1;
          if (n == 4'(IFG - 1)) st <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  a_no_underrun: assert property (@(posedge clk) disable iff (!rst_n)
                                  (st == G_DATA) |-> s_valid);
endmodule
