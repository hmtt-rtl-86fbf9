// tx_thread_unit -- TX Thread Unit.
// Drains the TX FIFO in the transmit clock and cuts the word stream into
// Ethernet frames for NUM_GE Gigabit Ethernet ports (three in the paper's
// board), one "thread" per port. Each thread owns one FRAME_WORDS-word frame
// buffer. The unit fills the buffer of the current thread, one FIFO word per
// clock; when it holds FRAME_WORDS words, or when the FIFO has been empty
// for FLUSH_CYCLES clocks with a partial frame waiting, the thread is handed
// to its MAC and filling moves on to the next thread, round-robin. A thread
// whose MAC is still sending its previous frame holds filling back, so the
// FIFO absorbs the wait. Because the frames are cut from one ordered
// stream, the receivers can merge their captures by sequence number and
// then rebuild time by summing the durations in the records.
// Frame bytes, sent to the MAC as valid/ready/last streams:
//   DST_MAC(6) SRC_MAC(6) ETHERTYPE(2) sequence(4) word count(2) words(4*n)
// all big-endian. The paper names the unit only; the framing, the sizes and
// the flush rule are this design's.
// Lint note: the top bit of the payload byte index pi is unused; it only
// matters while the header is being sent, when pi is not used.
module tx_thread_unit
  import hmtt_pkg::*;
#(
  parameter int          NUM_GE       = 3,
  parameter int          FRAME_WORDS  = 256,
  parameter int          FLUSH_CYCLES = 1024,
  parameter logic [47:0] DST_MAC      = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [47:0] SRC_MAC      = 48'h02_48_4D_54_54_00,
  parameter logic [15:0] ETHERTYPE    = 16'h88B5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rd_valid,
  input  logic [TRACE_W-1:0]  rd_data,
  output logic                rd_en,
  output logic [NUM_GE-1:0]   m_valid,
  output logic [7:0]          m_data [NUM_GE],
  output logic [NUM_GE-1:0]   m_last,
  input  logic [NUM_GE-1:0]   m_ready,
  output logic [31:0]         frames_built
);
  localparam int HDR   = 20;
  localparam int WA    = $clog2(FRAME_WORDS);
  localparam int BI_W  = $clog2(HDR + 4*FRAME_WORDS + 1);
  localparam int T_W   = (NUM_GE > 1) ? $clog2(NUM_GE) : 1;
  localparam int FL_W  = $clog2(FLUSH_CYCLES + 1);

  logic [T_W-1:0]   cur;
  logic [WA:0]      fcnt;
  logic [FL_W-1:0]  idle;
  logic [31:0]      seq;
  logic [NUM_GE-1:0] sending;
  logic             launch;

  // -------- filling --------
  assign rd_en  = rd_valid && !sending[cur];
  assign launch = !sending[cur] &&
                  ((rd_en && fcnt == (WA+1)'(FRAME_WORDS - 1)) ||
                   (!rd_valid && fcnt != '0 && idle >= FL_W'(FLUSH_CYCLES - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; fcnt <= '0; idle <= '0; seq <= '0; frames_built <= '0;
    end else begin
      if (rd_en) begin
        fcnt <= fcnt + 1'b1;
        idle <= '0;
      end else if (fcnt != '0 && !sending[cur] && idle != '1) idle <= idle + 1'b1;
      if (launch) begin
        fcnt <= '0;
        idle <= '0;
        seq  <= seq + 32'd1;
        frames_built <= frames_built + 32'd1;
        cur  <= (int'(cur) == NUM_GE - 1) ? '0 : cur + 1'b1;
      end
    end
  end

  // -------- one thread per port --------
  for (genvar t = 0; t < NUM_GE; t++) begin : g_thr
    logic [TRACE_W-1:0] fbuf [FRAME_WORDS];
    logic [WA:0]        nwords;
    logic [31:0]        fseq;
    logic [BI_W-1:0]    bi;
    logic [BI_W-1:0]    total;
    logic [BI_W-1:0]    pi;
    logic [TRACE_W-1:0] w;
    logic [7:0]         hb;
    logic               mine;
    logic               snd;

    assign sending[t] = snd;

    assign mine = (int'(cur) == t);

    always_ff @(posedge clk) begin
      if (rd_en && mine) fbuf[fcnt[WA-1:0]] <= rd_data;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        snd <= 1'b0;
        nwords <= '0; fseq <= '0; bi <= '0;
      end else begin
        if (launch && mine) begin
          snd <= 1'b1;
          nwords <= rd_en ? fcnt + 1'b1 : fcnt;
          fseq   <= seq;
          bi     <= '0;
        end else if (m_valid[t] && m_ready[t]) begin
          bi <= bi + 1'b1;
          if (m_last[t]) snd <= 1'b0;
        end
      end
    end

    assign total = BI_W'(HDR) + BI_W'({nwords, 2'b00});
    assign pi    = bi - BI_W'(HDR);
    assign w     = fbuf[pi[WA+1:2]];

    always_comb begin
      unique case (bi)
        BI_W'(0):  hb = DST_MAC[47:40];
        BI_W'(1):  hb = DST_MAC[39:32];
        BI_W'(2):  hb = DST_MAC[31:24];
        BI_W'(3):  hb = DST_MAC[23:16];
        BI_W'(4):  hb = DST_MAC[15:8];
        BI_W'(5):  hb = DST_MAC[7:0];
        BI_W'(6):  hb = SRC_MAC[47:40];
        BI_W'(7):  hb = SRC_MAC[39:32];
        BI_W'(8):  hb = SRC_MAC[31:24];
        BI_W'(9):  hb = SRC_MAC[23:16];
        BI_W'(10): hb = SRC_MAC[15:8];
        BI_W'(11): hb = SRC_MAC[7:0] + 8'(t);
        BI_W'(12): hb = ETHERTYPE[15:8];
        BI_W'(13): hb = ETHERTYPE[7:0];
        BI_W'(14): hb = fseq[31:24];
        BI_W'(15): hb = fseq[23:16];
        BI_W'(16): hb = fseq[15:8];
        BI_W'(17): hb = fseq[7:0];
        BI_W'(18): hb = 8'(16'(nwords) >> 8);
        BI_W'(19): hb = 8'(nwords);
        default:   hb = w[8*(3 - int'(pi[1:0])) +: 8];
      endcase
    end

    assign m_valid[t] = snd;
    assign m_data[t]  = hb;
    assign m_last[t]  = snd && (bi == total - 1'b1);
  end
endmodule
