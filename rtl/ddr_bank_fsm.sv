// ddr_bank_fsm -- the simplified DDR state machine for one bank.
// Four states, IDLE, ACTIVE, READ and WRITE, and only three commands matter:
// ACTIVE, READ and WRITE; every other command is "else". The transitions
// follow the paper's state diagram:
//   IDLE  : ACTIVE (not filtered) -> ACTIVE, READ -> READ, WRITE -> WRITE
//   ACTIVE: filtered ACTIVE -> IDLE, READ -> READ, WRITE -> WRITE
//   READ  : READ -> READ, WRITE -> WRITE, ACTIVE -> ACTIVE, else -> IDLE
//   WRITE : WRITE -> WRITE, READ -> READ, ACTIVE -> ACTIVE, else -> IDLE
// ACTIVE latches the row (row <- addr); READ and WRITE output the reference
// <row, column, r/w> (out <- row, addr). The "filter" is the configuration
// space: the diagram marks it as addr = 0 in bank 0, while the text puts the
// space at the top of physical memory, so here `cfg_hit` (row inside the
// configuration space) plays that role. This design also latches the row of
// a filtered ACTIVE and keeps a cfg_open flag, so that READ/WRITE to that
// row leave with ref.cfg set and can be told apart from normal traffic.
// Timing: act/rd/wr are single-cycle strobes for this bank; ref_valid/ref
// follow one clock later.
// Synthesis note: the bank field of ref_o is the constant BANK.
module ddr_bank_fsm
  import hmtt_pkg::*;
#(
  parameter logic [BANK_W-1:0] BANK = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               act,
  input  logic               rd,
  input  logic               wr,
  input  logic [ROW_W-1:0]   row_in,    // A bus during ACTIVE
  input  logic [COL_W-1:0]   col_in,    // column during READ/WRITE
  input  logic               cfg_hit,   // row_in lies in the configuration space
  output logic               ref_valid,
  output ref_t               ref_o,
  output logic [1:0]         state_o
);
  typedef enum logic [1:0] {S_IDLE, S_ACTIVE, S_READ, S_WRITE} state_e;
  state_e             state, nxt;
  logic [ROW_W-1:0]   row;
  logic               cfg_open;

  always_comb begin
    nxt = state;
    unique case (state)
      S_IDLE:   if (act && !cfg_hit) nxt = S_ACTIVE;
                else if (rd)         nxt = S_READ;
                else if (wr)         nxt = S_WRITE;
      S_ACTIVE: if (act && cfg_hit)  nxt = S_IDLE;
                else if (rd)         nxt = S_READ;
                else if (wr)         nxt = S_WRITE;
      S_READ:   if (rd)              nxt = S_READ;
                else if (wr)         nxt = S_WRITE;
                else if (act)        nxt = S_ACTIVE;
                else                 nxt = S_IDLE;
      S_WRITE:  if (wr)              nxt = S_WRITE;
                else if (rd)         nxt = S_READ;
                else if (act)        nxt = S_ACTIVE;
                else                 nxt = S_IDLE;
      default:                       nxt = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      cfg_open  <= 1'b0;
      ref_valid <= 1'b0;
      ref_o     <= '0;
    end else begin
      state     <= nxt;
      ref_valid <= 1'b0;
      if (act) begin
        row      <= row_in;
        cfg_open <= cfg_hit;
      end
      if (rd || wr) begin
        ref_valid <= 1'b1;
        ref_o     <= '{write: wr, cfg: cfg_open, line: line_of(row, BANK, col_in)};
      end
    end
  end

  assign state_o = state;

  // one command per cycle on a DDR bus
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                              $onehot0({act, rd, wr}));
endmodule
