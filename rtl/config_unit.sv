// config_unit -- Config Unit (CU).
// Software controls the tracer by reading addresses in a reserved region of
// physical memory, the configuration space (top 8 MB of the DIMM). The unit
// watches the buffered DDR commands: an ACTIVE records, per bank, whether the
// opened row lies in the configuration space and which of its 128 rows it
// is; a READ to such a row forms the line index {row offset, bank,
// column[10:3]} (byte offset / 64). The index is translated into an inner
// command, as the paper defines the offsets:
//   0x0    BEGIN_TRACING  -> work mode TRACE
//   0x40   END_TRACING    -> work mode OFF
//   0x80   RESET_TRACING  -> work mode OFF, one-cycle `clear` to the
//                            counters of the trace path
//   0xC0   OUTPUT_BW      -> work mode BW (no raw references)
//   0x1000 and above      user-defined high-level events
// Every configuration-space read made while tracing is active before or after
// it is also passed on as a synchronisation tag (tag_valid/tag_idx), which
// the DSMU inserts into the trace. What OUTPUT_BW and RESET_TRACING do beyond
// their names, and that writes to the space are ignored, are this design's
// choices. Timing: outputs are registered, one clock after `cmd`, which lines
// them up with the references of the bank state machines.
// Lint note: col[2:0] select the word inside a burst and are not part of
// the line index, so they are unused on purpose.
module config_unit
  import hmtt_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  ddr_cmd_t              cmd,
  output work_mode_e            mode,
  output logic                  clear,
  output logic                  tag_valid,
  output logic [CFG_IDX_W-1:0]  tag_idx,
  output logic                  user_event     // tag is a user-defined event
);
  logic [NUM_BANKS-1:0]    cfg_open;
  logic [CFG_ROW_BITS-1:0] row_off [NUM_BANKS];
  logic                    hit;
  logic [CFG_IDX_W-1:0]    idx;
  logic [COL_W-1:0]        col;
  work_mode_e              nmode;

  assign col = col_of(cmd.addr);
  assign hit = (cmd.cmd == CMD_READ) && cfg_open[cmd.bank];
  assign idx = {row_off[cmd.bank], cmd.bank, col[COL_W-1:BL_LOG2]};

  always_comb begin
    nmode = mode;
    if (hit) begin
      unique case (idx)
        IDX_BEGIN_TRACING: nmode = MODE_TRACE;
        IDX_END_TRACING:   nmode = MODE_OFF;
        IDX_RESET_TRACING: nmode = MODE_OFF;
        IDX_OUTPUT_BW:     nmode = MODE_BW;
        default:           nmode = mode;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_open   <= '0;
      for (int b = 0; b < NUM_BANKS; b++) row_off[b] <= '0;
      mode       <= MODE_OFF;
      clear      <= 1'b0;
      tag_valid  <= 1'b0;
      tag_idx    <= '0;
      user_event <= 1'b0;
    end else begin
      if (cmd.cmd == CMD_ACT) begin
        cfg_open[cmd.bank] <= is_cfg_row(cmd.addr[ROW_W-1:0]);
        row_off[cmd.bank]  <= cmd.addr[CFG_ROW_BITS-1:0];
      end
      mode       <= nmode;
      clear      <= hit && (idx == IDX_RESET_TRACING);
      tag_valid  <= hit && ((mode != MODE_OFF) || (nmode != MODE_OFF));
      tag_idx    <= idx;
      user_event <= hit && (idx >= IDX_USER_BASE);
    end
  end
endmodule
