// tb_ddr_bank_fsm -- drives random ACTIVE/READ/WRITE/other strobes into one
// bank state machine and checks the state after every command against the
// transition table of the simplified state diagram (kept here as a table),
// the latched row and every reference output, including the flag that marks
// references to configuration-space rows.
module tb_ddr_bank_fsm;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic act, rd, wr, cfg_hit, ref_valid;
  logic [ROW_W-1:0] row_in;
  logic [COL_W-1:0] col_in;
  ref_t ref_o;
  logic [1:0] state_o;

  ddr_bank_fsm #(.BANK(2'd2)) dut (.*);

  // states: 0 IDLE, 1 ACTIVE, 2 READ, 3 WRITE; events: 0 else, 1 act, 2 act+cfg, 3 rd, 4 wr
  int tbl [4][5] = '{ '{0, 1, 0, 2, 3},     // IDLE
                      '{1, 1, 0, 2, 3},     // ACTIVE
                      '{0, 1, 1, 2, 3},     // READ
                      '{0, 1, 1, 2, 3} };   // WRITE
  int trans_seen [4][5];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int st = 0, ev;
    static logic [ROW_W-1:0] row = '0;
    static logic cfg_open = 1'b0;
    logic exp_v; ref_t exp_r;
    act = 0; rd = 0; wr = 0; cfg_hit = 0; row_in = 0; col_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      ev = $urandom_range(0, 4);
      act = (ev == 1 || ev == 2); rd = (ev == 3); wr = (ev == 4);
      row_in = (ev == 2) ? {6'h3F, 7'($urandom)} : 13'($urandom_range(0, 8063));
      cfg_hit = (ev == 2);
      col_in = 11'($urandom);
      exp_v = rd || wr;
      exp_r = '{write: wr, cfg: cfg_open, line: {row, 2'd2, col_in[10:3]}};
      trans_seen[st][ev]++;
      st = tbl[st][ev];
      if (act) begin row = row_in; cfg_open = cfg_hit; end
      @(posedge clk); #1;
      checks++;
      if (int'(state_o) != st) begin
        failures++; if (failures < 10) $display("state %0d exp %0d at %0d", state_o, st, i);
      end
      checks++;
      if (ref_valid != exp_v || (exp_v && ref_o != exp_r)) begin
        failures++; if (failures < 10) $display("ref mismatch at %0d", i);
      end
    end
    foreach (trans_seen[s, e]) begin
      checks++;
      if (trans_seen[s][e] == 0) begin failures++; $display("transition %0d/%0d not hit", s, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
