// tb_config_unit -- random ACTIVE/READ/WRITE traffic, half of it aimed at
// the configuration space (and mostly at the four inner-command offsets).
// A model computes the byte offset of each configuration-space read from
// row, bank and column arithmetically ((row-8064)*64K + bank*16K + col*8)
// and checks the work mode, the clear pulse and the tag outputs one clock
// after every command. Every inner command and a user-defined event must
// occur at least once.
module tb_config_unit;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ddr_cmd_t cmd;
  work_mode_e mode;
  logic clear, tag_valid, user_event;
  logic [CFG_IDX_W-1:0] tag_idx;

  config_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    static int m_mode = 0;             // 0 off, 1 trace, 2 bw
    int bank_row [4];
    bit bank_cfg [4];
    int n_cmd [5];
    int kind, b, col, off;
    bit e_tag, e_clear, e_user; int e_idx, prev_mode;
    for (int i = 0; i < 4; i++) begin bank_row[i] = 0; bank_cfg[i] = 0; end
    cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      kind = $urandom_range(0, 9);
      b = $urandom_range(0, 3);
      e_tag = 0; e_clear = 0; e_user = 0; e_idx = 0; prev_mode = m_mode;
      if (kind < 3) begin                 // ACTIVE
        int row;
        if ($urandom_range(0, 1)) row = ($urandom_range(0, 3) == 0) ? 8064 + $urandom_range(0, 127) : 8064;
        else row = $urandom_range(0, 8063);
        cmd = '{cmd: CMD_ACT, bank: 2'(b), addr: 13'(row)};
        bank_row[b] = row; bank_cfg[b] = (row >= 8064);
      end else if (kind < 8) begin        // READ
        col = ($urandom_range(0, 1)) ? 8 * $urandom_range(0, 4) : $urandom_range(0, 2047);
        if (b != 0 && $urandom_range(0, 1)) b = 0;
        cmd = '{cmd: CMD_READ, bank: 2'(b), addr: {col[10], 1'b0, col[9:0]}};
        if (bank_cfg[b]) begin
          off = (bank_row[b] - 8064) * 65536 + b * 16384 + col * 8;
          e_idx = off / 64;
          case (off / 64 * 64)
            'h0:  begin m_mode = 1; n_cmd[0]++; end
            'h40: begin m_mode = 0; n_cmd[1]++; end
            'h80: begin m_mode = 0; e_clear = 1; n_cmd[2]++; end
            'hC0: begin m_mode = 2; n_cmd[3]++; end
            default: ;
          endcase
          e_user = (off >= 'h1000);
          if (e_user) n_cmd[4]++;
          e_tag = (prev_mode != 0) || (m_mode != 0);
        end
      end else if (kind == 8) begin
        cmd = '{cmd: CMD_WRITE, bank: 2'(b), addr: 13'($urandom)};
      end else begin
        cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
      end
      @(posedge clk); #1;
      chk(int'(mode) == m_mode, "mode");
      chk(clear == e_clear, "clear");
      chk(tag_valid == e_tag, "tag_valid");
      if (e_tag) chk(int'(tag_idx) == e_idx, "tag_idx");
      chk(user_event == e_user, "user_event");
    end
    for (int c = 0; c < 5; c++) chk(n_cmd[c] > 0, $sformatf("command kind %0d exercised", c));
    $display("inner commands: begin=%0d end=%0d reset=%0d bw=%0d user=%0d",
             n_cmd[0], n_cmd[1], n_cmd[2], n_cmd[3], n_cmd[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
