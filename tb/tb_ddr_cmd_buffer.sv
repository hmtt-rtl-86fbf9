// tb_ddr_cmd_buffer -- random DDR pin patterns into the command buffer; each
// decoded command is compared, two clocks later, with a decode of the JEDEC
// truth table written out here as a lookup on the pin levels.
module tb_ddr_cmd_buffer;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cs_n, ras_n, cas_n, we_n;
  logic [BANK_W-1:0] ba;
  logic [ABUS_W-1:0] a;
  ddr_cmd_t cmd;

  ddr_cmd_buffer dut (.*);

  typedef struct { ddr_cmd_e c; logic [1:0] b; logic [12:0] a; } exp_t;
  exp_t pipe [$];

  function automatic ddr_cmd_e ref_dec(logic cs, logic r, logic c, logic w);
    string key;
    if (cs) return CMD_NOP;
    key = $sformatf("%0d%0d%0d", r, c, w);
    case (key)
      "011": return CMD_ACT;   "101": return CMD_READ; "100": return CMD_WRITE;
      "010": return CMD_PRE;   "001": return CMD_REF;  "000": return CMD_MRS;
      "110": return CMD_BST;   default: return CMD_NOP;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen [8];
    cs_n = 1; ras_n = 1; cas_n = 1; we_n = 1; ba = 0; a = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (pipe.size() == 2) begin
        exp_t e;
        e = pipe.pop_front();
        checks++;
        if (cmd.cmd != e.c || (e.c != CMD_NOP && (cmd.bank != e.b || cmd.addr != e.a))) begin
          failures++;
          if (failures < 10) $display("mismatch %0d: got %s exp %s", i, cmd.cmd.name(), e.c.name());
        end
        seen[int'(e.c)]++;
      end
      cs_n = ($urandom_range(0, 7) == 0); ras_n = $urandom; cas_n = $urandom; we_n = $urandom;
      ba = 2'($urandom); a = 13'($urandom);
      pipe.push_back('{ref_dec(cs_n, ras_n, cas_n, we_n), ba, a});
    end
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (seen[c] == 0) begin failures++; $display("command %0d never seen", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
