// tb_tx_fifo_unit -- the TX FIFO Unit at its full 16K depth with a 100 MHz
// write clock and a 125 MHz read clock. Phase 1: trace, statistics and
// hot-page sources all offer words at random while the reader takes words at
// random; each source's words must come out complete and in order, and the
// priority must hold (statistics never written while trace is offered).
// Phase 2: the reader stops and the trace source fills the FIFO; exactly
// 16384 words must be accepted before trc_ready drops, and all of them must
// then read out in order.
module tb_tx_fifo_unit;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, tx_clk = 1'b0, tx_rst_n = 1'b1;
  initial begin #1 rst_n = 1'b0; tx_rst_n = 1'b0; end   // real reset edges
  always #5 clk = ~clk;
  always #4 tx_clk = ~tx_clk;
  int checks = 0, failures = 0;

  logic trc_valid, trc_ready, st_valid, st_ready, hot_valid, rd_valid, rd_en;
  logic [31:0] trc_data, st_data, rd_data;
  logic [PAGE_W-1:0] hot_page;
  logic [15:0] hot_lost;
  logic [14:0] max_level;

  tx_fifo_unit dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #3ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t_sent = 0, s_sent = 0, h_sent = 0, t_got = 0, s_got = 0, h_got = 0;
  bit rd_enable = 1;
  bit phase2 = 0;

  // reader
  always @(negedge tx_clk) rd_en = rd_enable && rd_valid && ($urandom_range(0, 3) != 0);
  always @(posedge tx_clk) if (tx_rst_n && rd_en && rd_valid) begin
    if (rd_data[31] == 1'b0) begin
      chk(rd_data[30:0] == 31'(t_got), $sformatf("trace order %0d vs %0d", rd_data[30:0], t_got));
      t_got++;
    end else if (rd_data[30:28] == 3'd4) begin
      chk(rd_data[27:0] == 28'(s_got), "stat order");
      s_got++;
    end else if (rd_data[30:28] == 3'd6) begin
      chk(int'(rd_data[16:0]) >= h_got, "hot order");
      h_got = int'(rd_data[16:0]) + 1;
    end else chk(0, "bad word");
  end

  // writers
  always @(posedge clk) if (rst_n) begin
    if (trc_valid && trc_ready) t_sent++;
    if (st_valid && st_ready) begin
      chk(!trc_valid, "priority");
      s_sent++;
    end
  end

  initial begin
    trc_valid = 0; st_valid = 0; hot_valid = 0; trc_data = 0; st_data = 0; hot_page = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; tx_rst_n = 1;
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      trc_valid = ($urandom_range(0, 2) == 0);
      trc_data = {1'b0, 31'(t_sent)};
      st_valid = ($urandom_range(0, 2) == 0);
      st_data = {1'b1, 3'd4, 28'(s_sent)};
      hot_valid = ($urandom_range(0, 40) == 0);
      if (hot_valid) begin hot_page = 17'(h_sent); h_sent++; end
    end
    @(negedge clk);
    trc_valid = 0; st_valid = 0; hot_valid = 0;
    repeat (400) @(negedge clk);
    chk(t_got == t_sent && s_got == s_sent, $sformatf("counts t %0d/%0d s %0d/%0d", t_got, t_sent, s_got, s_sent));
    chk(h_got + int'(hot_lost) >= h_sent - 1 && h_got > 0, "hot pages");
    // phase 2: fill
    rd_enable = 0;
    repeat (20) @(negedge clk);
    begin
      int acc, base;
      acc = 0;
      base = t_sent;
      while (acc < 20000) begin
        @(negedge clk);
        trc_valid = 1; trc_data = {1'b0, 31'(t_sent)};
        @(posedge clk);
        if (!trc_ready) break;
        acc++;
      end
      @(negedge clk); trc_valid = 0;
      chk(acc == 16384, $sformatf("accepted %0d words before full", acc));
      chk(int'(max_level) == 16384, $sformatf("max_level %0d", max_level));
    end
    rd_enable = 1;
    repeat (30000) @(negedge clk);
    chk(t_got == t_sent, $sformatf("after fill %0d/%0d", t_got, t_sent));
    $display("trace=%0d stats=%0d hot=%0d lost=%0d", t_got, s_got, h_got, hot_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
