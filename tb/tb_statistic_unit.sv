// tb_statistic_unit -- random references (read/write, any bank, random line
// addresses) and random reuse-distance results go into the Statistic Unit
// with a 400-clock interval while the record output is back-pressured at
// random. The testbench counts the same events per interval itself
// (interval n covers clocks n*400+1 .. n*400+400 after reset), rebuilds each
// report from the SP_STAT_LO/HI words and compares all 38 counters. A second
// phase uses a 30-clock interval, shorter than a report takes to send, and
// checks that reports are skipped and counted.
module tb_statistic_unit;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int IV = 400;
  localparam int NC = 38;

  logic clear, enable, raw_valid, rd_valid, rd_miss, out_valid, out_ready;
  logic [26:0] interval;
  ref_t raw_ref;
  logic [6:0] rd_dist;
  logic [31:0] out_data;
  logic [15:0] skipped;

  statistic_unit dut (.*);

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

  int model [20][NC];
  int got   [20][NC];
  int got_hdr [20];
  int nrep = 0, cur = -1, j = 0;
  logic [22:0] prev = '0;

  // output parser
  always @(posedge clk) if (rst_n && out_valid && out_ready && interval == 27'(IV)) begin
    int idx;
    idx = int'(out_data[27:20]);
    if (out_data[31:28] == 4'hC && idx == 255) begin
      cur = int'(out_data[19:0]); nrep++;
      if (cur < 20) got_hdr[cur] = 1;
    end else if (cur >= 0 && cur < 20 && idx < NC) begin
      if (out_data[30:28] == 3'd4) got[cur][idx] += int'(out_data[19:0]);
      else if (out_data[30:28] == 3'd5) got[cur][idx] += int'(out_data[19:0]) << 20;
      else chk(0, "bad word type");
    end
  end

  initial begin
    int n, bin;
    clear = 0; enable = 1; interval = 27'(IV); raw_valid = 0; raw_ref = '0;
    rd_valid = 0; rd_miss = 0; rd_dist = 0; out_ready = 1;
    foreach (model[a, b]) begin model[a][b] = 0; got[a][b] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (j = 1; j <= 10 * IV; j++) begin
      @(negedge clk);
      n = (j - 1) / IV;
      out_ready = ($urandom_range(0, 2) != 0);
      raw_valid = ($urandom_range(0, 2) != 0);
      raw_ref = '{write: 1'($urandom), cfg: 1'b0, line: 23'($urandom)};
      rd_valid = ($urandom_range(0, 1) != 0);
      rd_miss = ($urandom_range(0, 5) == 0);
      rd_dist = 7'($urandom_range(0, 127));
      if (raw_valid) begin
        model[n][raw_ref.write ? 1 : 0]++;
        model[n][2 + int'(raw_ref.line[9:8])]++;
        for (int i = 0; i < 23; i++) if (raw_ref.line[i] != prev[i]) model[n][6 + i]++;
        prev = raw_ref.line;
      end
      if (rd_valid) begin
        if (rd_miss) bin = 8;
        else if (rd_dist == 0) bin = 0;
        else begin bin = 1; while ((1 << bin) <= int'(rd_dist)) bin++; end
        model[n][29 + bin]++;
      end
    end
    @(negedge clk);
    raw_valid = 0; rd_valid = 0; out_ready = 1;
    repeat (200) @(negedge clk);
    for (int r = 0; r < 10; r++) begin
      chk(got_hdr[r] == 1, $sformatf("report %0d seen", r));
      for (int c = 0; c < NC; c++)
        chk(got[r][c] == model[r][c], $sformatf("report %0d counter %0d: %0d vs %0d", r, c, got[r][c], model[r][c]));
    end
    chk(skipped == 0, "nothing skipped at 400");
    // phase 2: interval shorter than a report
    enable = 0; clear = 1; @(negedge clk); clear = 0;
    interval = 27'd30; enable = 1;
    repeat (1000) @(negedge clk);
    chk(skipped > 10, $sformatf("skipped=%0d", skipped));
    $display("reports=%0d skipped(phase 2)=%0d", nrep, skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
