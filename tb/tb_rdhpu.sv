// tb_rdhpu -- a skewed random page stream (half from 8 hot pages, half from
// 300 pages, so that both stack hits at every depth and misses occur) into
// the 128-entry LRU stack. A queue-based LRU list in the testbench gives the
// expected reuse distance or miss for every reference and the expected
// hot-page reports; `clear` must empty the stack.
module tb_rdhpu;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, ref_valid, rd_valid, rd_miss, hot_valid;
  logic [PAGE_W-1:0] ref_page, hot_page;
  logic [6:0] rd_dist;

  rdhpu dut (.*);

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

  int lru [$];         // page numbers, most recent first
  int cnt [$];
  int n_hit = 0, n_miss = 0, n_hot = 0, maxd = 0;

  initial begin
    int p, pos, c, e_hot;
    bit e_miss; int e_dist;
    clear = 0; ref_valid = 0; ref_page = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40000; i++) begin
      @(negedge clk);
      if (i == 30000) begin
        clear = 1; @(negedge clk); clear = 0;
        lru.delete(); cnt.delete();
      end
      p = ($urandom_range(0, 1)) ? $urandom_range(0, 7) : $urandom_range(0, 299);
      ref_valid = ($urandom_range(0, 7) != 0);
      ref_page = 17'(p * 3 + 5);
      if (ref_valid) begin
        pos = -1;
        foreach (lru[j]) if (lru[j] == p) begin pos = j; break; end
        e_miss = (pos < 0); e_dist = e_miss ? 0 : pos;
        if (e_miss) begin
          c = 1;
          if (lru.size() == 128) begin void'(lru.pop_back()); void'(cnt.pop_back()); end
        end else begin
          c = (cnt[pos] == 255) ? 255 : cnt[pos] + 1;
          e_hot = (cnt[pos] != 64);
          lru.delete(pos); cnt.delete(pos);
        end
        e_hot = (c == 64);
        lru.push_front(p); cnt.push_front(c);
        @(posedge clk); #1;
        chk(rd_valid, "rd_valid");
        chk(rd_miss == e_miss, "miss");
        if (!e_miss) chk(int'(rd_dist) == e_dist, $sformatf("dist %0d exp %0d", rd_dist, e_dist));
        chk(hot_valid == e_hot, "hot_valid");
        if (e_hot) chk(hot_page == 17'(p * 3 + 5), "hot_page");
        if (e_miss) n_miss++; else n_hit++;
        if (e_hot) n_hot++;
        if (!e_miss && e_dist > maxd) maxd = e_dist;
      end else begin
        @(posedge clk); #1;
        chk(!rd_valid && !hot_valid, "idle");
      end
    end
    chk(n_hit > 1000 && n_miss > 1000 && n_hot > 4 && maxd > 100,
        $sformatf("coverage hit=%0d miss=%0d hot=%0d maxdist=%0d", n_hit, n_miss, n_hot, maxd));
    $display("hits=%0d misses=%0d hot=%0d max distance=%0d", n_hit, n_miss, n_hot, maxd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
