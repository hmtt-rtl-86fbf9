// tb_ddr_state_machine_unit -- DDR traffic with DDR-like spacing (one
// READ/WRITE at most every four clocks), random idle gaps of up to 600
// clocks, configuration-space tags and work-mode changes. A model keeps the
// clock count of the previous record and predicts every output word: the
// duration low bits, a duration-high record in front when the gap is 128
// clocks or more, nothing for references outside TRACE mode. The output is
// back-pressured at random. A last phase stalls the output completely and
// checks that records beyond the queue depth are dropped and counted, and
// that the next record's duration still spans the dropped ones.
module tb_ddr_state_machine_unit;
  import hmtt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // a real reset edge before the first clock
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ddr_cmd_t cmd;
  work_mode_e mode;
  logic clear, tag_valid, out_valid, out_ready, raw_valid;
  logic [CFG_IDX_W-1:0] tag_idx;
  logic [TRACE_W-1:0] out_data;
  ref_t raw_ref;
  logic [15:0] drop_count;

  ddr_state_machine_unit dut (.*);

  int cyc = 0;           // posedges since reset release
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  logic [31:0] expq [$];
  int last_k = 0;
  int n_ref = 0, n_tag = 0, n_hi = 0, n_raw = 0, exp_raw = 0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (expq.size() == 0) chk(0, "unexpected word");
    else begin
      logic [31:0] e;
      e = expq.pop_front();
      checks++;
      if (e != out_data) begin
        failures++;
        if (failures < 10) $display("word %h expected %h at %0t", out_data, e, $time);
      end
    end
  end
  always @(posedge clk) if (rst_n && raw_valid) n_raw++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_rec(input int k, input logic [31:0] body_wo_dur, input bit is_tag);
    int d = k - last_k;
    if (d >= 128) begin
      expq.push_back({1'b1, 3'd0, 28'(d >> 7)});
      n_hi++;
    end
    if (is_tag) expq.push_back(body_wo_dur | (32'(d % 128) << 21));
    else        expq.push_back(body_wo_dur | (32'(d % 128) << 23));
    last_k = k;
  endfunction

  task automatic issue(input ddr_cmd_e c, input int bank, input int addr);
    @(negedge clk);
    cmd = '{cmd: c, bank: 2'(bank), addr: 13'(addr)};
    @(negedge clk);
    cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
  endtask

  initial begin
    int rows [4];
    int op, b, col, gap, m;
    cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
    mode = MODE_TRACE; clear = 0; tag_valid = 0; tag_idx = 0; out_ready = 1;
    for (int i = 0; i < 4; i++) rows[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); end
    join_none
    for (int i = 0; i < 3000; i++) begin
      op = $urandom_range(0, 9);
      b = $urandom_range(0, 3);
      if (op < 2) begin
        rows[b] = $urandom_range(0, 8063);
        issue(CMD_ACT, b, rows[b]);
      end else if (op < 8) begin
        bit w;
        int k;
        w = (op >= 6);
        col = $urandom_range(0, 2047);
        @(negedge clk);
        cmd = '{cmd: w ? CMD_WRITE : CMD_READ, bank: 2'(b), addr: {col[10], 1'b0, col[9:0]}};
        k = cyc + 1;                       // reference visible after next posedge
        if (mode == MODE_TRACE && rows[b] < 8064) begin
          expect_rec(k, {1'b0, w, 7'd0, 13'(rows[b]), 2'(b), 8'(col >> 3)}, 0);
          n_ref++;
        end
        if (mode != MODE_OFF && rows[b] < 8064) exp_raw++;
        @(negedge clk);
        cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
        repeat (2) @(negedge clk);
      end else if (op == 8) begin           // configuration-space tag
        int k, idx;
        idx = $urandom_range(0, 131071);
        rows[b] = 8064 + $urandom_range(0, 127);
        issue(CMD_ACT, b, rows[b]);
        @(negedge clk);
        cmd = '{cmd: CMD_READ, bank: 2'(b), addr: 13'($urandom)};
        k = cyc + 1;
        @(negedge clk);
        cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
        tag_valid = 1; tag_idx = 17'(idx);
        expect_rec(k, {1'b1, 3'd1, 7'd0, 4'd0, 17'(idx)}, 1);
        n_tag++;
        @(negedge clk);
        tag_valid = 0;
      end else begin
        gap = ($urandom_range(0, 3) == 0) ? $urandom_range(100, 600) : $urandom_range(1, 20);
        repeat (gap) @(negedge clk);
        m = $urandom_range(0, 9);
        if (m < 7) mode = MODE_TRACE; else if (m < 9) mode = MODE_BW; else mode = MODE_OFF;
      end
    end
    // drain
    mode = MODE_TRACE;
    wait (expq.size() == 0);
    repeat (10) @(negedge clk);
    chk(n_raw == exp_raw, $sformatf("raw trace count %0d vs %0d", n_raw, exp_raw));
    chk(drop_count == 0, "no drops while spaced");
    // ---- overflow phase ----
    @(negedge clk);
    out_ready = 0;
    disable fork;
    out_ready = 0;
    @(negedge clk);
    rows[0] = 77;
    issue(CMD_ACT, 0, 77);
    for (int i = 0; i < 6; i++) begin
      int k;
      @(negedge clk);
      cmd = '{cmd: CMD_READ, bank: 2'd0, addr: 13'(i * 8)};
      k = cyc + 1;
      if (i < 4) expect_rec(k, {1'b0, 1'b0, 7'd0, 13'd77, 2'd0, 8'(i)}, 0);
      @(negedge clk);
      cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
      repeat (30) @(negedge clk);
    end
    chk(drop_count == 2, $sformatf("drop_count=%0d, expected 2", drop_count));
    out_ready = 1;
    repeat (10) @(negedge clk);
    begin
      int k;
      @(negedge clk);
      cmd = '{cmd: CMD_WRITE, bank: 2'd0, addr: 13'd800};
      k = cyc + 1;
      expect_rec(k, {1'b0, 1'b1, 7'd0, 13'd77, 2'd0, 8'd100}, 0);
      @(negedge clk);
      cmd = '{cmd: CMD_NOP, bank: '0, addr: '0};
    end
    repeat (20) @(negedge clk);
    chk(expq.size() == 0, "all expected words seen");
    // clear
    clear = 1; @(negedge clk); clear = 0;
    chk(drop_count == 0, "clear resets drop count");
    chk(n_ref > 100 && n_tag > 50 && n_hi > 20, $sformatf("coverage ref=%0d tag=%0d hi=%0d", n_ref, n_tag, n_hi));
    $display("records: ref=%0d tag=%0d dur_hi=%0d raw=%0d", n_ref, n_tag, n_hi, n_raw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
