// rdhpu -- Reuse Distance & Hot Pages Unit.
// Its core is a DEPTH-entry (128, as in the paper) LRU stack of 4 KB page
// numbers. For each reference the unit looks the page up in the stack:
//   * found at depth d: the page's reuse distance is d (the number of other
//     distinct pages touched since its last use); entries 0..d-1 move down
//     one place and the page goes to the top with its hit count + 1;
//   * not found: a miss (distance beyond DEPTH); every entry moves down,
//     the bottom one falls out, and the page enters at the top with count 1.
// When a page's count reaches HOT_THRESH it is reported once on hot_valid/
// hot_page (it is reported again only after it has left the stack).
// The paper builds the stack as an enhanced systolic array from other work;
// this design uses the plainer equivalent, a shift stack with one comparator
// per entry and a priority encoder, which gives the same order and distances
// at one reference per clock. The hit counter and threshold are this
// design's way of "collecting hot pages".
// Timing: rd_valid/rd_dist/rd_miss and hot_* are registered, one clock after
// ref_valid. `clear` empties the stack.
module rdhpu
  import hmtt_pkg::*;
#(
  parameter int DEPTH      = 128,
  parameter int CNT_W      = 8,
  parameter int HOT_THRESH = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      ref_valid,
  input  logic [PAGE_W-1:0]         ref_page,
  output logic                      rd_valid,
  output logic                      rd_miss,
  output logic [$clog2(DEPTH)-1:0]  rd_dist,
  output logic                      hot_valid,
  output logic [PAGE_W-1:0]         hot_page
);
  localparam int D_W = $clog2(DEPTH);

  logic [PAGE_W-1:0] page [DEPTH];
  logic [CNT_W-1:0]  cnt  [DEPTH];
  logic [DEPTH-1:0]  vld;

  logic [DEPTH-1:0]  match;
  logic              hit;
  logic [D_W-1:0]    pos;
  logic [CNT_W-1:0]  new_cnt;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) match[i] = vld[i] && (page[i] == ref_page);
    hit = |match;
    pos = '0;
    for (int i = DEPTH-1; i >= 0; i--) if (match[i]) pos = D_W'(i);
    if (!hit)                   new_cnt = CNT_W'(1);
    else if (cnt[pos] == '1)    new_cnt = cnt[pos];
    else                        new_cnt = cnt[pos] + CNT_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld       <= '0;
      rd_valid  <= 1'b0;
      rd_miss   <= 1'b0;
      rd_dist   <= '0;
      hot_valid <= 1'b0;
      hot_page  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        page[i] <= '0;
        cnt[i]  <= '0;
      end
    end else if (clear) begin
      vld       <= '0;
      rd_valid  <= 1'b0;
      hot_valid <= 1'b0;
    end else begin
      rd_valid  <= ref_valid;
      hot_valid <= 1'b0;
      if (ref_valid) begin
        rd_miss <= !hit;
        rd_dist <= hit ? pos : '0;
        for (int i = DEPTH-1; i > 0; i--) begin
          if (!hit || D_W'(i) <= pos) begin
            page[i] <= page[i-1];
            cnt[i]  <= cnt[i-1];
            vld[i]  <= vld[i-1];
          end
        end
        page[0] <= ref_page;
        cnt[0]  <= new_cnt;
        vld[0]  <= 1'b1;
        if (new_cnt == CNT_W'(HOT_THRESH) && (!hit || cnt[pos] != CNT_W'(HOT_THRESH))) begin
          hot_valid <= 1'b1;
          hot_page  <= ref_page;
        end
      end
    end
  end
endmodule
