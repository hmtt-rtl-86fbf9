// async_fifo -- dual-clock FIFO with gray-coded pointers.
// Write side in wclk, read side in rclk. Each side keeps a binary pointer
// one bit wider than the address and a gray copy; the gray pointers cross
// to the other clock through two flip-flops. `full` and `empty` are
// therefore conservative: they may stay set for up to three clocks after the
// other side has moved. The read port is first-word-fall-through: rdata
// shows the oldest word whenever `empty` is low, and `rd_en` removes it.
// wlevel is the write side's view of the fill level. DEPTH must be a power
// of two.
module async_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16384
) (
  input  logic              wclk,
  input  logic              wrst_n,
  input  logic              wr_en,
  input  logic [WIDTH-1:0]  wdata,
  output logic              full,
  output logic [$clog2(DEPTH):0] wlevel,
  input  logic              rclk,
  input  logic              rrst_n,
  input  logic              rd_en,
  output logic [WIDTH-1:0]  rdata,
  output logic              empty
);
  localparam int A = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [A:0] wbin, wgray, rbin, rgray;
  logic [A:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [A:0] rbin_w;

  function automatic logic [A:0] bin2gray(input logic [A:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [A:0] gray2bin(input logic [A:0] g);
    logic [A:0] b;
    b[A] = g[A];
    for (int i = A-1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[A-1:0]] <= wdata;
  end
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end
  assign rbin_w = gray2bin(rgray_w2);
  assign full   = (wgray == {~rgray_w2[A:A-1], rgray_w2[A-2:0]});
  assign wlevel = wbin - rbin_w;

  // read side
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[A-1:0]];
endmodule
