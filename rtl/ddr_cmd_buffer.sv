// ddr_cmd_buffer -- DDR Command Buffer Unit (DCBU).
// Captures the command pins of the snooped DIMM (CS#, RAS#, CAS#, WE#, BA,
// A) on every rising edge of the memory clock and decodes them into a
// command struct for the Config Unit and the DDR State Machine Unit.
// Stage 1 is the pin capture register (the flops that sit next to the FPGA
// pads); stage 2 decodes the JEDEC command truth table and registers the
// result, so `cmd` is valid two clocks after the pins. A deselected chip
// (CS# high) decodes as NOP. The paper gives the unit's role (capture and
// buffer commands); the two-stage depth and the decoding are this design's.
module ddr_cmd_buffer
  import hmtt_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cs_n,
  input  logic                ras_n,
  input  logic                cas_n,
  input  logic                we_n,
  input  logic [BANK_W-1:0]   ba,
  input  logic [ABUS_W-1:0]   a,
  output ddr_cmd_t            cmd
);
  logic              cs_q, ras_q, cas_q, we_q;
  logic [BANK_W-1:0] ba_q;
  logic [ABUS_W-1:0] a_q;
  ddr_cmd_e          dec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_q <= 1'b1; ras_q <= 1'b1; cas_q <= 1'b1; we_q <= 1'b1;
      ba_q <= '0;   a_q <= '0;
    end else begin
      cs_q <= cs_n; ras_q <= ras_n; cas_q <= cas_n; we_q <= we_n;
      ba_q <= ba;   a_q <= a;
    end
  end

  always_comb begin
    if (cs_q) dec = CMD_NOP;
    else begin
      unique case ({ras_q, cas_q, we_q})
        3'b011:  dec = CMD_ACT;
        3'b101:  dec = CMD_READ;
        3'b100:  dec = CMD_WRITE;
        3'b010:  dec = CMD_PRE;
        3'b001:  dec = CMD_REF;
        3'b000:  dec = CMD_MRS;
        3'b110:  dec = CMD_BST;
        default: dec = CMD_NOP;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd <= '{cmd: CMD_NOP, bank: '0, addr: '0};
    else        cmd <= '{cmd: dec, bank: ba_q, addr: a_q};
  end
endmodule
