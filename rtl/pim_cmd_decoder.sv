// pim_cmd_decoder: DDR4 command decoder of a GradPIM device.
//
// Decodes the command/address pins sampled in one cycle into a dev_cmd_t.
// The ordinary DDR4 commands (ACT, PRE, RD, WR, MRS) keep their standard
// encoding; the RFU encoding (ACT_n=H, RAS_n=L, CAS_n=H, WE_n=H) carries the
// GradPIM commands. Bank group, bank and column address keep their usual
// pins, and five otherwise free address pins select the operation:
//
//   Op0 Op1 | Param0 Param1 | Src/Dst | operation
//   L   L   | scale id      | Dst     | scaled read
//   H   L   | src position  | Dst     | dequantize
//   H   H   | dst position  | Src     | quantize
//   L   H   | L      L      | Src     | writeback
//   L   H   | H      L      | RD/WR   | quantization register read/write
//   L   H   | H      H      | Dst     | add
//   L   H   | L      H      | Dst     | sub
//
// The truth table is the paper's. Which pin carries which field is this
// design's choice: Op0=A12, Op1=A17, Param0=A13, Param1=A11, Src/Dst=A10;
// two-bit fields are {Param1, Param0}; RD/WR is L=read, H=write. An MRS
// reports its mode register number {BG0, BA1, BA0} and A[13:0]; MR7 is used
// by the GradPIM units for the scaler table.
//
// Purely combinational: the command is valid in the cycle the pins are.
// cs_n high gives CMD_NOP.
module pim_cmd_decoder
  import gradpim_pkg::*;
(
  input  logic      cs_n,
  input  ddr_pins_t pins,
  output dev_cmd_t  cmd
);

  logic op0, op1, p0, p1;

  always_comb begin
    op0 = pins.a[12];
    op1 = pins.a[17];
    p0  = pins.a[13];
    p1  = pins.a[11];

    cmd         = '0;
    cmd.kind    = CMD_NOP;
    cmd.op      = OP_NONE;
    cmd.bg      = pins.bg;
    cmd.ba      = pins.ba;
    cmd.row     = {pins.cas_n, pins.we_n, pins.a[13:0]};
    cmd.col     = pins.a[9:0];
    cmd.param   = {p1, p0};
    cmd.sd      = pins.a[10];
    cmd.ap      = pins.a[10];
    cmd.mr      = {pins.bg[0], pins.ba};
    cmd.mr_data = pins.a[13:0];

    if (!cs_n) begin
      if (!pins.act_n) begin
        cmd.kind = CMD_ACT;
      end else begin
        unique case ({pins.ras_n, pins.cas_n, pins.we_n})
          3'b000: cmd.kind = CMD_MRS;
          3'b001: cmd.kind = CMD_OTH;   // refresh
          3'b010: cmd.kind = CMD_PRE;
          3'b011: cmd.kind = CMD_PIM;   // RFU
          3'b100: cmd.kind = CMD_WR;
          3'b101: cmd.kind = CMD_RD;
          3'b110: cmd.kind = CMD_OTH;   // ZQ calibration
          default: cmd.kind = CMD_NOP;
        endcase
      end
    end

    if (cmd.kind == CMD_PIM) begin
      unique case ({op0, op1})
        2'b00: cmd.op = OP_SRD;
        2'b10: cmd.op = OP_DEQ;
        2'b11: cmd.op = OP_QNT;
        default: begin
          unique case ({p0, p1})
            2'b00: cmd.op = OP_WB;
            2'b10: cmd.op = pins.a[10] ? OP_QWR : OP_QRD;
            2'b11: cmd.op = OP_ADD;
            default: cmd.op = OP_SUB;
          endcase
        end
      endcase
    end
  end

endmodule
