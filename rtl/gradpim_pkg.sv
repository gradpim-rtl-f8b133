// gradpim_pkg: types and constants shared by the GradPIM blocks.
//
// GradPIM puts a small compute unit next to the I/O gating of every bank
// group of a DDR4 device. This package holds what the blocks share: the data
// widths of one x8 device (a 64-bit column per burst, two 32-bit master words
// or eight 8-bit quantized values), the decoded DDR4 command, the GradPIM
// operations of the RFU-command truth table, the scaler-table entry, the
// column request to a bank group, and the function that encodes a GradPIM
// operation onto the command/address pins (the inverse of pim_cmd_decoder).
//
// Follows the paper: 32-bit high precision and 8-bit low precision words,
// 64-bit column per x8 device, 2-bit bank, 2-bit bank group, 16-bit row and
// 10-bit column addresses, the Op0/Op1/Param0/Param1/Src-Dst fields.
// Own choices: which address pin carries which field (A12, A17, A13, A11,
// A10 in the order the standard's free pins are usually listed), the MR7
// layout of the scaler table, and the scale ids of the four hyperparameters.
package gradpim_pkg;

  localparam int WORD_W  = 32;               // high-precision word
  localparam int Q_W     = 8;                // low-precision word
  localparam int COL_W   = 64;               // bits per column access of one x8 device
  localparam int LANES   = COL_W / WORD_W;   // 32-bit words per column
  localparam int QLANES  = COL_W / Q_W;      // 8-bit words per column
  localparam int QRATIO  = WORD_W / Q_W;     // quarters of the quantization register
  localparam int QPART_W = COL_W / QRATIO;   // bits of one quarter
  localparam int ROW_W   = 16;
  localparam int COLA_W  = 10;               // column address (burst index in [9:3])
  localparam int CIDX_W  = 7;                // burst index within a row

  // Scale ids used by the update procedures (contents are programmable).
  localparam logic [1:0] SID_ONE     = 2'd0;
  localparam logic [1:0] SID_ETA     = 2'd1;
  localparam logic [1:0] SID_ALPHA   = 2'd2;
  localparam logic [1:0] SID_ETABETA = 2'd3;

  typedef enum logic [3:0] {
    OP_NONE = 4'd0,
    OP_SRD  = 4'd1,   // scaled read: bank column -> scaler -> Reg[dst]
    OP_DEQ  = 4'd2,   // RegQ quarter -> dequantize -> Reg[dst]
    OP_QNT  = 4'd3,   // Reg[src] -> quantize -> RegQ quarter
    OP_WB   = 4'd4,   // Reg[src] -> bank column
    OP_QRD  = 4'd5,   // bank column -> RegQ
    OP_QWR  = 4'd6,   // RegQ -> bank column
    OP_ADD  = 4'd7,   // Reg[dst] = Reg0 + Reg1
    OP_SUB  = 4'd8    // Reg[dst] = Reg[other] - Reg[dst]
  } pim_op_e;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4,
    CMD_MRS = 3'd5,
    CMD_PIM = 3'd6,
    CMD_OTH = 3'd7    // REF, ZQ: no effect on GradPIM
  } cmd_kind_e;

  // Command/address pins of one DDR4 channel in one cycle (chip selects apart).
  // a[16:14] are the shared RAS_n/CAS_n/WE_n pins and are not used separately.
  typedef struct packed {
    logic        act_n;
    logic        ras_n;
    logic        cas_n;
    logic        we_n;
    logic [1:0]  bg;
    logic [1:0]  ba;
    logic [17:0] a;
  } ddr_pins_t;

  localparam ddr_pins_t PINS_NOP = '{act_n: 1'b1, ras_n: 1'b1, cas_n: 1'b1, we_n: 1'b1,
                                      bg: 2'd0, ba: 2'd0, a: 18'd0};

  typedef struct packed {
    cmd_kind_e         kind;
    pim_op_e           op;
    logic [1:0]        bg;
    logic [1:0]        ba;
    logic [ROW_W-1:0]  row;
    logic [COLA_W-1:0] col;
    logic [1:0]        param;    // scale id or quarter position
    logic              sd;       // src/dst register id
    logic              ap;       // auto precharge / precharge all (A10)
    logic [2:0]        mr;       // mode register number
    logic [13:0]       mr_data;
  } dev_cmd_t;

  // Scale = 2^-n (sop 0), 2^-n + 2^-m (sop 1), 2^-n - 2^-m (sop 2), 0 (sop 3).
  typedef struct packed {
    logic [1:0] sop;
    logic [4:0] m;
    logic [4:0] n;
  } scale_t;

  // Column request from a GradPIM unit to its bank group I/O gating.
  typedef struct packed {
    logic              rd;
    logic              wr;
    logic [1:0]        bank;
    logic [COLA_W-1:0] col;
    logic [COL_W-1:0]  wdata;
  } bg_req_t;

  // Row command passed to the banks of a device.
  typedef struct packed {
    logic             act;
    logic             pre;
    logic             pre_all;
    logic [1:0]       bg;
    logic [1:0]       ba;
    logic [ROW_W-1:0] row;
  } row_cmd_t;

  // One GradPIM command of a bank group, as produced by the sequencer.
  typedef struct packed {
    pim_op_e           op;
    logic [1:0]        bank;
    logic [COLA_W-1:0] col;
    logic [1:0]        param;
    logic              sd;
  } pim_uop_t;

  typedef enum logic [1:0] {
    HL_DEQUANT = 2'd0,
    HL_UPDATE  = 2'd1,
    HL_QUANT   = 2'd2
  } hl_kind_e;

  // High-level command of the buffer device for one bank group.
  typedef struct packed {
    hl_kind_e          kind;
    logic [CIDX_W-1:0] first;   // first full-precision column (burst index)
    logic [CIDX_W:0]   count;   // number of full-precision columns
  } hl_cmd_t;

  function automatic logic op_is_col(pim_op_e op);
    return op inside {OP_SRD, OP_WB, OP_QRD, OP_QWR};
  endfunction

  function automatic logic op_is_alu(pim_op_e op);
    return op inside {OP_ADD, OP_SUB, OP_QNT, OP_DEQ};
  endfunction

  // RFU command (ACT_n=H, RAS_n=L, CAS_n=H, WE_n=H) with
  // Op0=A12, Op1=A17, Param0=A13, Param1=A11, Src/Dst=A10.
  function automatic ddr_pins_t encode_pim(pim_uop_t u, logic [1:0] bg);
    ddr_pins_t p;
    logic op0, op1, p0, p1;
    p = PINS_NOP;
    p.ras_n = 1'b0;
    p.bg = bg;
    p.ba = u.bank;
    p.a[9:0] = u.col;
    {p1, p0} = u.param;
    unique case (u.op)
      OP_SRD:  begin op0 = 1'b0; op1 = 1'b0; end
      OP_DEQ:  begin op0 = 1'b1; op1 = 1'b0; end
      OP_QNT:  begin op0 = 1'b1; op1 = 1'b1; end
      OP_WB:   begin op0 = 1'b0; op1 = 1'b1; p0 = 1'b0; p1 = 1'b0; end
      OP_QRD,
      OP_QWR:  begin op0 = 1'b0; op1 = 1'b1; p0 = 1'b1; p1 = 1'b0; end
      OP_ADD:  begin op0 = 1'b0; op1 = 1'b1; p0 = 1'b1; p1 = 1'b1; end
      OP_SUB:  begin op0 = 1'b0; op1 = 1'b1; p0 = 1'b0; p1 = 1'b1; end
      default: begin op0 = 1'b0; op1 = 1'b0; end
    endcase
    p.a[12] = op0;
    p.a[17] = op1;
    p.a[13] = p0;
    p.a[11] = p1;
    p.a[10] = (u.op == OP_QWR) ? 1'b1 : (u.op == OP_QRD) ? 1'b0 : u.sd;
    if (u.op == OP_NONE) p = PINS_NOP;
    return p;
  endfunction

endpackage
