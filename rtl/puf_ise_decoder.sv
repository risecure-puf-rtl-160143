// puf_ise_decoder -- decodes the two RISecure-PUF instructions.
//
// Purely combinational. The instruction word is checked against the R-type
// encodings of the ISE: opcode 0101011 with funct7 = 0, and funct3 = 001 for
// inner_puf_init (which must also have rs2 = x0) or funct3 = 010 for
// outer_puf_chal. Any other word with that opcode is reported as OP_ILLEGAL,
// any other opcode as OP_NONE. The encodings are the paper's; the placement
// of the PUF index, the challenge and E[1:0] inside the rs1 value (see
// puf_pkg) and the operand checks are this design's choice: the index must be
// below NUM_PUF, and outer_puf_chal may not use the reserved E = 11.
// bad_operand flags a violated operand check on a decoded instruction.
// idx, chal and mode are plain bit fields of rs1, wired straight through.
module puf_ise_decoder
  import puf_pkg::*;
#(
  parameter int unsigned P_NUM_PUF = puf_pkg::NUM_PUF,
  parameter int unsigned P_CW      = puf_pkg::CW,
  localparam int unsigned P_IDXW   = (P_NUM_PUF > 1) ? $clog2(P_NUM_PUF) : 1
) (
  input  logic [31:0]       instr,
  input  logic [XLEN-1:0]   rs1,
  output puf_op_e           op,
  output logic [P_IDXW-1:0] idx,
  output logic [P_CW-1:0]   chal,
  output puf_mode_e         mode,
  output logic              bad_operand
);

  rtype_t ins;
  logic [RS1_IDX_W-1:0] idx_field;

  assign ins       = rtype_t'(instr);
  assign idx_field = rs1[RS1_IDX_LSB +: RS1_IDX_W];
  assign idx       = idx_field[P_IDXW-1:0];
  assign chal      = rs1[P_CW-1:0];
  assign mode      = puf_mode_e'(rs1[RS1_E_LSB +: 2]);

  always_comb begin
    op = OP_NONE;
    if (ins.opcode == OPC_PUF) begin
      op = OP_ILLEGAL;
      if (ins.funct7 == F7_PUF) begin
        if (ins.funct3 == F3_INIT && ins.rs2 == 5'd0) op = OP_INIT;
        else if (ins.funct3 == F3_CHAL)                op = OP_CHAL;
      end
    end
  end

  always_comb begin
    bad_operand = 1'b0;
    if (op == OP_INIT || op == OP_CHAL) begin
      if (32'(idx_field) >= P_NUM_PUF) bad_operand = 1'b1;
      if (op == OP_CHAL && mode == E_RSVD) bad_operand = 1'b1;
    end
  end

endmodule
