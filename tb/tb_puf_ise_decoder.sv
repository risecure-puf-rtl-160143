// tb_puf_ise_decoder -- self-checking test of the instruction decoder.
// Builds instruction words field by field from the ISE table and checks the
// decoded operation, the operand fields taken from rs1 and the operand checks.
module tb_puf_ise_decoder;
  import puf_pkg::*;

  logic [31:0]     instr;
  logic [XLEN-1:0] rs1;
  puf_op_e         op;
  logic [IDXW-1:0] idx;
  logic [CW-1:0]   chal;
  puf_mode_e       mode;
  logic            bad;
  int checks = 0, failures = 0;

  puf_ise_decoder dut (.instr, .rs1, .op, .idx, .chal, .mode, .bad_operand(bad));

  function automatic logic [31:0] rtype(input logic [6:0] f7, input logic [4:0] r2,
      input logic [4:0] r1, input logic [2:0] f3, input logic [4:0] rd, input logic [6:0] opc);
    return {f7, r2, r1, f3, rd, opc};
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (instr=%h rs1=%h op=%0d)", what, instr, rs1, op);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [4:0] rdf, r1f, r2f;
      logic [2:0] f3;
      logic [6:0] f7, opc;
      logic [7:0] idxf;
      logic [1:0] ef;
      logic [31:0] c;
      puf_op_e exp_op;
      bit exp_bad;
      rdf = 5'($urandom); r1f = 5'($urandom); r2f = 5'($urandom);
      c = $urandom;
      idxf = ($urandom % 4 == 0) ? 8'($urandom) : 8'($urandom % 4);
      ef = 2'($urandom);
      case (n % 8)
        0, 1, 2: begin f7 = 0; f3 = 3'b001; opc = 7'b0101011; if (n % 3 != 0) r2f = 0; end
        3, 4, 5: begin f7 = 0; f3 = 3'b010; opc = 7'b0101011; end
        6:       begin f7 = ($urandom % 2) ? 7'($urandom) : 0; f3 = 3'($urandom); opc = 7'b0101011; end
        default: begin f7 = 0; f3 = 3'b001; opc = 7'($urandom); end
      endcase
      instr = rtype(f7, r2f, r1f, f3, rdf, opc);
      rs1 = {ef, 22'($urandom), idxf, c};
      // independent expectation
      if (opc != 7'b0101011) exp_op = OP_NONE;
      else if (f7 == 0 && f3 == 3'b001 && r2f == 0) exp_op = OP_INIT;
      else if (f7 == 0 && f3 == 3'b010) exp_op = OP_CHAL;
      else exp_op = OP_ILLEGAL;
      exp_bad = 0;
      if (exp_op == OP_INIT || exp_op == OP_CHAL) begin
        if (idxf > 3) exp_bad = 1;
        if (exp_op == OP_CHAL && ef == 2'b11) exp_bad = 1;
      end
      #1;
      check(op == exp_op, "operation");
      check(bad == exp_bad, "operand check");
      check(chal == c, "challenge field");
      check(idx == idxf[1:0], "index field");
      check(mode == puf_mode_e'(ef), "E field");
    end
    // the two exact encodings from the ISE table
    instr = 32'b0000000_00000_00101_001_01010_0101011; rs1 = 64'h0000_0001_0000_1234; #1;
    check(op == OP_INIT && idx == 1 && chal == 32'h1234 && !bad, "inner_puf_init x10, x5");
    instr = 32'b0000000_00110_00101_010_01010_0101011; rs1 = 64'h8000_0003_DEAD_BEEF; #1;
    check(op == OP_CHAL && idx == 3 && chal == 32'hDEADBEEF && mode == E_HASH && !bad, "outer_puf_chal x10, x5, x6");
    // funct7 must be zero: every non-zero funct7 with either funct3 is illegal
    for (int f = 1; f < 128; f++) begin
      instr = rtype(7'(f), 5'd0, 5'd5, (f % 2) ? 3'b001 : 3'b010, 5'd10, 7'b0101011);
      rs1 = 64'h0;
      #1;
      check(op == OP_ILLEGAL, $sformatf("funct7 %0d is illegal", f));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
