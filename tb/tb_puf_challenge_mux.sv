// tb_puf_challenge_mux -- checks that each E[1:0] routes the right challenge
// to the PUF: C for 00, C0 for 10, the fixed weak-PUF challenge otherwise.
module tb_puf_challenge_mux;
  import puf_pkg::*;

  puf_mode_e     e;
  logic [CW-1:0] c, c0, pc;
  int checks = 0, failures = 0;

  puf_challenge_mux #(.P_CW(CW), .WEAK_CHAL(32'h0000_00A5)) dut (.e, .c, .c0, .puf_chal(pc));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      logic [CW-1:0] exp;
      e  = puf_mode_e'(n % 4);
      c  = $urandom;
      c0 = $urandom;
      #1;
      exp = (n % 4 == 0) ? c : (n % 4 == 2) ? c0 : 32'hA5;
      checks++;
      if (pc !== exp) begin
        failures++;
        $display("FAIL: E=%0d c=%h c0=%h got %h", n % 4, c, c0, pc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
