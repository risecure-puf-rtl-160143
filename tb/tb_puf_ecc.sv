// tb_puf_ecc -- checks the fuzzy-extractor ECC. Enrollment: aux xor R1 must
// be, codeword by codeword, the BCH codeword of the random number r (found by
// the reference's enumeration of multiples of g(x)). Reconstruction: with up
// to two flipped bits per codeword R2 must equal r, dec_fail must stay low
// and the latency must be NBLK clocks plus one per error pattern tried (the
// position of the true pattern in the (i, j) search order, plus one). With
// three flips in a codeword the result must not be silently accepted as r.
module tb_puf_ecc;
  import tb_ref_pkg::*;
  localparam int NBLK = 4, RW = 60, KW = 28;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          enc_valid = 0, enc_done, dec_start = 0, dec_busy, dec_done, dec_fail;
  logic [RW-1:0] enc_r1, enc_aux, dec_r1, dec_aux;
  logic [KW-1:0] enc_rnd, dec_r2;
  int checks = 0, failures = 0;

  puf_ecc #(.P_NBLK(NBLK)) dut (.clk, .rst_n, .enc_valid, .enc_r1, .enc_rnd, .enc_done, .enc_aux,
    .dec_start, .dec_r1, .dec_aux, .dec_busy, .dec_done, .dec_r2, .dec_fail);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int pattern_rank(input int p, input int q);  // p <= q
    int r = 0;
    for (int i = 0; i < p; i++) r += 15 - i;
    return r + (q - p);
  endfunction

  task automatic enroll(input logic [RW-1:0] r1, input logic [KW-1:0] r, output logic [RW-1:0] aux);
    @(negedge clk);
    enc_valid = 1; enc_r1 = r1; enc_rnd = r;
    @(negedge clk);
    enc_valid = 0;
    check(enc_done, "enc_done one clock after enc_valid");
    aux = enc_aux;
  endtask

  task automatic reconstruct(input logic [RW-1:0] r1, input logic [RW-1:0] aux,
                             output logic [KW-1:0] r2, output bit fail, output int cyc);
    @(negedge clk);
    dec_start = 1; dec_r1 = r1; dec_aux = aux;
    @(negedge clk);
    dec_start = 0;
    check(dec_busy, "busy while decoding");
    cyc = 0;   // clock edges since the start edge
    while (!dec_done) begin @(negedge clk); cyc++; end
    r2 = dec_r2; fail = dec_fail;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_fail3 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [RW-1:0] r1, aux, err;
      logic [KW-1:0] r, r2;
      bit fail;
      int cyc, exp_cyc;
      r1 = {$urandom, $urandom};
      r  = 28'($urandom);
      enroll(r1, r, aux);
      for (int b = 0; b < NBLK; b++)
        check((aux[b*15 +: 15] ^ r1[b*15 +: 15]) == bch_cw(r[b*7 +: 7]), $sformatf("codeword %0d", b));
      // up to two errors per codeword
      err = '0;
      exp_cyc = NBLK;
      for (int b = 0; b < NBLK; b++) begin
        int ne, p, q;
        ne = (n < 4) ? 0 : $urandom % 3;
        p = $urandom % 15;
        q = (p + 1 + $urandom % 14) % 15;
        if (ne == 1) begin err[b*15 + p] = 1; exp_cyc += pattern_rank(p, p) + 1; end
        if (ne == 2) begin
          err[b*15 + p] = 1; err[b*15 + q] = 1;
          exp_cyc += (p < q) ? pattern_rank(p, q) + 1 : pattern_rank(q, p) + 1;
        end
      end
      reconstruct(r1 ^ err, aux, r2, fail, cyc);
      check(r2 == r, $sformatf("R2 %h expected %h", r2, r));
      check(!fail, "no failure with <= 2 errors");
      check(cyc == exp_cyc, $sformatf("decode latency %0d expected %0d", cyc, exp_cyc));
      // three errors in codeword 1
      if (n % 3 == 0) begin
        int p0, p1, p2;
        p0 = $urandom % 15;
        p1 = (p0 + 1 + $urandom % 14) % 15;
        do p2 = $urandom % 15; while (p2 == p0 || p2 == p1);
        err = '0;
        err[15 + p0] = 1; err[15 + p1] = 1; err[15 + p2] = 1;
        reconstruct(r1 ^ err, aux, r2, fail, cyc);
        check(fail || r2[13:7] != r[13:7], "three errors are not corrected to r");
        check(r2[6:0] == r[6:0] && r2[27:14] == r[27:14], "other codewords unaffected");
        if (fail) n_fail3++;
      end
    end
    check(n_fail3 > 0, "uncorrectable words are flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
