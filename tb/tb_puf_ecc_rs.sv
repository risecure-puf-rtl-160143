// tb_puf_ecc_rs -- checks the Reed-Solomon fuzzy extractor. Enrollment:
// aux xor R1 must be a codeword, i.e. vanish at a^1..a^8 (evaluated with
// log/antilog tables built here from the field polynomial), with the random
// number r in its top seven symbols. Reconstruction: with up to four
// corrupted symbols R2 must equal r, dec_fail must stay low and the result
// must come exactly 26 clocks after the start edge; with five or more it must
// never silently return r, and some of those words must be flagged.
module tb_puf_ecc_rs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        enc_valid = 0, enc_done, dec_start = 0, dec_busy, dec_done, dec_fail;
  logic [59:0] enc_r1, enc_aux, dec_r1, dec_aux;
  logic [27:0] enc_rnd, dec_r2;
  int checks = 0, failures = 0;

  puf_ecc_rs dut (.clk, .rst_n, .enc_valid, .enc_r1, .enc_rnd, .enc_done, .enc_aux,
    .dec_start, .dec_r1, .dec_aux, .dec_busy, .dec_done, .dec_r2, .dec_fail);

  int exp_t [15];     // a^i
  int log_t [16];

  function automatic int mul(input int a, input int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[(log_t[a] + log_t[b]) % 15];
  endfunction

  function automatic bit is_codeword(input logic [59:0] c);
    for (int j = 1; j <= 8; j++) begin
      int acc = 0;
      for (int i = 0; i < 15; i++) acc ^= mul(int'(c[4*i +: 4]), exp_t[(i * j) % 15]);
      if (acc != 0) return 0;
    end
    return 1;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [59:0] symbol_errors(input int n);
    logic [59:0] e = '0;
    int used [$];
    while (used.size() < n) begin
      int p = $urandom % 15;
      bit dup = 0;
      foreach (used[k]) if (used[k] == p) dup = 1;
      if (!dup) begin
        used.push_back(p);
        e[4*p +: 4] = 4'(1 + $urandom % 15);
      end
    end
    return e;
  endfunction

  task automatic reconstruct(input logic [59:0] r1, input logic [59:0] aux,
                             output logic [27:0] r2, output bit fail, output int cyc);
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
    int v = 1, nflag = 0;
    for (int i = 0; i < 15; i++) begin
      exp_t[i] = v; log_t[v] = i;
      v = v << 1;
      if (v & 16) v ^= 5'b10011;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [59:0] r1, aux;
      logic [27:0] r, r2;
      bit fail;
      int cyc, ne;
      r1 = {28'($urandom), $urandom};
      r  = 28'($urandom);
      @(negedge clk);
      enc_valid = 1; enc_r1 = r1; enc_rnd = r;
      @(negedge clk);
      enc_valid = 0;
      check(enc_done, "enc_done one clock after enc_valid");
      aux = enc_aux;
      check(is_codeword(aux ^ r1), "aux xor R1 is a codeword");
      check((aux ^ r1) >> 32 == 60'(r), "message in the top symbols");
      ne = n % 5;                       // 0..4 symbol errors
      reconstruct(r1 ^ symbol_errors(ne), aux, r2, fail, cyc);
      check(r2 == r && !fail, $sformatf("%0d symbol errors corrected (got %h, want %h, fail %0d)", ne, r2, r, fail));
      check(cyc == 26, $sformatf("decode latency %0d", cyc));
      if (n % 2 == 0) begin
        reconstruct(r1 ^ symbol_errors(5 + n % 4), aux, r2, fail, cyc);
        check(fail || r2 != r, "too many errors are not accepted as r");
        if (fail) nflag++;
      end
    end
    check(nflag > 0, "uncorrectable words are flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
